// tb_dropout_rng -- checks the dropout mask against an independent xorshift
// model for several thresholds, that the state only advances on step, that a
// zero threshold keeps everything and that the measured drop rate is close to
// threshold/256.
module tb_dropout_rng;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  logic clk = 0, rst_n = 0, step = 0;
  logic [7:0]  thr;
  logic [31:0] mask;
  logic [31:0] st, m;
  int checks = 0, failures = 0, cycles = 0;

  dropout_rng dut (.clk, .rst_n, .step, .drop_thresh(thr), .mask);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    int dropped;
    thr = 8'd64;
    st = 32'h2545_F491;
    repeat (2) @(posedge clk);
    rst_n = 1;
    dropped = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [31:0] s2;
      @(negedge clk);
      thr = (t < 1000) ? 8'd64 : 8'($urandom);
      step = (t % 4 != 3);
      #1;
      s2 = st;
      m = drop_mask(s2, int'(thr));
      checks++;
      if (mask !== m) begin
        failures++;
        if (failures < 10) $display("t %0d mask %h expected %h", t, mask, m);
      end
      if (t < 1000) dropped += 32 - $countones(mask);
      if (step) st = s2;
    end
    // drop rate 64/256 = 25 % of 32000 = 8000, accept +-5 %
    checks++;
    if (dropped < 7600 || dropped > 8400) begin
      failures++;
      $display("dropped %0d of 32000", dropped);
    end
    @(negedge clk);
    thr = 0;
    #1;
    checks++;
    if (mask !== '1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
