// tb_latency_buffer -- pushes random latencies for random cores with random
// quantization shifts and checks every core's 32-sample history against a
// per-core queue model after each push (newest at position 0, samples
// saturated at 127, other cores untouched).
module tb_latency_buffer;
  import defender_pkg::*;

  localparam int NC = 6;
  logic clk = 0, rst_n = 0, push = 0;
  logic [2:0] push_core, rd_core;
  logic [TS_W-1:0] lat_cycles;
  logic [2:0] lat_shift;
  q8_t hist [HIST_LEN];
  int  model [NC][HIST_LEN];
  int checks = 0, failures = 0, cycles = 0, sat_seen = 0;

  latency_buffer #(.NUM_CORES(NC)) dut (.clk, .rst_n, .push, .push_core,
    .lat_cycles, .lat_shift, .rd_core, .hist);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    for (int c = 0; c < NC; c++) for (int i = 0; i < HIST_LEN; i++) model[c][i] = 0;
    push_core = 0; rd_core = 0; lat_cycles = 0; lat_shift = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      int c, s, q;
      c = $urandom_range(NC - 1, 0);
      s = $urandom_range(3, 0);
      @(negedge clk);
      push = ($urandom_range(3, 0) != 0);
      push_core = 3'(c);
      lat_shift = 3'(s);
      lat_cycles = TS_W'($urandom_range(600, 0));
      q = int'(lat_cycles) / (1 << s);
      if (q > 127) q = 127;
      if (push) begin
        for (int i = HIST_LEN - 1; i > 0; i--) model[c][i] = model[c][i-1];
        model[c][0] = q;
        if (q == 127) sat_seen++;
      end
      @(negedge clk);
      push = 0;
      for (int cc = 0; cc < NC; cc++) begin
        rd_core = 3'(cc);
        #1;
        for (int i = 0; i < HIST_LEN; i++) begin
          checks++;
          if (int'(hist[i]) != model[cc][i]) begin
            failures++;
            if (failures < 10) $display("core %0d hist[%0d] = %0d, expected %0d", cc, i, hist[i], model[cc][i]);
          end
        end
      end
    end
    checks++;
    if (sat_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
