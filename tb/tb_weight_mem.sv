// tb_weight_mem -- writes random bytes to random parameter addresses and to
// the control registers, keeps a shadow copy, and compares every output with
// the shadow after each burst; also checks reset values and that writes to
// unmapped addresses change nothing.
module tb_weight_mem;
  import defender_pkg::*;

  logic clk = 0, rst_n = 0, cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr;
  logic [7:0] cfg_wdata;
  q8_t  w [NPARAM];
  cfg_t cfg;
  byte  shadow [NPARAM];
  cfg_t cshadow;
  int checks = 0, failures = 0, cycles = 0;

  weight_mem dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .w, .cfg);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic wr(input int a, input int d);
    @(negedge clk);
    cfg_we = 1;
    cfg_addr = CFG_AW'(a);
    cfg_wdata = 8'(d);
    @(negedge clk);
    cfg_we = 0;
    if (a < NPARAM) shadow[a] = byte'(d);
    else if (a == 'hF00) cshadow.enable = d[0];
    else if (a == 'hF01) cshadow.lat_shift = d[2:0];
    else if (a == 'hF02) cshadow.drop_thresh = 8'(d);
  endtask

  task automatic compare();
    for (int a = 0; a < NPARAM; a++) begin
      checks++;
      if (w[a] !== shadow[a]) begin
        failures++;
        if (failures < 10) $display("w[%0d] = %0d, expected %0d", a, w[a], shadow[a]);
      end
    end
    checks++;
    if (cfg !== cshadow) failures++;
  endtask

  initial begin
    for (int a = 0; a < NPARAM; a++) shadow[a] = 0;
    cshadow = '{enable: 1'b1, lat_shift: 3'd1, drop_thresh: 8'd0};
    cfg_addr = 0;
    cfg_wdata = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    compare();
    for (int burst = 0; burst < 10; burst++) begin
      for (int k = 0; k < 300; k++) wr($urandom_range(NPARAM - 1, 0), $urandom_range(255, 0));
      wr(NPARAM - 1, burst);
      wr(0, 255 - burst);
      wr('hF00, burst);
      wr('hF01, $urandom);
      wr('hF02, $urandom);
      wr('hF03, $urandom);       // unmapped
      wr(NPARAM, $urandom);      // unmapped
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
