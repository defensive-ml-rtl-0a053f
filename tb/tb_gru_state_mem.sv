// tb_gru_state_mem -- writes random FP16 state vectors to random cores and
// checks all cores against a model after every write, including that the
// state is zero after reset and that a write is visible one cycle later.
module tb_gru_state_mem;
  import defender_pkg::*;

  localparam int NC = 6;
  logic clk = 0, rst_n = 0, we = 0;
  logic [2:0] rd_core, wr_core;
  fp16_t rd_h [HID], wr_h [HID];
  logic [15:0] model [NC][HID];
  int checks = 0, failures = 0, cycles = 0;

  gru_state_mem #(.NUM_CORES(NC)) dut (.clk, .rst_n, .rd_core, .rd_h, .we, .wr_core, .wr_h);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic compare_all();
    for (int c = 0; c < NC; c++) begin
      rd_core = 3'(c);
      #1;
      for (int j = 0; j < HID; j++) begin
        checks++;
        if (rd_h[j] !== model[c][j]) begin
          failures++;
          if (failures < 10) $display("core %0d h[%0d] = %h expected %h", c, j, rd_h[j], model[c][j]);
        end
      end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) for (int j = 0; j < HID; j++) model[c][j] = 0;
    rd_core = 0; wr_core = 0;
    for (int j = 0; j < HID; j++) wr_h[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_all();
    for (int t = 0; t < 500; t++) begin
      int c;
      c = $urandom_range(NC - 1, 0);
      @(negedge clk);
      we = ($urandom_range(4, 0) != 0);
      wr_core = 3'(c);
      for (int j = 0; j < HID; j++) wr_h[j] = 16'($urandom);
      if (we) for (int j = 0; j < HID; j++) model[c][j] = wr_h[j];
      @(negedge clk);
      we = 0;
      compare_all();
    end
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
