// tb_ff_input_layer -- drives the 32 -> 16 input layer with random and corner
// histories and weights and compares every FP16 output bit-exactly with the
// reference model (which also covers saturation with full-scale weights).
module tb_ff_input_layer;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  q8_t   x [HIST_LEN];
  q8_t   w [HID][HIST_LEN];
  q8_t   b [HID];
  fp16_t y [HID];
  int checks = 0, failures = 0;

  ff_input_layer dut (.x, .w, .b, .y);

  task automatic run(input int span, input int xmax);
    wvec_t wv;
    xvec_t xv;
    hvec_t yr;
    wv = rand_weights(span);
    for (int i = 0; i < 32; i++) xv[i] = byte'($urandom_range(xmax, 0));
    for (int j = 0; j < 16; j++) begin
      for (int i = 0; i < 32; i++) w[j][i] = wv[j*32 + i];
      b[j] = wv[512 + j];
    end
    for (int i = 0; i < 32; i++) x[i] = xv[i];
    #1;
    yr = ff1(xv, wv);
    for (int j = 0; j < 16; j++) begin
      checks++;
      if (y[j] !== yr[j]) begin
        failures++;
        if (failures < 10) $display("y[%0d] = %h, expected %h", j, y[j], yr[j]);
      end
    end
  endtask

  initial begin
    for (int t = 0; t < 300; t++) run(8, 127);
    for (int t = 0; t < 100; t++) run(128, 127);   // large sums
    for (int t = 0; t < 100; t++) run(3, 4);       // small values, rounding
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
