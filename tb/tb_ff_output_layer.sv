// tb_ff_output_layer -- checks the 16 -> 1 layer with ReLU and INT8
// saturation against the reference model, with random FP16 inputs in [-1, 1],
// and directed cases that must give 0 (negative sum) and 127 (saturation).
module tb_ff_output_layer;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  fp16_t      x [HID];
  q8_t        w [HID];
  q8_t        b;
  logic [7:0] y;
  int checks = 0, failures = 0, zeros = 0, sats = 0;

  ff_output_layer dut (.x, .w, .b, .y);

  task automatic check(input wvec_t wv, input hvec_t hv);
    int yr;
    for (int j = 0; j < 16; j++) begin
      x[j] = hv[j];
      w[j] = wv[2160 + j];
    end
    b = wv[2176];
    #1;
    yr = ff2(hv, wv);
    checks++;
    if (int'(y) != yr) begin
      failures++;
      if (failures < 10) $display("y = %0d, expected %0d", y, yr);
    end
    if (yr == 0) zeros++;
    if (yr == 127) sats++;
  endtask

  function automatic hvec_t rand_h();
    hvec_t h;
    for (int j = 0; j < 16; j++) h[j] = from_q12(longint'($urandom_range(8192, 0)) - 4096);
    return h;
  endfunction

  initial begin
    wvec_t wv;
    hvec_t hv;
    for (int t = 0; t < 2000; t++) begin
      wv = rand_weights(127);
      check(wv, rand_h());
    end
    // all-ones input, all weights +127: 16*127/32 + 127/32 = 67.47 -> * 128 -> 127
    for (int j = 0; j < 16; j++) begin
      wv[2160 + j] = 127;
      hv[j] = 16'h3C00;
    end
    wv[2176] = 127;
    check(wv, hv);
    checks++;
    if (y != 8'd127) failures++;
    // inputs +1, weights -1 (W=-32): sum -16 -> ReLU 0
    for (int j = 0; j < 16; j++) wv[2160 + j] = -32;
    wv[2176] = 0;
    check(wv, hv);
    checks++;
    if (y != 8'd0) failures++;
    // one input 0.5 with weight 1.0 (W=32): 0.5 * 128 = 64
    for (int j = 0; j < 16; j++) begin
      wv[2160 + j] = 0;
      hv[j] = 16'h0000;
    end
    wv[2160 + 3] = 32;
    hv[3] = 16'h3800;
    check(wv, hv);
    checks++;
    if (y != 8'd64) failures++;
    checks++;
    if (zeros == 0 || sats == 0) failures++;
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
