// tb_gru_cell -- checks one GRU step bit-exactly against the reference model
// on random inputs, states and weights, plus directed cases: with all weights
// zero the gates are 1/2, n = 0 and h' = h/2 (floor in Q.12); with large positive z-biases the
// state is held (z = 1); with large negative z-biases it is replaced by n.
module tb_gru_cell;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  fp16_t x [HID], h [HID], h_new [HID];
  q8_t   w_ih [NGATE][HID], w_hh [NGATE][HID];
  q8_t   b_ih [NGATE], b_hh [NGATE];
  int checks = 0, failures = 0;

  gru_cell dut (.x, .h, .w_ih, .b_ih, .w_hh, .b_hh, .h_new);

  function automatic hvec_t rand_vec(input int mag);
    hvec_t v;
    for (int j = 0; j < 16; j++) v[j] = from_q12(longint'($urandom_range(2*mag, 0)) - mag);
    return v;
  endfunction

  task automatic drive(input wvec_t wv, input hvec_t xv, input hvec_t hv);
    for (int g = 0; g < 48; g++) begin
      for (int k = 0; k < 16; k++) begin
        w_ih[g][k] = wv[528 + g*16 + k];
        w_hh[g][k] = wv[1344 + g*16 + k];
      end
      b_ih[g] = wv[1296 + g];
      b_hh[g] = wv[2112 + g];
    end
    for (int k = 0; k < 16; k++) begin
      x[k] = xv[k];
      h[k] = hv[k];
    end
    #1;
  endtask

  task automatic cmp(input hvec_t exp_h, input string what);
    for (int j = 0; j < 16; j++) begin
      checks++;
      if (h_new[j] !== exp_h[j]) begin
        failures++;
        if (failures < 10) $display("%s: h_new[%0d] = %h, expected %h", what, j, h_new[j], exp_h[j]);
      end
    end
  endtask

  initial begin
    wvec_t wv;
    hvec_t xv, hv, ev;
    for (int t = 0; t < 400; t++) begin
      wv = rand_weights(40);
      xv = rand_vec(3 * 4096);
      hv = rand_vec(4096);
      drive(wv, xv, hv);
      cmp(gru(xv, hv, wv), "random");
    end
    // all-zero weights: h' = h / 2 (Q.12, rounded down)
    for (int a = 0; a < 2177; a++) wv[a] = 0;
    hv = rand_vec(4096);
    xv = rand_vec(4096);
    drive(wv, xv, hv);
    for (int j = 0; j < 16; j++) ev[j] = from_q12(floor_div(to_q12(hv[j]), 2));
    cmp(ev, "zero weights");
    // z bias +127/32 * 2 -> sig = 1: state held
    for (int g = 16; g < 32; g++) begin
      wv[1296 + g] = 127;
      wv[2112 + g] = 127;
    end
    drive(wv, xv, hv);
    cmp(hv, "z = 1");
    // z bias very negative -> z = 0; n = tanh(bin) with bin = 16/32 = 0.5
    for (int g = 16; g < 32; g++) begin
      wv[1296 + g] = -128;
      wv[2112 + g] = -128;
    end
    for (int g = 32; g < 48; g++) wv[1296 + g] = 16;
    drive(wv, xv, hv);
    for (int j = 0; j < 16; j++) ev[j] = 16'h3800;
    cmp(ev, "z = 0");
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
