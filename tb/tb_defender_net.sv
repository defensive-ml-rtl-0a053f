// tb_defender_net -- runs the whole FF-GRU-FF network over sequences of
// latency histories, carrying the GRU state from step to step as the
// memory controller would, and compares the delay and the new state with the
// reference model on every step. Dropout masks are random, all-keep and
// all-drop; with all positions dropped the delay must equal ReLU of the
// output bias alone.
module tb_defender_net;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  q8_t              hist [HIST_LEN];
  fp16_t            h [HID], h_new [HID];
  q8_t              w [NPARAM];
  logic [NMASK-1:0] mask;
  logic [7:0]       delay_q;
  int checks = 0, failures = 0, nonzero = 0;

  defender_net dut (.hist, .h, .w, .mask, .delay_q, .h_new);

  initial begin
    wvec_t wv;
    xvec_t xv;
    hvec_t hv;
    int    d;
    for (int seq = 0; seq < 20; seq++) begin
      wv = rand_weights(seq < 10 ? 6 : 24);
      for (int a = 0; a < NPARAM; a++) w[a] = wv[a];
      for (int j = 0; j < 16; j++) hv[j] = 16'h0000;
      for (int i = 0; i < 32; i++) xv[i] = 0;
      for (int step = 0; step < 60; step++) begin
        for (int i = 31; i > 0; i--) xv[i] = xv[i-1];
        xv[0] = byte'($urandom_range(127, 20));
        for (int i = 0; i < 32; i++) hist[i] = xv[i];
        for (int j = 0; j < 16; j++) h[j] = hv[j];
        case (step % 3)
          0: mask = '1;
          1: mask = $urandom;
          default: mask = $urandom | $urandom;
        endcase
        #1;
        d = infer(xv, hv, wv, mask);
        checks++;
        if (int'(delay_q) != d) begin
          failures++;
          if (failures < 10) $display("seq %0d step %0d: delay %0d, expected %0d", seq, step, delay_q, d);
        end
        if (d != 0) nonzero++;
        for (int j = 0; j < 16; j++) begin
          checks++;
          if (h_new[j] !== hv[j]) failures++;
        end
      end
    end
    // all dropped: delay = ReLU(B2 * 2**-5 * 2**7) = 4 * B2
    w[OFF_B2] = 8'sd20;
    mask = '0;
    #1;
    checks++;
    if (delay_q != 8'd80) failures++;
    w[OFF_B2] = -8'sd20;
    #1;
    checks++;
    if (delay_q != 8'd0) failures++;
    checks++;
    if (nonzero == 0) failures++;
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
