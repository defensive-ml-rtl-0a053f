// defender_net -- the compressed memory-side defender network.
//
// One inference maps the latency history of a core and that core's GRU state
// to an extra delay and a new GRU state:
//   a  = FF1(hist)              32 INT8 -> 16 FP16
//   a' = a with dropout          (mask bits 0..15)
//   h' = GRU(a', h)              16 FP16 state
//   g  = h' with dropout         (mask bits 16..31; the stored state is not
//                                 dropped, as the recurrent tap is drawn
//                                 above the second dropout point)
//   d  = ReLU(FF2(g))            1 INT8, in latency-sample units
// This is the published three-layer FF-GRU-FF structure with its sizes and
// number formats. The network is fully parallel and combinational, so it can
// take a new inference every cycle; the published work gives no clock rate or
// pipeline depth, so that is this design's choice.
//
// Ports: hist[i] INT8 samples (0 newest); h[j] FP16 state; w[] the 2177
// parameters in the defender_pkg layout; mask dropout keep bits;
// delay_q delay in sample units; h_new FP16 state to store.
module defender_net
  import defender_pkg::*;
(
  input  q8_t              hist  [HIST_LEN],
  input  fp16_t            h     [HID],
  input  q8_t              w     [NPARAM],
  input  logic [NMASK-1:0] mask,
  output logic [7:0]       delay_q,
  output fp16_t            h_new [HID]
);
  q8_t   w1   [HID][HIST_LEN];
  q8_t   b1   [HID];
  q8_t   wih  [NGATE][HID];
  q8_t   bih  [NGATE];
  q8_t   whh  [NGATE][HID];
  q8_t   bhh  [NGATE];
  q8_t   w2   [HID];
  fp16_t a    [HID];
  fp16_t a_d  [HID];
  fp16_t g_d  [HID];

  always_comb begin
    for (int j = 0; j < HID; j++) begin
      for (int i = 0; i < HIST_LEN; i++) w1[j][i] = w[OFF_W1 + j*HIST_LEN + i];
      b1[j] = w[OFF_B1 + j];
      w2[j] = w[OFF_W2 + j];
    end
    for (int g = 0; g < NGATE; g++) begin
      for (int k = 0; k < HID; k++) begin
        wih[g][k] = w[OFF_WIH + g*HID + k];
        whh[g][k] = w[OFF_WHH + g*HID + k];
      end
      bih[g] = w[OFF_BIH + g];
      bhh[g] = w[OFF_BHH + g];
    end
  end

  ff_input_layer u_ff1 (.x(hist), .w(w1), .b(b1), .y(a));

  always_comb
    for (int j = 0; j < HID; j++) a_d[j] = mask[j] ? a[j] : 16'h0000;

  gru_cell u_gru (.x(a_d), .h(h), .w_ih(wih), .b_ih(bih), .w_hh(whh),
                  .b_hh(bhh), .h_new(h_new));

  always_comb
    for (int j = 0; j < HID; j++) g_d[j] = mask[HID + j] ? h_new[j] : 16'h0000;

  ff_output_layer u_ff2 (.x(g_d), .w(w2), .b(w[OFF_B2]), .y(delay_q));
endmodule
