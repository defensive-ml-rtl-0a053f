// ff_input_layer -- first feed-forward layer of the memory-side defender.
//
// Maps the 32-sample INT8 latency history of one core to 16 FP16 values:
//   y[j] = sum_i W1[j][i] * x[i] + B1[j]        (real values)
// With samples scaled by 2**-7 and weights by 2**-5 the integer sum is
// already Q.12, so the bias is aligned by 2**7 and the result saturated to
// Q.12 and rounded to FP16. The 32 -> 16 shape, INT8 input and FP16 output
// are the published architecture; the layer has no activation because none
// is drawn after it. Purely combinational: 512 parallel 8x8 multipliers.
//
// Ports: x[i] history sample (i = 0 newest), w[j][i] weights, b[j] biases,
// y[j] FP16 outputs.
module ff_input_layer
  import defender_pkg::*;
(
  input  q8_t   x [HIST_LEN],
  input  q8_t   w [HID][HIST_LEN],
  input  q8_t   b [HID],
  output fp16_t y [HID]
);
  always_comb begin
    for (int j = 0; j < HID; j++) begin
      logic signed [31:0] acc;
      acc = 32'(b[j]) <<< XS;
      for (int i = 0; i < HIST_LEN; i++) acc += 32'(x[i]) * 32'(w[j][i]);
      y[j] = fix_to_fp16(sat_fix(48'(acc)));
    end
  end
endmodule
