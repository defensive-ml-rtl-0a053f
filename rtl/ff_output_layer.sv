// ff_output_layer -- last feed-forward layer and ReLU of the memory-side
// defender.
//
// Reduces the 16 FP16 GRU outputs to one delay value:
//   d = ReLU(sum_j W2[j] * x[j] + B2)
// The FP16 inputs are converted to Q.12 and multiplied by the INT8 weights
// (2**-5 scale); the sum, in units of 2**-17, is shifted right by 10 to the
// INT8 sample scale 2**-7, clamped at zero (ReLU, because a timing channel
// can only be lengthened) and saturated at 127. The 16 -> 1 shape, ReLU and
// INT8 output are published; the scaling is this design's choice.
// Purely combinational.
//
// Ports: x[j] FP16 inputs, w[j] weights, b bias, y delay in sample units.
module ff_output_layer
  import defender_pkg::*;
(
  input  fp16_t      x [HID],
  input  q8_t        w [HID],
  input  q8_t        b,
  output logic [7:0] y
);
  localparam int SH = FRAC + WS - XS;    // 10

  always_comb begin
    logic signed [39:0] acc;
    acc = 40'(b) <<< FRAC;
    for (int j = 0; j < HID; j++) acc += 40'(fp16_to_fix(x[j])) * 40'(w[j]);
    acc = acc >>> SH;
    if (acc < 0)         y = 8'd0;
    else if (acc > 127)  y = 8'd127;
    else                 y = acc[7:0];
  end
endmodule
