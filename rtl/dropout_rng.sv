// dropout_rng -- dropout mask generator, the defender's noise source.
//
// The published defender injects noise by dropout on the FF1 outputs and on
// the GRU outputs (32 positions per inference). This block draws one random
// byte per position and keeps the position when the byte is at least
// drop_thresh, so each position is dropped with probability drop_thresh/256
// (0 disables dropout). The generator is a 32-bit xorshift (shifts 13, 17,
// 5); eight rounds give the 256 bits of one inference, and the state advances
// by those eight rounds whenever step is high. The generator, the threshold
// compare and the absence of 1/(1-p) rescaling (left to the trained weights)
// are this design's choices.
//
// Timing: mask is combinational from the current state; step advances the
// state at the clock edge.
module dropout_rng
  import defender_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             step,
  input  logic [7:0]       drop_thresh,
  output logic [NMASK-1:0] mask          // 1 = keep, [0..15] FF1, [16..31] GRU
);
  localparam int ROUNDS = NMASK / 4;

  logic [31:0] state;
  logic [31:0] rnd [ROUNDS+1];

  function automatic logic [31:0] xorshift32(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  always_comb begin
    rnd[0] = state;
    for (int k = 1; k <= ROUNDS; k++) rnd[k] = xorshift32(rnd[k-1]);
    for (int i = 0; i < NMASK; i++)
      mask[i] = rnd[i/4 + 1][8*(i%4) +: 8] >= drop_thresh;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= SEED;
    else if (step) state <= rnd[ROUNDS];
  end

  initial assert (SEED != 0) else $error("xorshift seed must be non-zero");
endmodule
