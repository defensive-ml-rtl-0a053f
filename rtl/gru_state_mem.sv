// gru_state_mem -- per-core GRU hidden states of the memory-side defender.
//
// The defender network is shared by all cores but keeps one 16-entry FP16
// hidden state per core, so that each core's latency stream has its own
// recurrent memory. The state of rd_core is read combinationally for an
// inference and the updated state is written back with we. One state per
// core and the FP16 format are published; the reset to +0.0 is this design's
// choice.
//
// Timing: write at the clock edge, read combinational (a write is seen by the
// read in the next cycle).
module gru_state_mem
  import defender_pkg::*;
#(
  parameter int NUM_CORES = 6,
  localparam int CORE_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CORE_W-1:0] rd_core,
  output fp16_t             rd_h [HID],
  input  logic              we,
  input  logic [CORE_W-1:0] wr_core,
  input  fp16_t             wr_h [HID]
);
  fp16_t st [NUM_CORES][HID];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++)
        for (int j = 0; j < HID; j++) st[c][j] <= 16'h0000;
    end else if (we) begin
      for (int j = 0; j < HID; j++) st[wr_core][j] <= wr_h[j];
    end
  end

  always_comb
    for (int j = 0; j < HID; j++) rd_h[j] = st[rd_core][j];
endmodule
