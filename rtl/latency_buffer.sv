// latency_buffer -- per-core history of quantized memory latencies.
//
// Keeps, for each core, the 32 most recent load latencies as INT8 samples:
// sample = min(latency >> lat_shift, 127). A push shifts the addressed core's
// history by one and inserts the new sample at position 0 (newest). The
// defender reads the history of one core through rd_core. One history per
// core and the 32-sample INT8 vector are published; the quantization rule
// and the zero reset are this design's choices.
//
// Timing: push takes effect at the clock edge; hist is a combinational read
// of the registered histories.
module latency_buffer
  import defender_pkg::*;
#(
  parameter int NUM_CORES = 6,
  localparam int CORE_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            push,
  input  logic [CORE_W-1:0] push_core,
  input  logic [TS_W-1:0] lat_cycles,
  input  logic [2:0]      lat_shift,
  input  logic [CORE_W-1:0] rd_core,
  output q8_t             hist [HIST_LEN]
);
  q8_t buf_q [NUM_CORES][HIST_LEN];
  q8_t sample;

  always_comb begin
    logic [TS_W-1:0] s;
    s = lat_cycles >> lat_shift;
    sample = (s > TS_W'(127)) ? 8'sd127 : q8_t'(s[6:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_CORES; c++)
        for (int i = 0; i < HIST_LEN; i++) buf_q[c][i] <= '0;
    end else if (push) begin
      for (int i = HIST_LEN - 1; i > 0; i--)
        buf_q[push_core][i] <= buf_q[push_core][i-1];
      buf_q[push_core][0] <= sample;
    end
  end

  always_comb
    for (int i = 0; i < HIST_LEN; i++) hist[i] = buf_q[rd_core][i];

  assert property (@(posedge clk) disable iff (!rst_n)
                   push |-> int'(push_core) < NUM_CORES)
    else $error("latency_buffer: core index out of range");
endmodule
