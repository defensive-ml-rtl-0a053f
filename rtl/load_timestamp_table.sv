// load_timestamp_table -- measures the memory latency of every load.
//
// The defender needs, for each load, the time it reached the memory
// controller (t_in) and the time DRAM produced its data (t_out). This table
// is indexed by the load's tag: a request writes t_in and the issuing core;
// a DRAM return reads them back and emits (t_out - t_in, core, tag) one cycle
// later. The table also remembers, per tag, the delay the defender chose for
// that load until the MC hands the response to the delay buffer; a lookup
// sees a delay written in the same cycle (bypass). Measuring t_in and t_out
// is published; the tag-indexed table, the free-running 16-bit cycle counter
// (wrap-around subtraction, so latencies must stay below 65536 cycles) and
// the delay store are this design's choices.
//
// Timing: lat_* valid in the cycle after ret_valid. A request for a tag
// clears any delay held for that tag.
module load_timestamp_table
  import defender_pkg::*;
#(
  parameter int NUM_CORES = 6,
  parameter int TAGS      = 64,
  localparam int CORE_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int TAG_W  = (TAGS > 1) ? $clog2(TAGS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // load arrives at the MC (t_in)
  input  logic              req_valid,
  input  logic [TAG_W-1:0]  req_tag,
  input  logic [CORE_W-1:0] req_core,
  // DRAM produces the data (t_out)
  input  logic              ret_valid,
  input  logic [TAG_W-1:0]  ret_tag,
  // measured latency
  output logic              lat_valid,
  output logic [TS_W-1:0]   lat_cycles,
  output logic [CORE_W-1:0] lat_core,
  output logic [TAG_W-1:0]  lat_tag,
  // delay chosen by the defender
  input  logic              dly_we,
  input  logic [TAG_W-1:0]  dly_tag,
  input  logic [DLY_W-1:0]  dly_cycles,
  // delay lookup for the delay buffer
  input  logic [TAG_W-1:0]  lk_tag,
  output logic              lk_valid,
  output logic [DLY_W-1:0]  lk_cycles
);
  logic [TS_W-1:0]   now;
  logic [TS_W-1:0]   t_in   [TAGS];
  logic [CORE_W-1:0] core_q [TAGS];
  logic [DLY_W-1:0]  dly_q  [TAGS];
  logic [TAGS-1:0]   dly_ok;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now       <= '0;
      lat_valid <= 1'b0;
      lat_cycles <= '0;
      lat_core  <= '0;
      lat_tag   <= '0;
      dly_ok    <= '0;
      for (int t = 0; t < TAGS; t++) begin
        t_in[t]   <= '0;
        core_q[t] <= '0;
        dly_q[t]  <= '0;
      end
    end else begin
      now       <= now + 1'b1;
      lat_valid <= ret_valid;
      if (ret_valid) begin
        lat_cycles <= now - t_in[ret_tag];
        lat_core   <= core_q[ret_tag];
        lat_tag    <= ret_tag;
      end
      if (dly_we) begin
        dly_q[dly_tag]  <= dly_cycles;
        dly_ok[dly_tag] <= 1'b1;
      end
      if (req_valid) begin
        t_in[req_tag]   <= now;
        core_q[req_tag] <= req_core;
        dly_ok[req_tag] <= 1'b0;
      end
    end
  end

  always_comb begin
    if (dly_we && dly_tag == lk_tag) begin
      lk_valid  = 1'b1;
      lk_cycles = dly_cycles;
    end else begin
      lk_valid  = dly_ok[lk_tag];
      lk_cycles = dly_q[lk_tag];
    end
  end
endmodule
