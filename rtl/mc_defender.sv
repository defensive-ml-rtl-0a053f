// mc_defender -- ML side-channel defender inside a memory controller.
//
// A core that measures its own memory latencies can infer what another core
// is doing from the contention it sees. This unit sits in the memory
// controller (MC) and lengthens the latency of every load by an amount chosen
// by a small recurrent network that looks at the recent latency history of
// the load's core, so that the latency pattern no longer reveals the victim's
// secret. It only ever adds latency.
//
// Data flow (all loads, every core):
//   req_*       load arrives at the MC          -> t_in stored by tag
//   dram_ret_*  DRAM produces the data (cycle T) -> latency measured
//   T+1         latency quantized into the core's 32-sample history
//   T+2         defender_net runs on that history and the core's GRU state;
//               state written back; delay (in cycles) stored for the tag;
//               the dropout generator advances
//   mc_resp_*   the rest of the MC hands over the response; it is accepted
//               into the delay buffer once the tag's delay is known (from T+2
//               on, earlier responses are stalled) and leaves on net_resp_*
//               delay cycles later.
// The delay in cycles is delay_q << lat_shift: the network works in sample
// units and the same shift that scaled the latencies scales its answer back.
// With enable = 0 the delay is zero but histories and states still update.
//
// The placement (latency taps, latency buffer and GRU states per core,
// defender, delay buffer before the network) and the network are published;
// tags, the two-cycle inference pipeline, the configuration port and all
// handshakes are this design's choices. cfg_* writes parameters and control
// registers (see weight_mem / defender_pkg).
module mc_defender
  import defender_pkg::*;
#(
  parameter int NUM_CORES = 6,
  parameter int TAGS      = 64,
  parameter int DEPTH     = 16,
  parameter int DATA_W    = 64,
  localparam int CORE_W = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int TAG_W  = (TAGS > 1) ? $clog2(TAGS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [7:0]        cfg_wdata,
  // request tap: load arriving from the network
  input  logic              req_valid,
  input  logic [TAG_W-1:0]  req_tag,
  input  logic [CORE_W-1:0] req_core,
  // DRAM return tap
  input  logic              dram_ret_valid,
  input  logic [TAG_W-1:0]  dram_ret_tag,
  // response from the rest of the MC logic
  input  logic              mc_resp_valid,
  output logic              mc_resp_ready,
  input  logic [TAG_W-1:0]  mc_resp_tag,
  input  logic [DATA_W-1:0] mc_resp_data,
  // response to the network
  output logic              net_resp_valid,
  input  logic              net_resp_ready,
  output logic [TAG_W-1:0]  net_resp_tag,
  output logic [DATA_W-1:0] net_resp_data
);
  q8_t               w [NPARAM];
  cfg_t              cfg;

  logic              lat_valid;
  logic [TS_W-1:0]   lat_cycles;
  logic [CORE_W-1:0] lat_core;
  logic [TAG_W-1:0]  lat_tag;

  logic              s2_valid;
  logic [CORE_W-1:0] s2_core;
  logic [TAG_W-1:0]  s2_tag;

  q8_t               hist  [HIST_LEN];
  fp16_t             h     [HID];
  fp16_t             h_new [HID];
  logic [NMASK-1:0]  mask;
  logic [7:0]        delay_q;
  logic [DLY_W-1:0]  delay_cyc;

  logic              lk_valid;
  logic [DLY_W-1:0]  lk_cycles;
  logic              db_in_valid, db_in_ready;

  weight_mem u_wmem (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .w, .cfg
  );

  load_timestamp_table #(.NUM_CORES(NUM_CORES), .TAGS(TAGS)) u_tstamp (
    .clk, .rst_n,
    .req_valid, .req_tag, .req_core,
    .ret_valid(dram_ret_valid), .ret_tag(dram_ret_tag),
    .lat_valid, .lat_cycles, .lat_core, .lat_tag,
    .dly_we(s2_valid), .dly_tag(s2_tag), .dly_cycles(delay_cyc),
    .lk_tag(mc_resp_tag), .lk_valid, .lk_cycles
  );

  latency_buffer #(.NUM_CORES(NUM_CORES)) u_latbuf (
    .clk, .rst_n,
    .push(lat_valid), .push_core(lat_core), .lat_cycles,
    .lat_shift(cfg.lat_shift),
    .rd_core(s2_core), .hist
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_core  <= '0;
      s2_tag   <= '0;
    end else begin
      s2_valid <= lat_valid;
      s2_core  <= lat_core;
      s2_tag   <= lat_tag;
    end
  end

  gru_state_mem #(.NUM_CORES(NUM_CORES)) u_state (
    .clk, .rst_n,
    .rd_core(s2_core), .rd_h(h),
    .we(s2_valid), .wr_core(s2_core), .wr_h(h_new)
  );

  dropout_rng u_rng (
    .clk, .rst_n, .step(s2_valid), .drop_thresh(cfg.drop_thresh), .mask
  );

  defender_net u_net (
    .hist, .h, .w, .mask, .delay_q, .h_new
  );

  assign delay_cyc = cfg.enable ? DLY_W'({7'b0, delay_q} << cfg.lat_shift) : '0;

  assign db_in_valid   = mc_resp_valid && lk_valid;
  assign mc_resp_ready = db_in_ready && lk_valid;

  delay_buffer #(.DEPTH(DEPTH), .DATA_W(TAG_W + DATA_W)) u_dbuf (
    .clk, .rst_n,
    .in_valid(db_in_valid), .in_ready(db_in_ready),
    .in_data({mc_resp_tag, mc_resp_data}), .in_delay(lk_cycles),
    .out_valid(net_resp_valid), .out_ready(net_resp_ready),
    .out_data({net_resp_tag, net_resp_data})
  );
endmodule
