// weight_mem -- parameter and control registers of the memory-side defender.
//
// The same defender hardware serves different victims by loading different
// parameters, so all 2177 INT8 weights and biases sit in a writable register
// file. Its outputs are read in parallel by the combinational network. A byte
// written to address a < 2177 lands in parameter a (layout in defender_pkg);
// addresses 0xF00..0xF02 hold the control registers (enable, latency shift,
// dropout threshold); other addresses are ignored. The byte-wide port, the
// address map and the reset values (parameters 0, enable 1, shift 1, no
// dropout) are this design's choices.
//
// Timing: a write takes effect at the next clock edge.
module weight_mem
  import defender_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [CFG_AW-1:0] cfg_addr,
  input  logic [7:0]        cfg_wdata,
  output q8_t               w [NPARAM],
  output cfg_t              cfg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NPARAM; a++) w[a] <= '0;
      cfg <= '{enable: 1'b1, lat_shift: 3'd1, drop_thresh: 8'd0};
    end else if (cfg_we) begin
      if (cfg_addr < CFG_AW'(NPARAM)) w[cfg_addr] <= q8_t'(cfg_wdata);
      else if (cfg_addr == ADDR_ENABLE) cfg.enable      <= cfg_wdata[0];
      else if (cfg_addr == ADDR_LATSH)  cfg.lat_shift   <= cfg_wdata[2:0];
      else if (cfg_addr == ADDR_DROP)   cfg.drop_thresh <= cfg_wdata;
    end
  end
endmodule
