// delay_buffer -- holds memory responses for the defender's chosen delay.
//
// Responses leaving the memory controller for the on-chip network pass
// through this FIFO. Each entry is stamped on entry with a release time,
// enqueue cycle + 1 + in_delay, and the head entry is offered to the network
// (out_valid) only once the free-running cycle counter has reached its
// release time. A response with delay d therefore leaves d cycles later than
// it would with d = 0 (one cycle of FIFO latency), unless it also waits
// behind an earlier response: release is strictly in order, so a response is
// never overtaken. When the FIFO is full, in_ready falls and the memory
// controller is back-pressured. Stalling returning data in a buffer between
// the MC and the network is published; depth, ordering and handshake are
// this design's choices.
//
// Handshakes are valid/ready; a transfer happens when both are high.
module delay_buffer
  import defender_pkg::*;
#(
  parameter int DEPTH  = 16,
  parameter int DATA_W = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  input  logic [DLY_W-1:0]  in_delay,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data
);
  localparam int PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [TS_W-1:0]   now;
  logic [DATA_W-1:0] data_q [DEPTH];
  logic [TS_W-1:0]   rel_q  [DEPTH];
  logic [PTR_W-1:0]  wr_ptr, rd_ptr;
  logic [PTR_W:0]    count;
  logic              push, pop;
  logic [TS_W-1:0]   wait_left;

  assign in_ready  = (count != (PTR_W+1)'(DEPTH));
  assign wait_left = rel_q[rd_ptr] - now;
  // released when now has reached the release time (wrap-around compare)
  assign out_valid = (count != '0) && (wait_left == '0 || wait_left[TS_W-1]);
  assign out_data  = data_q[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PTR_W-1:0] inc(input logic [PTR_W-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now    <= '0;
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        data_q[i] <= '0;
        rel_q[i]  <= '0;
      end
    end else begin
      now <= now + 1'b1;
      if (push) begin
        data_q[wr_ptr] <= in_data;
        rel_q[wr_ptr]  <= now + TS_W'(1) + TS_W'(in_delay);
        wr_ptr         <= inc(wr_ptr);
      end
      if (pop) rd_ptr <= inc(rd_ptr);
      count <= count + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("delay_buffer: offered response withdrawn");
endmodule
