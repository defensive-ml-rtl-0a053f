// tb_delay_buffer -- pushes numbered responses with random delays and random
// network back-pressure and checks, for each response, that it leaves in
// order, with its data, and in exactly the cycle a model predicts:
// max(enqueue + 1 + delay, previous departure + 1, first cycle the network is
// ready). Also checks that in_ready falls when the buffer is full.
module tb_delay_buffer;
  import defender_pkg::*;

  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [31:0] in_data, out_data;
  logic [DLY_W-1:0] in_delay;
  int checks = 0, failures = 0, cycles = 0, full_seen = 0, hol_seen = 0;
  int rel_q[$], dat_q[$], sent = 0, got = 0, last_out = -1;

  delay_buffer #(.DEPTH(DEPTH), .DATA_W(32)) dut (.clk, .rst_n, .in_valid, .in_ready,
    .in_data, .in_delay, .out_valid, .out_ready, .out_data);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // model the head's earliest departure and compare at each clock edge
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) full_seen++;
    if (rel_q.size() != 0) begin
      int earliest;
      earliest = rel_q[0];
      if (earliest <= last_out) begin
        earliest = last_out + 1;
      end
      checks++;
      if (out_valid != (cycles >= earliest)) begin
        failures++;
        if (failures < 10) $display("cyc %0d out_valid %0d, head release %0d", cycles, out_valid, earliest);
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != 32'(dat_q[0])) failures++;
        if (rel_q[0] < cycles && cycles == last_out + 1) hol_seen++;
        void'(rel_q.pop_front());
        void'(dat_q.pop_front());
        last_out = cycles;
        got++;
      end
    end else begin
      checks++;
      if (out_valid) failures++;
    end
    if (in_valid && in_ready) begin
      rel_q.push_back(cycles + 1 + int'(in_delay));
      dat_q.push_back(int'(in_data));
      sent++;
    end
  end

  initial begin
    in_data = 0; in_delay = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6000; t++) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ($urandom_range(2, 0) != 0);
        in_data = 32'($urandom);
        in_delay = DLY_W'((t % 500 < 250) ? $urandom_range(40, 0) : $urandom_range(3, 0));
      end
      out_ready = (t % 1000 < 700) ? ($urandom_range(3, 0) != 0) : 1'b0;
    end
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    repeat (200) @(negedge clk);
    checks++;
    if (got != sent || sent < 1000) failures++;
    checks++;
    if (full_seen == 0 || hol_seen == 0) begin
      failures++;
      $display("full %0d head-of-line %0d", full_seen, hol_seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
