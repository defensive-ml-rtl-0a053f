// tb_load_timestamp_table -- issues loads with random tags and cores, returns
// them after random latencies, and checks that each return produces, one
// cycle later, the exact latency in cycles, the issuing core and the tag.
// Also checks the per-tag delay store: a lookup is invalid until a delay is
// written, sees a delay written in the same cycle, and is cleared by a new
// request for the tag.
module tb_load_timestamp_table;
  import defender_pkg::*;

  localparam int TAGS = 16;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, ret_valid = 0, dly_we = 0;
  logic [3:0] req_tag, ret_tag, lat_tag, dly_tag, lk_tag;
  logic [2:0] req_core, lat_core;
  logic lat_valid, lk_valid;
  logic [TS_W-1:0] lat_cycles;
  logic [DLY_W-1:0] dly_cycles, lk_cycles;
  int   issue_cyc [TAGS];
  int   issue_core [TAGS];
  bit   busy [TAGS];
  int checks = 0, failures = 0, cycles = 0, exp_q[$], exp_core[$], exp_tag[$];

  load_timestamp_table #(.NUM_CORES(6), .TAGS(TAGS)) dut (
    .clk, .rst_n, .req_valid, .req_tag, .req_core, .ret_valid, .ret_tag,
    .lat_valid, .lat_cycles, .lat_core, .lat_tag,
    .dly_we, .dly_tag, .dly_cycles, .lk_tag, .lk_valid, .lk_cycles);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // check lat outputs in the cycle after a return
  always @(negedge clk) if (rst_n && lat_valid) begin
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      int eq, ec, et;
      eq = exp_q.pop_front(); ec = exp_core.pop_front(); et = exp_tag.pop_front();
      if (int'(lat_cycles) != eq || int'(lat_core) != ec || int'(lat_tag) != et) begin
        failures++;
        if (failures < 10) $display("lat %0d core %0d tag %0d, expected %0d %0d %0d",
                                    lat_cycles, lat_core, lat_tag, eq, ec, et);
      end
    end
  end

  initial begin
    req_tag = 0; ret_tag = 0; dly_tag = 0; lk_tag = 0; req_core = 0; dly_cycles = 0;
    for (int t = 0; t < TAGS; t++) busy[t] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int rt, qt;
      @(negedge clk);
      #1;
      req_valid = 0;
      ret_valid = 0;
      qt = $urandom_range(TAGS - 1, 0);
      if (!busy[qt] && $urandom_range(1, 0)) begin
        req_valid = 1; req_tag = 4'(qt); req_core = 3'($urandom_range(5, 0));
        busy[qt] = 1; issue_cyc[qt] = cycles; issue_core[qt] = int'(req_core);
      end
      rt = $urandom_range(TAGS - 1, 0);
      if (busy[rt] && rt != qt && (cycles - issue_cyc[rt]) > 3 && $urandom_range(3, 0) == 0) begin
        ret_valid = 1; ret_tag = 4'(rt); busy[rt] = 0;
        exp_q.push_back(cycles - issue_cyc[rt]);
        exp_core.push_back(issue_core[rt]);
        exp_tag.push_back(rt);
      end
    end
    @(negedge clk);
    req_valid = 0; ret_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    // delay store
    req_valid = 1; req_tag = 4'd5;
    @(negedge clk);
    req_valid = 0; lk_tag = 4'd5;
    #1;
    checks++; if (lk_valid) failures++;
    dly_we = 1; dly_tag = 4'd5; dly_cycles = 15'd321;
    #1;
    checks++; if (!lk_valid || lk_cycles != 15'd321) failures++;   // bypass
    @(negedge clk);
    dly_we = 0; dly_tag = 4'd6; dly_cycles = 0;
    #1;
    checks++; if (!lk_valid || lk_cycles != 15'd321) failures++;   // stored
    lk_tag = 4'd6;
    #1;
    checks++; if (lk_valid) failures++;
    req_valid = 1; req_tag = 4'd5;
    @(negedge clk);
    req_valid = 0; lk_tag = 4'd5;
    #1;
    checks++; if (lk_valid) failures++;                              // cleared
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
