// tb_mc_defender -- end-to-end test of the memory-controller defender at its
// default sizes (6 cores, 64 tags, 16-entry delay buffer).
//
// The testbench plays the three neighbours of the unit: the network side
// issues loads from random cores with free tags, a DRAM model returns each
// load after a random 40..400 cycles, and an MC-logic model hands the
// response to the unit 0..8 cycles after DRAM (in DRAM order). The network
// accepts responses with random back-pressure, sometimes none for a while.
//
// A reference model (defender_ref_pkg) follows every DRAM return in order:
// it quantizes the latency into the core's history, runs the network with the
// core's GRU state and the same dropout sequence, and predicts the delay. For
// every response the testbench then predicts the exact cycle it is offered to
// the network: max(accept + 1 + delay, previous departure + 1), checks
// net_resp_valid against that every cycle, and checks tag and data on exit.
//
// Three phases: trained-looking weights with dropout and shift 1; the
// defender disabled (no delay); new weights loaded at run time with shift 2
// and no dropout. Each mechanism is counted and must occur at least once:
// delayed responses, responses stalled because their delay was not yet known,
// a full delay buffer, head-of-line waiting, dropped positions, saturated
// latency samples, disabled-mode responses, a reconfiguration.
module tb_mc_defender;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  localparam int NC = 6, TAGS = 64, DEPTH = 16;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = 0;
  logic [7:0] cfg_wdata = 0;
  logic req_valid = 0, dram_ret_valid = 0, mc_resp_valid = 0, net_resp_ready = 0;
  logic [5:0] req_tag = 0, dram_ret_tag = 0, mc_resp_tag = 0, net_resp_tag;
  logic [2:0] req_core = 0;
  logic [63:0] mc_resp_data = 0, net_resp_data;
  logic mc_resp_ready, net_resp_valid;

  mc_defender dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .req_valid, .req_tag, .req_core, .dram_ret_valid, .dram_ret_tag,
    .mc_resp_valid, .mc_resp_ready, .mc_resp_tag, .mc_resp_data,
    .net_resp_valid, .net_resp_ready, .net_resp_tag, .net_resp_data);

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- state
  int    cyc = 0;
  int    checks = 0, failures = 0;
  bit    tag_busy [TAGS];
  int    t_req [TAGS], core_of [TAGS], dram_due [TAGS];
  logic [63:0] data_of [TAGS];
  int    exp_dly [TAGS];
  int    inf_edge [TAGS];
  int    mcq_tag[$], mcq_at[$];          // MC logic FIFO
  int    dbq_tag[$], dbq_rel[$];         // delay buffer model
  int    last_out = -1;
  int    issued = 0, done = 0;

  // reference model state
  wvec_t       wv;
  xvec_t       rhist [NC];
  hvec_t       rh [NC];
  logic [31:0] rng = 32'h2545_F491;
  int          r_shift = 1, r_drop = 0;
  bit          r_en = 1;

  // mechanism counters
  int n_delayed = 0, n_stall_unknown = 0, n_full = 0, n_hol = 0, n_dropped = 0;
  int n_sat = 0, n_disabled = 0, n_reconfig = 0;
  bit traffic_on = 0;
  int load_budget = 0;
  int phase = 0;

  function automatic int ref_return(input int tag, input int lat);
    int c, q, d;
    logic [31:0] m, st;
    xvec_t x;
    hvec_t h;
    c = core_of[tag];
    q = lat >> r_shift;
    if (q > 127) q = 127;
    if (q == 127) n_sat++;
    x = rhist[c];
    h = rh[c];
    for (int i = 31; i > 0; i--) x[i] = x[i-1];
    x[0] = byte'(q);
    st = rng;
    m = drop_mask(st, r_drop);
    rng = st;
    n_dropped += 32 - $countones(m);
    d = infer(x, h, wv, m);
    rhist[c] = x;
    rh[c] = h;
    return r_en ? (d << r_shift) : 0;
  endfunction

  // ----------------------------------------------------- edge-side checks
  always @(posedge clk) begin
    if (rst_n) begin
      bit db_full;
      db_full = (dbq_tag.size() == DEPTH);
      // delay buffer departure model
      if (dbq_tag.size() != 0) begin
        int earliest;
        earliest = (dbq_rel[0] > last_out + 1) ? dbq_rel[0] : last_out + 1;
        checks++;
        if (net_resp_valid != (cyc >= earliest)) begin
          failures++;
          if (failures < 10) $display("cyc %0d: net_resp_valid=%0d, head tag %0d due %0d",
                                      cyc, net_resp_valid, dbq_tag[0], earliest);
        end
        if (net_resp_valid && net_resp_ready) begin
          int t;
          t = dbq_tag.pop_front();
          if (dbq_rel[0] < cyc && cyc == last_out + 1) n_hol++;
          void'(dbq_rel.pop_front());
          checks++;
          if (int'(net_resp_tag) != t || net_resp_data != data_of[t]) begin
            failures++;
            if (failures < 10) $display("cyc %0d: tag %0d data %h, expected tag %0d", cyc, net_resp_tag, net_resp_data, t);
          end
          last_out = cyc;
          tag_busy[t] = 0;
          done++;
        end
      end else begin
        checks++;
        if (net_resp_valid) failures++;
      end
      // MC response accepted by the delay buffer
      if (mc_resp_valid) begin
        if (mc_resp_ready) begin
          int t;
          t = int'(mc_resp_tag);
          checks++;
          if (cyc < inf_edge[t]) failures++;      // accepted before its delay existed
          dbq_tag.push_back(t);
          dbq_rel.push_back(cyc + 1 + exp_dly[t]);
          if (exp_dly[t] > 0) n_delayed++;
          if (!r_en) n_disabled++;
          void'(mcq_tag.pop_front());
          void'(mcq_at.pop_front());
        end else if (db_full) n_full++;
        else begin
          n_stall_unknown++;
          checks++;
          if (cyc >= inf_edge[int'(mc_resp_tag)]) begin
            failures++;
            $display("cyc %0d: response stalled although its delay is known", cyc);
          end
        end
      end
    end
    cyc++;
  end

  // ------------------------------------------------------ stimulus drivers
  always @(negedge clk) if (rst_n && traffic_on) begin
    int t, due;
    req_valid = 0;
    dram_ret_valid = 0;
    // DRAM return: one per cycle, earliest due tag
    due = -1;
    for (int k = 0; k < TAGS; k++)
      if (tag_busy[k] && dram_due[k] >= 0 && dram_due[k] <= cyc && (due < 0 || dram_due[k] < dram_due[due])) due = k;
    if (due >= 0) begin
      int d;
      dram_ret_valid = 1;
      dram_ret_tag = 6'(due);
      dram_due[due] = -1;
      exp_dly[due] = ref_return(due, cyc - t_req[due]);
      inf_edge[due] = cyc + 2;
      d = $urandom_range(5, 0);
      mcq_tag.push_back(due);
      mcq_at.push_back(cyc + ((d == 5) ? 8 : d));
    end
    // new load
    t = $urandom_range(TAGS - 1, 0);
    if (load_budget > 0 && !tag_busy[t] && t != due && $urandom_range(2, 0) == 0) begin
      req_valid = 1;
      req_tag = 6'(t);
      req_core = 3'($urandom_range(NC - 1, 0));
      tag_busy[t] = 1;
      core_of[t] = int'(req_core);
      t_req[t] = cyc;
      dram_due[t] = cyc + (($urandom_range(9, 0) == 0) ? $urandom_range(400, 260) : $urandom_range(160, 40));
      data_of[t] = {$urandom, $urandom};
      load_budget--;
      issued++;
    end
    // MC logic presents its oldest response when it is ready
    if (mcq_tag.size() != 0 && mcq_at[0] <= cyc) begin
      mc_resp_valid = 1;
      mc_resp_tag = 6'(mcq_tag[0]);
      mc_resp_data = data_of[mcq_tag[0]];
    end else mc_resp_valid = 0;
    // network back-pressure: stretches of no acceptance fill the buffer
    net_resp_ready = ((cyc % 1500) < 1200) ? ($urandom_range(3, 0) != 0) : 1'b0;
  end

  // ------------------------------------------------------------ sequence
  task automatic cfg_write(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = 8'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_weights(input int span, input int b2);
    wv = rand_weights(span);
    wv[OFF_B2] = byte'(b2);
    for (int a = 0; a < NPARAM; a++) cfg_write(a, int'(wv[a]));
  endtask

  task automatic run_loads(input int n);
    load_budget = n;
    traffic_on = 1;
    wait (load_budget == 0 && done == issued);
    @(negedge clk);
    traffic_on = 0;
    req_valid = 0; dram_ret_valid = 0; mc_resp_valid = 0;
  endtask

  initial begin
    for (int k = 0; k < TAGS; k++) begin
      tag_busy[k] = 0; dram_due[k] = -1; exp_dly[k] = 0; inf_edge[k] = 0;
    end
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < 32; i++) rhist[c][i] = 0;
      for (int j = 0; j < 16; j++) rh[c][j] = 16'h0000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: defender on, dropout ~16 %, latency shift 1
    phase = 1;
    load_weights(6, 5);
    cfg_write('hF02, 40); r_drop = 40;
    run_loads(1500);
    // phase 2: defender disabled
    phase = 2;
    cfg_write('hF00, 0); r_en = 0;
    run_loads(300);
    // phase 3: reconfigured for another victim, shift 2, no dropout
    phase = 3;
    load_weights(10, 3); n_reconfig++;
    cfg_write('hF00, 1); r_en = 1;
    cfg_write('hF01, 2); r_shift = 2;
    cfg_write('hF02, 0); r_drop = 0;
    run_loads(800);
    repeat (5) @(negedge clk);
    $display("loads %0d, delayed %0d, stalled (delay unknown) %0d, buffer full %0d, head-of-line %0d",
             done, n_delayed, n_stall_unknown, n_full, n_hol);
    $display("dropped positions %0d, saturated samples %0d, disabled-mode responses %0d, reconfigurations %0d",
             n_dropped, n_sat, n_disabled, n_reconfig);
    checks++; if (done != 2600) failures++;
    checks++; if (n_delayed == 0) begin failures++; $display("no delayed response"); end
    checks++; if (n_stall_unknown == 0) begin failures++; $display("no unknown-delay stall"); end
    checks++; if (n_full == 0) begin failures++; $display("buffer never full"); end
    checks++; if (n_hol == 0) begin failures++; $display("no head-of-line wait"); end
    checks++; if (n_dropped == 0) begin failures++; $display("no dropout"); end
    checks++; if (n_sat == 0) begin failures++; $display("no saturated sample"); end
    checks++; if (n_disabled == 0) begin failures++; $display("no disabled-mode response"); end
    checks++; if (n_reconfig == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 200000);
    failures++;
    $display("watchdog: phase %0d, issued %0d, done %0d", phase, issued, done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
