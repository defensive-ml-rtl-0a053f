// tb_contention_trace -- the memory-contention attack scenario, run through
// the full unit at its default sizes.
//
// Core 0 is the attacker: it keeps one load outstanding and issues the next
// one two cycles after the previous response reaches it, timing each. Core 1
// is the victim: in every loop iteration it processes one secret bit, issuing
// a load every 3 cycles for a 1 and every 12 cycles for a 0. The DRAM model
// charges each load 60 cycles plus 4 per victim load in flight when it
// arrives, so the attacker's latencies depend on the secret. One signal is
// the attacker's latencies during one iteration: 42 samples in the RSA-length
// phase and 105 in the EdDSA-length phase, each with its own (random)
// parameter set loaded at run time, 16 iterations each.
//
// Every response is checked to leave in exactly the cycle predicted from the
// reference model's delay. The testbench prints, per phase and secret value,
// the mean latency the attacker would see without the unit and with it, and
// the mean added delay.
module tb_contention_trace;
  import defender_pkg::*;
  import defender_ref_pkg::*;

  localparam int NC = 6, TAGS = 64;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = 0;
  logic [7:0] cfg_wdata = 0;
  logic req_valid = 0, dram_ret_valid = 0, mc_resp_valid = 0, net_resp_ready = 1;
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

  int cyc = 0, checks = 0, failures = 0;
  bit tag_busy [TAGS];
  int t_req [TAGS], core_of [TAGS], dram_due [TAGS], dram_ret_at [TAGS], exp_dly [TAGS];
  int mcq_tag[$], mcq_at[$], dbq_tag[$], dbq_rel[$];
  int last_out = -1;
  int victim_inflight = 0;
  bit att_busy = 0;
  int att_next = 0;
  int samples = 0, sig_len = 42, secret = 0;
  bit running = 0, issuing = 0;
  // statistics per secret value
  longint raw_sum [2], prot_sum [2], dly_sum [2];
  int     n_stat [2];

  // reference state
  wvec_t wv;
  xvec_t rhist [NC];
  hvec_t rh [NC];
  logic [31:0] rng = 32'h2545_F491;
  localparam int SHIFT = 1;

  function automatic int ref_return(input int tag, input int lat);
    int c, q, d;
    logic [31:0] m, st;
    xvec_t x;
    hvec_t h;
    c = core_of[tag];
    q = lat >> SHIFT;
    if (q > 127) q = 127;
    x = rhist[c];
    h = rh[c];
    for (int i = 31; i > 0; i--) x[i] = x[i-1];
    x[0] = byte'(q);
    st = rng;
    m = drop_mask(st, 24);
    rng = st;
    d = infer(x, h, wv, m);
    rhist[c] = x;
    rh[c] = h;
    return d << SHIFT;
  endfunction

  // edge: departures and acceptances
  always @(posedge clk) begin
    if (rst_n) begin
      if (dbq_tag.size() != 0) begin
        int earliest;
        earliest = (dbq_rel[0] > last_out + 1) ? dbq_rel[0] : last_out + 1;
        checks++;
        if (net_resp_valid != (cyc >= earliest)) begin
          failures++;
          if (failures < 10) $display("cyc %0d: net_resp_valid=%0d, due %0d", cyc, net_resp_valid, earliest);
        end
        if (net_resp_valid && net_resp_ready) begin
          int t;
          t = dbq_tag.pop_front();
          void'(dbq_rel.pop_front());
          checks++;
          if (int'(net_resp_tag) != t) failures++;
          last_out = cyc;
          tag_busy[t] = 0;
          if (core_of[t] == 0) begin
            // attacker sample: raw latency would be DRAM time + MC time + 1
            int raw, prot;
            raw  = dram_ret_at[t] + 2 + 1 - t_req[t];
            prot = cyc - t_req[t];
            raw_sum[secret] += raw;
            prot_sum[secret] += prot;
            dly_sum[secret] += exp_dly[t];
            n_stat[secret]++;
            att_busy = 0;
            att_next = cyc + 2;
            samples++;
          end else victim_inflight--;
        end
      end
      if (mc_resp_valid && mc_resp_ready) begin
        int t;
        t = int'(mc_resp_tag);
        dbq_tag.push_back(t);
        dbq_rel.push_back(cyc + 1 + exp_dly[t]);
        void'(mcq_tag.pop_front());
        void'(mcq_at.pop_front());
      end
    end
    cyc++;
  end

  function automatic int free_tag();
    for (int k = 0; k < TAGS; k++) if (!tag_busy[k]) return k;
    return -1;
  endfunction

  task automatic issue(input int t, input int core);
    req_valid = 1;
    req_tag = 6'(t);
    req_core = 3'(core);
    tag_busy[t] = 1;
    core_of[t] = core;
    t_req[t] = cyc;
    dram_due[t] = cyc + 60 + 4 * victim_inflight;
  endtask

  always @(negedge clk) if (rst_n && running) begin
    int due, t;
    req_valid = 0;
    dram_ret_valid = 0;
    due = -1;
    for (int k = 0; k < TAGS; k++)
      if (tag_busy[k] && dram_due[k] >= 0 && dram_due[k] <= cyc && (due < 0 || dram_due[k] < dram_due[due])) due = k;
    if (due >= 0) begin
      dram_ret_valid = 1;
      dram_ret_tag = 6'(due);
      dram_due[due] = -1;
      dram_ret_at[due] = cyc;
      exp_dly[due] = ref_return(due, cyc - t_req[due]);
      mcq_tag.push_back(due);
      mcq_at.push_back(cyc + 2);
    end
    // attacker has priority on the request port, victim otherwise
    t = free_tag();
    if (issuing && t >= 0 && !att_busy && cyc >= att_next) begin
      issue(t, 0);
      att_busy = 1;
    end else if (issuing && t >= 0 && (cyc % (secret ? 3 : 12)) == 0) begin
      issue(t, 1);
      victim_inflight++;
    end
    if (mcq_tag.size() != 0 && mcq_at[0] <= cyc) begin
      mc_resp_valid = 1;
      mc_resp_tag = 6'(mcq_tag[0]);
      mc_resp_data = 64'(mcq_tag[0]);
    end else mc_resp_valid = 0;
  end

  task automatic cfg_write(input int a, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_wdata = 8'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic run_phase(input string name, input int len, input int iters);
    wv = rand_weights(2);
    wv[OFF_B2] = 5;
    for (int a = 0; a < NPARAM; a++) cfg_write(a, int'(wv[a]));
    for (int s = 0; s < 2; s++) begin
      raw_sum[s] = 0; prot_sum[s] = 0; dly_sum[s] = 0; n_stat[s] = 0;
    end
    sig_len = len;
    running = 1;
    issuing = 1;
    for (int it = 0; it < iters; it++) begin
      secret = it % 2 ^ ((it / 4) % 2);
      samples = 0;
      while (samples < sig_len) @(negedge clk);
    end
    // drain
    issuing = 0;
    while (att_busy || victim_inflight != 0 || dbq_tag.size() != 0 || mcq_tag.size() != 0) @(negedge clk);
    @(negedge clk);
    running = 0;
    req_valid = 0; dram_ret_valid = 0; mc_resp_valid = 0;
    for (int s = 0; s < 2; s++) begin
      checks++;
      if (n_stat[s] == 0) failures++;
      else $display("%s, secret %0d: %0d samples, mean latency unprotected %0.1f, protected %0.1f, added %0.1f cycles",
                    name, s, n_stat[s], real'(raw_sum[s]) / n_stat[s], real'(prot_sum[s]) / n_stat[s],
                    real'(dly_sum[s]) / n_stat[s]);
    end
    // the unprotected channel must actually leak: secret 1 is slower
    checks++;
    if (n_stat[0] && n_stat[1] && raw_sum[1] * n_stat[0] <= raw_sum[0] * n_stat[1]) failures++;
  endtask

  initial begin
    for (int k = 0; k < TAGS; k++) begin
      tag_busy[k] = 0; dram_due[k] = -1; exp_dly[k] = 0;
    end
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < 32; i++) rhist[c][i] = 0;
      for (int j = 0; j < 16; j++) rh[c][j] = 16'h0000;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg_write('hF02, 24);
    run_phase("RSA-length signals (42 samples)", 42, 16);
    run_phase("EdDSA-length signals (105 samples)", 105, 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cyc == 2000000);
    failures++;
    $display("watchdog: samples %0d, attacker busy %0d, victim in flight %0d, buffer %0d", samples, att_busy, victim_inflight, dbq_tag.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
