// tb_pcg_top: end-to-end testbench of PCG at its default parameters
// (64 sets, 4 ways, T = 10000, degree 4, 32-entry prefetch queue).
//
// The L1 data cache around PCG is modelled here behaviourally, tag-only:
// 64 sets x 4 ways of 64-byte lines, invalid ways filled first, otherwise a
// random victim that PCG's replacement-priority table may override; a demand
// miss installs its line at once but the line stays "in flight" for
// MISS_LAT cycles, during which further misses to it merge into its MSHR
// (no MSHR miss); at most 4 lines are in flight, beyond that the core
// stalls. Each cycle the cache serves either one core request or, if none
// is due, one prefetch from PCG's queue (ignored when the line is present).
//
// Workload: six rounds with PCG held in reset (baseline, reported only),
// then, after flushing the cache, rounds of the Evict+Reload pattern on a 256-block probe array
// (phase 1: an eviction set of 16 lines per set from one load PC; phase 2:
// the victim loads a secret and one array entry; phase 3: 256 probes from a
// third PC). Rounds 0-2 run PCG alone, round 3 blocks the prefetch port for
// a while to fill the queue, rounds 4-5 enable the next-line prefetcher.
// Checks: every address PCG pushes into the queue is predicted from the
// request stream (exact eviction re-fetches, noise prefetches at distance
// d = 1..4 in either direction with only the set index moved, exact
// next-line addresses); the queue delivers pushes in order; every victim
// choice in a set with a priority mark picks the marked way; and each
// mechanism happens at least once.
module tb_pcg_top;
  import pcg_pkg::*;
  localparam int S = 64, W = 4, MISS_LAT = 12, MSHRS = 4;

  logic clk = 0, rst_n = 0;
  access_t acc;
  logic [1:0] acc_way;
  logic nlp_en;
  logic [5:0] rq_set; logic [1:0] rq_dway, rq_way; logic rq_ovr;
  logic fill_v; logic [5:0] fill_s; logic [1:0] fill_w;
  logic pf_valid, pf_ready; addr_t pf_addr;
  logic [S-1:0] danger;
  logic period_clear, cnt_restart, nlp_drop, pq_full;
  ocm_events_t ev;
  logic [5:0] pq_count;

  pcg_top dut (
    .clk, .rst_n, .acc_i(acc), .acc_way_i(acc_way), .nlp_en_i(nlp_en),
    .rq_set_i(rq_set), .rq_default_way_i(rq_dway), .rq_way_o(rq_way), .rq_override_o(rq_ovr),
    .fill_valid_i(fill_v), .fill_set_i(fill_s), .fill_way_i(fill_w),
    .pf_valid_o(pf_valid), .pf_ready_i(pf_ready), .pf_addr_o(pf_addr),
    .danger_set_o(danger), .aam_period_clear_o(period_clear), .aam_cnt_restart_o(cnt_restart),
    .ocm_ev_o(ev), .nlp_drop_o(nlp_drop), .pq_full_o(pq_full), .pq_count_o(pq_count));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- cache model ----------------
  bit          c_valid [S][W];
  logic [19:0] c_tag   [S][W];
  longint      c_ready [S][W];      // cycle at which the line's refill completes
  bit          m_mark  [S];         // expected priority marks (own bookkeeping)
  int          m_mark_way [S];
  longint      cyc = 0;
  bit          pf_block = 0;
  bit          model_on = 0;

  typedef struct { logic [31:0] pc; logic [31:0] addr; bit probe; int guess; } creq_t;
  creq_t reqs [$];
  int probe_hit [256];

  // statistics
  int n_hit = 0, n_miss = 0, n_merge = 0, n_mshr_stall = 0, n_pf_in = 0, n_pf_ignored = 0;
  int n_restart = 0, n_clear = 0, n_danger = 0, n_mark = 0, n_override = 0, n_evict_pf = 0;
  int n_fwd = 0, n_bwd = 0, n_dan = 0, n_ref = 0, n_wrap = 0, n_full = 0, n_jdrop = 0;
  int n_nlp = 0, n_nlp_drop = 0, n_ocm = 0;

  function automatic int inflight();
    int n = 0;
    for (int s = 0; s < S; s++) for (int w = 0; w < W; w++) if (c_valid[s][w] && c_ready[s][w] > cyc) n++;
    return n;
  endfunction

  // choose a victim way in set s: first invalid way, else PCG-arbitrated random way
  task automatic pick_victim(int s, output int way);
    way = -1;
    for (int w = W - 1; w >= 0; w--) if (!c_valid[s][w]) way = w;
    if (way < 0) begin
      rq_set = 6'(s); rq_dway = 2'($urandom);
      #1;
      way = int'(rq_way);
      check(rq_ovr == m_mark[s], "priority override present exactly when a mark is held");
      if (m_mark[s]) begin
        check(way == m_mark_way[s], "victim is the way given the highest priority");
        n_override++;
      end else check(way == int'(rq_dway), "victim is the cache's own choice without a mark");
    end
  endtask

  task automatic install(int s, int way, logic [19:0] tag, longint ready_at);
    c_valid[s][way] = 1; c_tag[s][way] = tag; c_ready[s][way] = ready_at;
    fill_v = 1; fill_s = 6'(s); fill_w = 2'(way);
    if (m_mark[s] && m_mark_way[s] == way) m_mark[s] = 0;
  endtask

  // one cycle of the cache, run at the falling edge
  always @(negedge clk) if (model_on) begin
    acc = '0; fill_v = 0; pf_ready = 0; acc_way = 0;
    if (reqs.size() > 0 && (cyc % 2 == 0 || !pf_valid || pf_block)) begin
      creq_t r;
      int s, way;
      bit hit, found;
      logic [19:0] tag;
      r = reqs[0];
      s = int'(r.addr[11:6]); tag = r.addr[31:12];
      found = 0; way = 0;
      for (int w = 0; w < W; w++) if (c_valid[s][w] && c_tag[s][w] == tag) begin found = 1; way = w; end
      if (!found && inflight() >= MSHRS) begin
        n_mshr_stall++;                       // all MSHRs busy: the core waits
      end else begin
        void'(reqs.pop_front());
        acc.valid = 1; acc.pc = r.pc; acc.addr = r.addr;
        if (found) begin
          hit = c_ready[s][way] <= cyc;
          acc.miss = !hit; acc.mshr_miss = 0;
          if (hit) n_hit++; else n_merge++;
        end else begin
          hit = 0; n_miss++;
          acc.miss = 1; acc.mshr_miss = 1;
          pick_victim(s, way);
          if (c_valid[s][way]) begin acc.evict = 1; acc.evict_addr = {c_tag[s][way], 6'(s), 6'b0}; end
          install(s, way, tag, cyc + MISS_LAT);
        end
        acc_way = 2'(way);
        if (r.probe && hit) probe_hit[r.guess]++;
      end
    end else if (pf_valid && !pf_block) begin
      int s, way;
      bit found;
      pf_ready = 1; n_pf_in++;
      s = int'(pf_addr[11:6]);
      found = 0;
      for (int w = 0; w < W; w++) if (c_valid[s][w] && c_tag[s][w] == pf_addr[31:12]) found = 1;
      if (found) n_pf_ignored++;
      else begin
        pick_victim(s, way);
        install(s, way, pf_addr[31:12], cyc);
      end
    end
  end

  // ---------------- scoreboards (sampled at the rising edge) ----------------
  typedef struct { bit evict; logic [31:0] a; int d; } exp_t;
  exp_t        ocm_exp [$];
  logic [31:0] nlp_exp [$];
  logic [31:0] pq_model [$];

  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    // PCG's view of this cycle's request
    if (acc.valid && !ev.job_drop) begin
      exp_t e;
      if (acc.evict && danger[acc.addr[11:6]]) begin
        e.evict = 1; e.a = {acc.evict_addr[31:6], 6'b0}; e.d = 0;
        ocm_exp.push_back(e);
      end
      if (acc.miss) for (int d = 1; d <= 4; d++) begin
        e.evict = 0; e.a = {acc.addr[31:6], 6'b0}; e.d = d;
        ocm_exp.push_back(e);
      end
    end
    if (acc.valid && nlp_en && !nlp_drop)
      for (int d = 1; d <= 4; d++) nlp_exp.push_back({acc.addr[31:6], 6'b0} + 32'(d * 64));
    // a mark is written into the priority table at the edge ending the
    // request's cycle, where it wins over the request's own fill
    if (acc.valid && acc.evict && danger[acc.addr[11:6]]) begin
      m_mark[acc.addr[11:6]] = 1;
      m_mark_way[acc.addr[11:6]] = int'(acc_way);
    end
    // queue output
    if (pf_valid && pf_ready) begin
      check(pq_model.size() > 0 && pf_addr == pq_model[0], "queue delivers pushes in order");
      if (pq_model.size() > 0) void'(pq_model.pop_front());
    end
    // queue inputs (port 0 first)
    if (dut.nlp_pf_valid && dut.nlp_pf_ready) begin
      n_nlp++;
      check(nlp_exp.size() > 0 && dut.nlp_pf_addr == nlp_exp[0], "next-line address");
      if (nlp_exp.size() > 0) void'(nlp_exp.pop_front());
      pq_model.push_back(dut.nlp_pf_addr);
    end
    if (dut.ocm_pf_valid && dut.ocm_pf_ready) begin
      logic [31:0] a, fw, bw;
      n_ocm++;
      a = dut.ocm_pf_addr;
      if (ocm_exp.size() == 0) check(0, "unexpected PCG prefetch");
      else begin
        exp_t e;
        e = ocm_exp.pop_front();
        if (e.evict) check(a == e.a, $sformatf("eviction re-fetch %h, expected %h", a, e.a));
        else begin
          fw = e.a + 32'(e.d * 64); bw = e.a - 32'(e.d * 64);
          check(a[5:0] == 0 && (a[31:12] == fw[31:12] || a[31:12] == bw[31:12]),
                $sformatf("noise prefetch %h from block %h distance %0d", a, e.a, e.d));
        end
      end
      pq_model.push_back(a);
    end
    // mechanism counters
    if (cnt_restart) n_restart++;
    if (period_clear) n_clear++;
    if (danger != '0) n_danger++;
    if (ev.prio_mark) n_mark++;
    if (ev.evict_pf) n_evict_pf++;
    if (ev.rand_fwd) n_fwd++;
    if (ev.rand_bwd) n_bwd++;
    if (ev.bal_dan) n_dan++;
    if (ev.bal_ref) n_ref++;
    if (ev.ref_wrap) n_wrap++;
    if (ev.job_drop) n_jdrop++;
    if (pq_full) n_full++;
    if (nlp_drop) n_nlp_drop++;
  end

  // ---------------- workload ----------------
  localparam logic [31:0] ARRAY2 = 32'h8010_0000, ES_BASE = 32'h8800_0000, SECRET_VAR = 32'h8020_0040;
  localparam logic [31:0] PC_ES = 32'h8000_10f0, PC_V1 = 32'h8000_1100, PC_V2 = 32'h8000_1104,
                          PC_PROBE = 32'h8000_13f4;

  task automatic run_round(int secret);
    // phase 1: evict array2 with an eviction set of N*W = 16 lines per set
    for (int k = 0; k < 16; k++)
      for (int s0 = 0; s0 < S; s0++) begin
        int s = (s0 * 37 + k) % S;            // scrambled order
        reqs.push_back('{PC_ES, ES_BASE + 32'(k * 4096) + 32'(s * 64), 0, 0});
      end
    // phase 2: the victim
    reqs.push_back('{PC_V1, SECRET_VAR, 0, 0});
    reqs.push_back('{PC_V1, SECRET_VAR + 32'd8, 0, 0});   // same block: merges into the MSHR
    reqs.push_back('{PC_V2, ARRAY2 + 32'(secret * 64), 0, 0});
    // phase 3: probe all 256 entries
    for (int g = 0; g < 256; g++) reqs.push_back('{PC_PROBE, ARRAY2 + 32'(g * 64), 1, g});
    while (reqs.size() > 0) @(posedge clk);
    repeat (200) @(posedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int other_hits, secret_hits, base_secret, base_other;
    acc = '0; acc_way = 0; nlp_en = 0; rq_set = 0; rq_dway = 0; fill_v = 0; fill_s = 0; fill_w = 0;
    pf_ready = 0;
    for (int s = 0; s < S; s++) begin
      m_mark[s] = 0; m_mark_way[s] = 0;
      for (int w = 0; w < W; w++) begin c_valid[s][w] = 0; c_tag[s][w] = 0; c_ready[s][w] = 0; end
    end
    foreach (probe_hit[g]) probe_hit[g] = 0;
    // Baseline: the same cache with PCG held in reset (no marks, no prefetches).
    repeat (3) @(posedge clk);
    model_on = 1;
    for (int r = 0; r < 6; r++) run_round(115);
    base_secret = probe_hit[115];
    base_other = 0;
    for (int g = 0; g < 256; g++) if (g != 115) base_other += probe_hit[g];
    // flush the cache model and start PCG
    @(negedge clk);
    model_on = 0;
    for (int s = 0; s < S; s++) for (int w = 0; w < W; w++) c_valid[s][w] = 0;
    foreach (probe_hit[g]) probe_hit[g] = 0;
    n_hit = 0; n_miss = 0; n_merge = 0; n_mshr_stall = 0; n_pf_in = 0; n_pf_ignored = 0;
    check(!pf_valid && !rq_ovr, "PCG silent while held in reset");
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    model_on = 1;
    for (int r = 0; r < 6; r++) begin
      nlp_en = (r >= 4);
      if (r == 3) fork
        begin pf_block = 1; repeat (600) @(posedge clk); pf_block = 0; end
      join_none
      run_round(115);                         // secret 's'
    end
    repeat (12000) @(posedge clk);            // idle long enough for a periodic clear
    secret_hits = probe_hit[115];
    other_hits = 0;
    for (int g = 0; g < 256; g++) if (g != 115) other_hits += probe_hit[g];
    $display("cache: hits=%0d misses=%0d merged=%0d mshr_stalls=%0d prefetches_in=%0d ignored=%0d",
             n_hit, n_miss, n_merge, n_mshr_stall, n_pf_in, n_pf_ignored);
    $display("aam: cnt_restart=%0d period_clear=%0d cycles_with_dangerSet=%0d", n_restart, n_clear, n_danger);
    $display("ocm: prio_mark=%0d override=%0d evict_refetch=%0d fwd=%0d bwd=%0d bal_dan=%0d bal_ref=%0d wrap=%0d drop=%0d",
             n_mark, n_override, n_evict_pf, n_fwd, n_bwd, n_dan, n_ref, n_wrap, n_jdrop);
    $display("queue: pushes ocm=%0d nlp=%0d full_cycles=%0d nlp_drop=%0d", n_ocm, n_nlp, n_full, n_nlp_drop);
    $display("probe hits over 6 rounds without PCG: secret entry %0d, the other 255 entries %0d", base_secret, base_other);
    $display("probe hits over 6 rounds with PCG:    secret entry %0d, the other 255 entries %0d", secret_hits, other_hits);
    check(n_merge > 0, "MSHR merge happened");
    check(n_restart > 0, "AAM cnt restart happened");
    check(n_clear > 0, "AAM periodic clear happened");
    check(n_danger > 0, "dangerSet raised");
    check(n_mark > 0, "priority marking happened");
    check(n_override > 0, "priority override used in victim choice");
    check(n_evict_pf > 0, "eviction re-fetch happened");
    check(n_fwd > 0 && n_bwd > 0, "forward and backward noise prefetches");
    check(n_dan > 0 && n_ref > 0, "both BalancedSet branches");
    check(n_wrap > 0, "refSet wrap");
    check(n_jdrop > 0, "OCM work dropped under back-pressure");
    check(n_full > 0, "prefetch queue full");
    check(n_nlp > 0 && n_nlp_drop > 0, "next-line prefetcher mode on");
    check(n_pf_ignored > 0, "prefetch of a present line ignored");
    check(other_hits > 0, "probes see noise hits");
    check(ocm_exp.size() == 0 && nlp_exp.size() == 0 && pq_model.size() == 0, "all expected prefetches seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
