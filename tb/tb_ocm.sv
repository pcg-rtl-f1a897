// tb_ocm: self-checking testbench of the Observation Confused Module.
// Requests are sent one at a time and the prefetch port is drained (with
// random back-pressure) before the next one, so a behavioural model of the
// prefetching algorithm can predict every address: the eviction re-fetch
// first when the request evicted a line from a dangerSet set, then DEGREE
// noise prefetches at distance d = 1..DEGREE. The model does not copy the
// random source: for each noise prefetch it runs BalancedSet on both the
// forward and the backward candidate and accepts either, then continues
// from the state of the one that matched. It also checks the
// highest-priority marking of entry E in the cycle of the request, that both
// directions and both BalancedSet branches and a refSet wrap occur, and, in
// a last phase with the output blocked, that a full work queue drops work.
module tb_ocm;
  import pcg_pkg::*;
  localparam int S = 64, W = 4, DEG = 4;

  logic clk = 0, rst_n = 0;
  access_t acc;
  logic [1:0] acc_way;
  logic [S-1:0] danger;
  logic prio_valid; logic [5:0] prio_set; logic [1:0] prio_way;
  logic pf_valid, pf_ready; addr_t pf_addr;
  ocm_events_t ev;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_bwd = 0, n_dan = 0, n_ref = 0, n_wrap = 0, n_evict = 0, n_drop = 0;

  ocm #(.S(S), .W(W), .DEGREE(DEG)) dut (
    .clk, .rst_n, .acc_i(acc), .acc_way_i(acc_way), .danger_set_i(danger),
    .prio_valid_o(prio_valid), .prio_set_o(prio_set), .prio_way_o(prio_way),
    .pf_valid_o(pf_valid), .pf_ready_i(pf_ready), .pf_addr_o(pf_addr), .ev_o(ev));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (ev.bal_dan) n_dan++;
    if (ev.bal_ref) n_ref++;
    if (ev.ref_wrap) n_wrap++;
    if (ev.job_drop) n_drop++;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---- model state ----
  logic [S-1:0] m_ref, m_dan;

  function automatic int nearest(logic [S-1:0] v, int t);
    int best = -1, bestd = 1 << 30;
    for (int s = 0; s < S; s++) begin
      int dd = (s > t) ? s - t : t - s;
      if (!v[s] && (dd < bestd || (dd == bestd && s > best))) begin best = s; bestd = dd; end
    end
    return best;
  endfunction

  task automatic balanced(input logic [31:0] temp, inout logic [S-1:0] r, inout logic [S-1:0] d,
                          output logic [31:0] res);
    int s;
    if (r == '1) begin r = '0; d = ~danger; end
    if (d != '1) begin s = nearest(d, int'(temp[11:6])); d[s] = 1'b1; end
    else         begin s = nearest(r, int'(temp[11:6])); r[s] = 1'b1; end
    res = {temp[31:12], 6'(s), 6'b0};
  endtask

  // wait for the next accepted prefetch (random back-pressure)
  task automatic next_pf(output logic [31:0] a, output bit ok);
    int guard = 0;
    ok = 0;
    while (guard < 100) begin
      @(negedge clk);
      pf_ready = ($urandom % 3) != 0;
      @(posedge clk);
      if (pf_valid && pf_ready) begin a = pf_addr; ok = 1; return; end
      guard++;
    end
  endtask

  task automatic request(logic [31:0] addr, bit miss, bit evict, logic [31:0] eaddr, logic [1:0] way);
    bit dev, ok;
    logic [31:0] got, blk, cf, cb;
    logic [S-1:0] rf, df, rb, db;
    @(negedge clk);
    acc = '0;
    acc.valid = 1; acc.pc = 32'h80001000; acc.addr = addr; acc.miss = miss; acc.mshr_miss = miss;
    acc.evict = evict; acc.evict_addr = eaddr; acc_way = way;
    dev = evict && danger[addr[11:6]];
    #1;
    check(prio_valid == dev, "priority mark only for a dangerous eviction");
    if (dev) check(prio_set == addr[11:6] && prio_way == way, "priority mark names entry E");
    @(posedge clk);
    m_ref[addr[11:6]] = 1'b1;
    @(negedge clk);
    acc = '0;
    if (dev) begin
      next_pf(got, ok);
      check(ok && got == {eaddr[31:6], 6'b0}, $sformatf("eviction re-fetch %h, expected %h", got, eaddr));
      n_evict++;
    end
    if (miss) begin
      blk = {addr[31:6], 6'b0};
      for (int d = 1; d <= DEG; d++) begin
        next_pf(got, ok);
        rf = m_ref; df = m_dan; rb = m_ref; db = m_dan;
        balanced(blk + 32'(d * 64), rf, df, cf);
        balanced(blk - 32'(d * 64), rb, db, cb);
        check(ok && (got == cf || got == cb),
              $sformatf("noise prefetch d=%0d got %h, expected %h or %h", d, got, cf, cb));
        if (got == cf) begin m_ref = rf; m_dan = df; if (cf != cb) n_fwd++; end
        else           begin m_ref = rb; m_dan = db; n_bwd++; end
      end
    end
    // nothing else may come out
    pf_ready = 1;
    repeat (3) begin
      @(posedge clk);
      check(!pf_valid, "no extra prefetch");
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc = '0; acc_way = 0; danger = '0; pf_ready = 1;
    m_ref = '0; m_dan = '1;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // directed: a miss with no abnormal set -> noise only, refSet branch
    request(32'h8000a040, 1, 0, 32'h0, 0);
    // make sets 1, 7 and 40 abnormal, and fill refSet so that danSet reloads
    danger = (64'd1 << 1) | (64'd1 << 7) | (64'd1 << 40);
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] a, e;
      int set;
      if (n % 97 == 0) danger = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      set = ($urandom % 4 == 0) ? (($urandom % 2) ? 1 : 40) : int'($urandom % S);
      a = 32'h80000000 | (32'($urandom % 256) << 12) | (32'(set) << 6) | 32'($urandom % 64);
      e = 32'h90000000 | (32'($urandom % 256) << 12) | (32'(set) << 6);
      request(a, ($urandom % 4) != 0, ($urandom % 2) != 0, e, 2'($urandom));
    end
    check(n_fwd > 0 && n_bwd > 0, $sformatf("both directions used (%0d fwd, %0d bwd)", n_fwd, n_bwd));
    check(n_dan > 0 && n_ref > 0, $sformatf("both BalancedSet branches (%0d dan, %0d ref)", n_dan, n_ref));
    check(n_wrap > 0, "refSet wrapped");
    check(n_evict > 0, "eviction re-fetches happened");
    // overflow of the work queue with the output blocked
    @(negedge clk); pf_ready = 0;
    for (int n = 0; n < 8; n++) begin
      acc = '0; acc.valid = 1; acc.addr = 32'h80000000 + 32'(n * 64); acc.miss = 1; acc.mshr_miss = 1;
      @(negedge clk);
    end
    acc = '0;
    check(n_drop > 0, $sformatf("work dropped when the queue is full (%0d)", n_drop));
    $display("fwd=%0d bwd=%0d dan=%0d ref=%0d wrap=%0d evict=%0d drop=%0d",
             n_fwd, n_bwd, n_dan, n_ref, n_wrap, n_evict, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
