// tb_pcg_l2: PCG at the geometry of a 512 KB, 16-way L2 cache with 64-byte
// lines (S = 512 sets, W = 16 ways, set index = address bits [14:6]).
// Requests are driven directly, spaced so that no work is dropped:
//  1. sixteen MSHR-missing loads from one PC to set 300, then a load from a
//     new PC: dangerSet must hold exactly set 300 (C_300 reached W = 16);
//  2. a load to set 300 whose fill evicts line X into way 5: the victim
//     query for set 300 must return way 5 until way 5 is refilled, and X
//     must be prefetched back;
//  3. every miss must produce four noise prefetches whose tag equals the tag
//     of block +/- d*64 (d = 1..4) and whose set is unreferenced at the time;
//     the prefetch count must be exactly 4 per miss plus one re-fetch.
module tb_pcg_l2;
  import pcg_pkg::*;
  localparam int S = 512, W = 16;

  logic clk = 0, rst_n = 0;
  access_t acc;
  logic [3:0] acc_way;
  logic [8:0] rq_set; logic [3:0] rq_dway, rq_way; logic rq_ovr;
  logic fill_v; logic [8:0] fill_s; logic [3:0] fill_w;
  logic pf_valid; addr_t pf_addr;
  logic [S-1:0] danger;
  logic pclr, crst, ndrop, pqfull;
  ocm_events_t ev;
  logic [5:0] pqcnt;
  int checks = 0, failures = 0;

  pcg_top #(.S(S), .W(W)) dut (
    .clk, .rst_n, .acc_i(acc), .acc_way_i(acc_way), .nlp_en_i(1'b0),
    .rq_set_i(rq_set), .rq_default_way_i(rq_dway), .rq_way_o(rq_way), .rq_override_o(rq_ovr),
    .fill_valid_i(fill_v), .fill_set_i(fill_s), .fill_way_i(fill_w),
    .pf_valid_o(pf_valid), .pf_ready_i(1'b1), .pf_addr_o(pf_addr),
    .danger_set_o(danger), .aam_period_clear_o(pclr), .aam_cnt_restart_o(crst),
    .ocm_ev_o(ev), .nlp_drop_o(ndrop), .pq_full_o(pqfull), .pq_count_o(pqcnt));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  addr_t got [$];
  int n_drop = 0;
  always @(posedge clk) if (rst_n) begin
    if (pf_valid) got.push_back(pf_addr);
    if (ev.job_drop) n_drop++;
  end

  // one request, then idle cycles so its prefetches drain
  task automatic req(logic [31:0] pc, logic [31:0] addr, bit evict, logic [31:0] eaddr, int way);
    logic [31:0] blk;
    int base;
    @(negedge clk);
    acc = '0; acc.valid = 1; acc.pc = pc; acc.addr = addr; acc.miss = 1; acc.mshr_miss = 1;
    acc.evict = evict; acc.evict_addr = eaddr; acc_way = 4'(way);
    @(negedge clk);
    acc = '0;
    base = got.size();
    repeat (12) @(negedge clk);
    blk = {addr[31:6], 6'b0};
    // the only eviction in this test is in a flagged set, so it is re-fetched
    check(got.size() - base == 4 + (evict ? 1 : 0), "prefetch count for one miss");
    for (int i = got.size() - 4; i < got.size(); i++) begin
      int d = i - (got.size() - 4) + 1;
      logic [31:0] f, b;
      f = blk + 32'(d * 64); b = blk - 32'(d * 64);
      check(got[i][5:0] == 0 && (got[i][31:15] == f[31:15] || got[i][31:15] == b[31:15]),
            $sformatf("noise prefetch %h for block %h, d=%0d", got[i], blk, d));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] x;
    acc = '0; acc_way = 0; rq_set = 0; rq_dway = 0; fill_v = 0; fill_s = 0; fill_w = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 16; k++) req(32'h80001100, 32'h80000000 | (32'd300 << 6) | (32'(k) << 15), 0, 0, k);
    check(danger == '0, "no flag while the same PC continues");
    req(32'h80001200, 32'h80000000 | (32'd7 << 6), 0, 0, 0);
    check(danger == (512'd1 << 300), "exactly set 300 flagged");
    x = 32'h80000000 | (32'd300 << 6) | (32'd3 << 15);        // line evicted by the victim's fill
    req(32'h80001300, 32'h90000000 | (32'd300 << 6), 1, x, 5);
    check(got[got.size() - 5] == x, "evicted line prefetched back before the noise");
    rq_set = 300; rq_dway = 0;
    #1 check(rq_ovr && rq_way == 5, "victim query returns the marked way 5");
    @(negedge clk); fill_v = 1; fill_s = 300; fill_w = 5;
    @(negedge clk); fill_v = 0;
    #1 check(!rq_ovr && rq_way == 0, "mark cleared by refilling way 5");
    check(n_drop == 0, "no work dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
