// tb_prefetch_queue: self-checking testbench of the shared 32-entry prefetch
// queue. Two producers push random addresses with random valid, the consumer
// pops with random ready. A queue model checks the order (port 0 before port
// 1 in the same cycle), that no address is lost or duplicated, that ready is
// low exactly when the queue lacks room, that the queue reaches 32 entries
// and stalls the producers, and that a pushed address can be popped in the
// next cycle.
module tb_prefetch_queue;
  import pcg_pkg::*;
  localparam int D = 32;
  logic clk = 0, rst_n = 0;
  logic v0, r0, v1, r1, ov, ordy, full;
  addr_t a0, a1, oa;
  logic [5:0] cnt;
  int checks = 0, failures = 0, n_full = 0, n_stall = 0, n_pop = 0;
  addr_t q [$];

  prefetch_queue #(.DEPTH(D)) dut (.clk, .rst_n,
    .in0_valid(v0), .in0_ready(r0), .in0_addr(a0),
    .in1_valid(v1), .in1_ready(r1), .in1_addr(a1),
    .out_valid(ov), .out_ready(ordy), .out_addr(oa), .full_o(full), .count_o(cnt));

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq = 0;
    v0 = 0; v1 = 0; ordy = 0; a0 = 0; a1 = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // latency: one push, visible at the head the next cycle
    @(negedge clk); v1 = 1; a1 = 32'h8000a040;
    @(negedge clk); v1 = 0;
    check(ov && oa == 32'h8000a040, "pushed address at the head next cycle");
    ordy = 1; q.push_back(32'h8000a040);
    for (int n = 0; n < 20000; n++) begin
      int phase = (n / 2000) % 3;   // 0: fill up, 1: drain, 2: balanced
      #1;
      // drive
      v0 = ($urandom % 100) < (phase == 0 ? 70 : phase == 1 ? 10 : 40);
      v1 = ($urandom % 100) < (phase == 0 ? 70 : phase == 1 ? 10 : 40);
      a0 = 32'(seq * 2);     a1 = 32'(seq * 2 + 1);
      ordy = ($urandom % 100) < (phase == 0 ? 20 : phase == 1 ? 90 : 45);
      #1;
      check(r0 == (q.size() < D), "port 0 ready");
      check(r1 == (q.size() + (v0 ? 1 : 0) < D), "port 1 ready");
      check(ov == (q.size() > 0) && int'(cnt) == q.size(), "occupancy");
      if (ov) check(oa == q[0], $sformatf("head %h, expected %h", oa, q[0]));
      if (full) n_full++;
      if ((v0 && !r0) || (v1 && !r1)) n_stall++;
      @(posedge clk);
      if (ov && ordy) begin void'(q.pop_front()); n_pop++; end
      if (v0 && r0) q.push_back(a0);
      if (v1 && r1) q.push_back(a1);
      seq++;
      @(negedge clk);
    end
    check(n_full > 0 && n_stall > 0, $sformatf("queue filled (%0d) and stalled producers (%0d)", n_full, n_stall));
    $display("pops=%0d full=%0d stall=%0d", n_pop, n_full, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
