// tb_repl_priority: self-checking testbench of the replacement-priority
// table. Random marks, fills and queries are applied and every query result
// is compared with a model that keeps at most one marked way per set: a
// query returns the marked way if any, otherwise the default way; a fill
// into the marked way removes the mark; a mark in the same cycle as a fill
// survives.
module tb_repl_priority;
  localparam int S = 64, W = 4;
  logic clk = 0, rst_n = 0;
  logic mark_v; logic [5:0] mark_s; logic [1:0] mark_w;
  logic [5:0] q_s; logic [1:0] q_dw, q_w; logic q_o;
  logic fill_v; logic [5:0] fill_s; logic [1:0] fill_w;
  int checks = 0, failures = 0, n_override = 0, n_clear = 0;

  repl_priority #(.S(S), .W(W)) dut (.clk, .rst_n,
    .mark_valid_i(mark_v), .mark_set_i(mark_s), .mark_way_i(mark_w),
    .query_set_i(q_s), .query_default_way_i(q_dw), .query_way_o(q_w), .query_override_o(q_o),
    .fill_valid_i(fill_v), .fill_set_i(fill_s), .fill_way_i(fill_w));

  always #5 clk = ~clk;

  bit m_v [S];
  int m_w [S];

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
    mark_v = 0; fill_v = 0; q_s = 0; q_dw = 0; mark_s = 0; mark_w = 0; fill_s = 0; fill_w = 0;
    foreach (m_v[i]) begin m_v[i] = 0; m_w[i] = 0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // directed: mark set 5 way 2; default way 0 is overridden; fill of way 1 keeps it; fill of way 2 clears it
    @(negedge clk); mark_v = 1; mark_s = 5; mark_w = 2;
    @(negedge clk); mark_v = 0; m_v[5] = 1; m_w[5] = 2;
    q_s = 5; q_dw = 0; #1 check(q_w == 2 && q_o, "marked way overrides the default");
    fill_v = 1; fill_s = 5; fill_w = 1;
    @(negedge clk); fill_v = 0; #1 check(q_w == 2, "fill of another way keeps the mark");
    fill_v = 1; fill_w = 2;
    @(negedge clk); fill_v = 0; m_v[5] = 0; #1 check(q_w == 0 && !q_o, "fill of the marked way clears it");
    // random
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      mark_v = ($urandom % 3) == 0; mark_s = 6'($urandom % 8); mark_w = 2'($urandom);
      fill_v = ($urandom % 2) == 0; fill_s = 6'($urandom % 8); fill_w = 2'($urandom);
      q_s = 6'($urandom % 8); q_dw = 2'($urandom);
      #1;
      check(q_w == (m_v[q_s] ? 2'(m_w[q_s]) : q_dw) && q_o == m_v[q_s], "query matches model");
      if (q_o) n_override++;
      @(posedge clk);
      if (fill_v && m_v[fill_s] && m_w[fill_s] == int'(fill_w)) begin m_v[fill_s] = 0; n_clear++; end
      if (mark_v) begin m_v[mark_s] = 1; m_w[mark_s] = int'(mark_w); end
    end
    check(n_override > 0 && n_clear > 0, "overrides and clears both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
