// tb_next_line_prefetcher: self-checking testbench of the basic next-line
// prefetcher. After an access to block B it must offer B+1 .. B+4 blocks in
// order, one per accepted cycle (so 4 cycles with no back-pressure), ignore
// accesses while busy and while disabled, and hold its output under
// back-pressure.
module tb_next_line_prefetcher;
  import pcg_pkg::*;
  logic clk = 0, rst_n = 0, en;
  access_t acc;
  logic pv, pr, drop;
  addr_t pa;
  int checks = 0, failures = 0, n_drop = 0;

  next_line_prefetcher #(.DEGREE(4)) dut (.clk, .rst_n, .en_i(en), .acc_i(acc),
    .pf_valid_o(pv), .pf_ready_i(pr), .pf_addr_o(pa), .drop_o(drop));

  always #5 clk = ~clk;
  always @(posedge clk) if (drop) n_drop++;

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
    en = 1; acc = '0; pr = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      logic [31:0] a;
      int cyc;
      bit stall;
      a = $urandom;
      stall = (n % 2) == 1;
      @(negedge clk);
      en = (n % 5) != 4;
      acc.valid = 1; acc.addr = a;
      @(negedge clk);
      acc.valid = 1; acc.addr = $urandom;   // arrives while busy: ignored
      if (en) begin
        for (int d = 1; d <= 4; d++) begin
          cyc = 0;
          pr = stall ? ($urandom % 2) : 1;
          while (!pr) begin
            check(pv && pa == {a[31:6], 6'b0} + 32'(d * 64), "output held under back-pressure");
            @(negedge clk); acc.valid = 0; pr = $urandom % 2; cyc++;
          end
          check(pv && pa == {a[31:6], 6'b0} + 32'(d * 64),
                $sformatf("prefetch %0d: %h, expected %h", d, pa, {a[31:6], 6'b0} + 32'(d * 64)));
          @(negedge clk); acc.valid = 0;
        end
        check(!pv, "burst ends after 4 prefetches");
      end else begin
        check(!pv, "disabled prefetcher stays idle");
        acc.valid = 0;
      end
    end
    check(n_drop > 0, "accesses while busy are dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
