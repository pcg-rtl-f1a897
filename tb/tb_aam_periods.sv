// tb_aam_periods: runs the Attack Aware Module at each clear period of the
// sensitivity study, T = 1000, 2000, 5000, 10000, 20000, 30000, 40000 and
// 50000 cycles, all within the 16-bit cnt. Eight instances see the same
// requests: one load PC misses four times in set 1, then a new PC arrives.
// Each instance must flag set 1 only, restart cnt, keep the flag for
// exactly T+1 cycles (cnt counts 0..T, the clear lands on the next edge)
// and then clear it with a periodic-clear pulse.
module tb_aam_periods;
  import pcg_pkg::*;
  localparam int N = 8;
  localparam int unsigned PERIODS [N] = '{1000, 2000, 5000, 10000, 20000, 30000, 40000, 50000};

  logic clk = 0, rst_n = 0;
  access_t acc;
  logic [63:0] danger [N];
  logic [N-1:0] clear, restart;
  int checks = 0, failures = 0;

  for (genvar k = 0; k < N; k++) begin : g_aam
    aam #(.T(PERIODS[k])) u (.clk, .rst_n, .acc_i(acc), .danger_set_o(danger[k]),
                             .period_clear_o(clear[k]), .cnt_restart_o(restart[k]));
  end

  always #5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int life [N];
    bit seen_clear [N];
    acc = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int j = 0; j < 4; j++) begin
      @(negedge clk);
      acc = '0; acc.valid = 1; acc.miss = 1; acc.mshr_miss = 1;
      acc.pc = 32'h80001100; acc.addr = 32'h80009040 + 32'(j * 4096);
    end
    @(negedge clk);
    acc.pc = 32'h800013f4; acc.addr = 32'h80002fe0;
    #1 check(restart == '1, "every instance restarts cnt");
    @(negedge clk);
    acc = '0;
    for (int k = 0; k < N; k++) begin
      check(danger[k] == 64'h2, $sformatf("T=%0d: only set 1 flagged", PERIODS[k]));
      life[k] = 1; seen_clear[k] = 0;
    end
    for (int c = 0; c < 50010; c++) begin
      for (int k = 0; k < N; k++) if (clear[k]) seen_clear[k] = 1;
      @(negedge clk);
      for (int k = 0; k < N; k++) if (danger[k] != '0) life[k]++;
    end
    for (int k = 0; k < N; k++) begin
      check(life[k] == int'(PERIODS[k]) + 1,
            $sformatf("T=%0d: flag lived %0d cycles, expected %0d", PERIODS[k], life[k], PERIODS[k] + 1));
      check(seen_clear[k], $sformatf("T=%0d: clear pulse", PERIODS[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
