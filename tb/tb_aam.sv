// tb_aam: self-checking testbench of the Attack Aware Module. A directed
// part replays the example of the AAM description (PC 0x80001100 hitting
// set 1 four times, then a new PC 0x800013f4) and checks that set 1 is
// flagged one cycle after the new PC, that cnt restarts, and that dangerSet
// is cleared exactly T+1 cycles later (cnt counts 0..T, the clear lands on the next edge). A random part compares dangerSet every
// cycle against a behavioural model written from the equations
// C_i = min(C_i + 1, W), D_i |= (C_i >= W) on a new PC, and the periodic
// clear when cnt != 0 and cnt % T == 0. T is reduced to 300 to keep the run
// short.
module tb_aam;
  import pcg_pkg::*;
  localparam int S = 64, W = 4, T = 300;

  logic clk = 0, rst_n = 0;
  access_t acc;
  logic [S-1:0] danger;
  logic period_clear, cnt_restart;
  int checks = 0, failures = 0;

  aam #(.S(S), .W(W), .T(T)) dut (.clk, .rst_n, .acc_i(acc), .danger_set_o(danger),
                                   .period_clear_o(period_clear), .cnt_restart_o(cnt_restart));

  always #5 clk = ~clk;

  // reference model
  int m_c [S];
  logic [S-1:0] m_d;
  logic [31:0] m_lastpc;
  int m_cnt;

  task automatic model_step(access_t a);
    int i;
    bit take, newi, per;
    logic [S-1:0] d_new;
    i = int'(a.addr[11:6]);
    take = a.valid && a.mshr_miss;
    newi = take && (a.pc != m_lastpc);
    per  = (m_cnt != 0) && (m_cnt % T == 0);
    d_new = m_d;
    if (newi) for (int k = 0; k < S; k++) if (m_c[k] >= W) d_new[k] = 1;
    if (newi) m_lastpc = a.pc;
    if (per) begin
      for (int k = 0; k < S; k++) m_c[k] = 0;
      if (take) m_c[i] = 1;
      m_d = '0;
      m_cnt = (m_cnt + 1) % 65536;
    end else begin
      if (take) m_c[i] = (m_c[i] == W) ? W : m_c[i] + 1;
      if (m_d == '0 && d_new != '0) m_cnt = 0; else m_cnt = (m_cnt + 1) % 65536;
      m_d = d_new;
    end
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic drive(logic v, logic [31:0] pc, logic [31:0] addr, logic mm);
    acc = '0;
    acc.valid = v; acc.pc = pc; acc.addr = addr; acc.miss = v; acc.mshr_miss = mm;
    @(posedge clk);
    model_step(acc);
    #1;
    check(danger == m_d, $sformatf("dangerSet %h vs model %h", danger, m_d));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wait_cycles;
    acc = '0;
    foreach (m_c[k]) m_c[k] = 0;
    m_d = '0; m_lastpc = '0; m_cnt = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // Directed: example of the AAM description. Set index = addr[11:6].
    check(6'(32'h8000b730 >> 6) == 6'd28 && 6'(32'h8000a040 >> 6) == 6'd1 &&
          6'(32'h80002fe0 >> 6) == 6'd63, "set index of example addresses");
    drive(1, 32'h800010f0, 32'h8000b730, 1);
    drive(1, 32'h80001100, 32'h800011a0, 1);
    drive(1, 32'h80001100, 32'h80001fc0, 1);
    drive(1, 32'h80001100, 32'h80009040, 1);
    drive(1, 32'h80001100, 32'h8000a040, 0);   // a merged miss: not counted
    drive(1, 32'h80001100, 32'h8000a040, 1);
    drive(1, 32'h80001100, 32'h8000b040, 1);
    check(danger == '0, "no flag before a new PC");
    drive(1, 32'h80001100, 32'h8000c040, 1);   // C_1 reaches W = 4
    check(danger == '0, "still no flag while the same PC continues");
    acc = '0; acc.valid = 1; acc.pc = 32'h800013f4; acc.addr = 32'h80002fe0; acc.mshr_miss = 1; acc.miss = 1;
    #1 check(cnt_restart == 1'b1, "cnt restart pulse when dangerSet turns non-zero");
    @(posedge clk); model_step(acc); #1;
    check(danger == (64'd1 << 1), $sformatf("only set 1 flagged, got %h", danger));
    // cnt is 0 after the edge that raised dangerSet, reaches T after T more
    // edges, and the clear takes effect at the edge after that: T+1 cycles.
    wait_cycles = 0;
    acc = '0;
    while (danger != '0 && wait_cycles < 2 * T) begin
      @(posedge clk); model_step(acc); #1; wait_cycles++;
    end
    check(wait_cycles == T + 1, $sformatf("dangerSet lifetime %0d cycles, expected %0d", wait_cycles, T + 1));
    check(danger == m_d, "model agrees after clear");
    // Random: a few PCs, sets concentrated on 8 sets, mostly MSHR misses.
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] pc, addr;
      pc   = 32'h80001000 + 32'(($urandom % 6) * 4);
      addr = 32'h80000000 | (32'($urandom % 16) << 12) | (32'($urandom % 8) << 9) | 32'($urandom % 64);
      drive(($urandom % 4) != 0, pc, addr, ($urandom % 5) != 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
