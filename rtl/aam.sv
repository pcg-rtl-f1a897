// aam: Attack Aware Module of PCG. It watches the L1 data cache requests that
// caused an MSHR miss (a miss that needed a new MSHR entry) and marks cache
// sets that receive an attacker-like burst of such misses as abnormal.
//
// Working, as described for PCG:
//  (a) accessCounter: S saturating counters, one per set. An MSHR-missing
//      request to set i does C_i = (C_i == W) ? W : C_i + 1.
//  (b) dangerSet: an S-bit register, zero after reset. When a request's PC
//      differs from lastPC (a new instruction), every bit becomes
//      D_i = D_i | (C_i >= TAU), TAU = W, and lastPC takes the new PC.
//  (c) cnt: a 16-bit counter that increments every clock. When cnt != 0 and
//      cnt % T == 0, all counters and dangerSet are cleared. cnt restarts at
//      zero when dangerSet turns from zero to non-zero, so a freshly raised
//      dangerSet lives a full period before it can be cleared.
//
// Choices of this design where the description is silent: the dangerSet
// update in (b) uses the counter values from before the current request's own
// increment (the check closes the previous instruction's accesses), and the
// request's increment is applied in the same cycle. A request arriving in the
// cycle of a periodic clear is counted into the freshly cleared counters.
// lastPC resets to zero. Timing: one request per cycle, all state updates at
// the next clock edge; danger_set_o is a register output.
module aam
  import pcg_pkg::*;
#(
  parameter int unsigned S        = L1D_SETS,
  parameter int unsigned W        = L1D_WAYS,
  parameter int unsigned TAU      = W,
  parameter int unsigned T        = RESET_PERIOD,
  parameter int unsigned OFF_W    = OFFSET_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  access_t      acc_i,            // core request as reported by the cache
  output logic [S-1:0] danger_set_o,     // dangerSet
  output logic         period_clear_o,   // pulse: periodic clear happened this cycle
  output logic         cnt_restart_o     // pulse: cnt restarted because dangerSet became non-zero
);
  localparam int unsigned SET_W = $clog2(S);
  localparam int unsigned C_W   = $clog2(W + 1);

  logic [C_W-1:0]   ctr_q [S];
  logic [S-1:0]     danger_q;
  pc_t              last_pc_q;
  logic [CNT_W-1:0] cnt_q;

  logic             take;
  logic [SET_W-1:0] set_idx;
  logic             new_instr;
  logic             period;
  logic [S-1:0]     reached;
  logic [S-1:0]     danger_d;

  assign take      = acc_i.valid && acc_i.mshr_miss;
  assign set_idx   = acc_i.addr[OFF_W +: SET_W];
  assign new_instr = take && (acc_i.pc != last_pc_q);
  assign period    = (cnt_q != '0) && ((cnt_q % CNT_W'(T)) == '0);

  always_comb begin
    for (int i = 0; i < S; i++) reached[i] = (ctr_q[i] >= C_W'(TAU));
    danger_d = new_instr ? (danger_q | reached) : danger_q;
  end

  assign danger_set_o   = danger_q;
  assign period_clear_o = period;
  assign cnt_restart_o  = !period && (danger_q == '0) && (danger_d != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < S; i++) ctr_q[i] <= '0;
      danger_q  <= '0;
      last_pc_q <= '0;
      cnt_q     <= '0;
    end else begin
      if (take && new_instr) last_pc_q <= acc_i.pc;
      if (period) begin
        for (int i = 0; i < S; i++)
          ctr_q[i] <= (take && set_idx == SET_W'(i)) ? C_W'(1) : '0;
        danger_q <= '0;
        cnt_q    <= cnt_q + 1'b1;
      end else begin
        if (take && ctr_q[set_idx] != C_W'(W)) ctr_q[set_idx] <= ctr_q[set_idx] + 1'b1;
        danger_q <= danger_d;
        cnt_q    <= cnt_restart_o ? '0 : cnt_q + 1'b1;
      end
    end
  end

  // A counter never exceeds the number of ways.
  for (genvar g = 0; g < S; g++) begin : g_chk
    a_sat : assert property (@(posedge clk) disable iff (!rst_n) ctr_q[g] <= C_W'(W));
  end

endmodule
