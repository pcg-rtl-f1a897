// next_line_prefetcher: the optional basic prefetcher that PCG can be
// combined with. On a cache access it prefetches the next DEGREE blocks after
// the accessed one (block + 1 .. block + DEGREE), pushing them into the
// shared prefetch queue one per cycle. It is enabled at run time by en_i.
//
// Timing: an access seen while idle is latched; the following DEGREE
// addresses are offered on pf_valid_o/pf_addr_o and each waits for
// pf_ready_i. Accesses arriving while a burst is still in progress are
// ignored (drop_o pulses). Triggering on every access, one address per
// cycle and ignoring accesses while busy are choices of this design.
module next_line_prefetcher
  import pcg_pkg::*;
#(
  parameter int unsigned DEGREE = PF_DEGREE
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en_i,
  input  access_t acc_i,
  output logic    pf_valid_o,
  input  logic    pf_ready_i,
  output addr_t   pf_addr_o,
  output logic    drop_o
);
  localparam int unsigned D_W = $clog2(DEGREE + 1);

  logic           busy_q;
  addr_t          blk_q;
  logic [D_W-1:0] d_q;

  assign pf_valid_o = busy_q;
  assign pf_addr_o  = blk_q + ADDR_W'(d_q) * ADDR_W'(BLOCK_BYTES);
  assign drop_o     = en_i && acc_i.valid && busy_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      blk_q  <= '0;
      d_q    <= '0;
    end else if (!busy_q) begin
      if (en_i && acc_i.valid) begin
        busy_q <= 1'b1;
        blk_q  <= block_addr(acc_i.addr);
        d_q    <= D_W'(1);
      end
    end else if (pf_ready_i) begin
      if (d_q == D_W'(DEGREE)) busy_q <= 1'b0;
      d_q <= d_q + 1'b1;
    end
  end

endmodule
