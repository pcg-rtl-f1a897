// prefetch_queue: the first-in first-out Prefetch Queue of the L1 data cache,
// shared by the basic prefetcher and PCG. It holds DEPTH (32) block
// addresses and hands them to the cache one at a time; the cache ignores an
// address that is already present and otherwise sends a request to the next
// level. PCG only appends to it, so the basic prefetcher keeps its own port.
//
// Interface: two push ports with valid/ready, port 0 for the basic
// prefetcher and port 1 for PCG. Both may push in the same cycle; when only
// one slot is free, port 0 goes first (ready of port 1 then depends on
// valid of port 0). Entries pushed in one cycle are ordered port 0 then
// port 1. The head is offered on out_valid/out_addr (first-word
// fall-through) and leaves when out_ready is high. A slot freed by a pop is
// reusable from the next cycle. Full queues back-pressure the producers
// instead of dropping addresses. The two-port arrangement and the
// back-pressure are choices of this design.
module prefetch_queue
  import pcg_pkg::*;
#(
  parameter int unsigned DEPTH = PQ_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in0_valid,
  output logic  in0_ready,
  input  addr_t in0_addr,
  input  logic  in1_valid,
  output logic  in1_ready,
  input  addr_t in1_addr,
  output logic  out_valid,
  input  logic  out_ready,
  output addr_t out_addr,
  output logic  full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  addr_t         mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;
  logic [CW-1:0] cnt_q;
  logic [CW-1:0] free;
  logic          push0, push1, pop;
  logic [1:0]    npush;

  assign free      = CW'(DEPTH) - cnt_q;
  assign in0_ready = (free != '0);
  assign in1_ready = in0_valid ? (free >= CW'(2)) : (free != '0);
  assign push0     = in0_valid && in0_ready;
  assign push1     = in1_valid && in1_ready;
  assign npush     = {1'b0, push0} + {1'b0, push1};
  assign out_valid = (cnt_q != '0);
  assign out_addr  = mem[rd_q];
  assign pop       = out_valid && out_ready;
  assign full_o    = (cnt_q == CW'(DEPTH));
  assign count_o   = cnt_q;

  function automatic logic [PW-1:0] ptr_add(logic [PW-1:0] p, int unsigned n);
    return PW'((int'(p) + n) % DEPTH);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      wr_q  <= ptr_add(wr_q, int'(npush));
      if (pop) rd_q <= ptr_add(rd_q, 1);
      cnt_q <= cnt_q + CW'(npush) - CW'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push0) mem[wr_q] <= in0_addr;
    if (push1) mem[push0 ? ptr_add(wr_q, 1) : wr_q] <= in1_addr;
  end

  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= CW'(DEPTH));

endmodule
