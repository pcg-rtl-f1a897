// repl_priority: the replacement-priority override PCG adds to the L1 data
// cache. When the OCM decides that a line just installed by a likely victim
// request (entry E) must leave the cache as early as possible, it marks
// (set, way) here. While a mark is held, any victim selection in that set
// returns the marked way instead of the cache's own choice, so E is the next
// line evicted from its set. The mark is dropped when the marked way is
// refilled (its line has then been evicted).
//
// Interface: mark_* writes a mark (one per set; a new mark replaces an old
// one). The query port is combinational: for query_set it returns the marked
// way if there is one, else query_default_way, the way the cache's own
// policy picked (random in the evaluated cache). fill_* reports every line
// installed in the cache; a fill into the marked way clears the mark. A mark
// and a fill in the same cycle and set: the mark wins. The cache is expected
// to fill invalid ways first and only query when the set is full. Storing
// one way per set and clearing on refill are choices of this design; the
// scheme itself only asks for "the highest replacement priority".
module repl_priority
  import pcg_pkg::*;
#(
  parameter int unsigned S = L1D_SETS,
  parameter int unsigned W = L1D_WAYS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mark_valid_i,
  input  logic [$clog2(S)-1:0] mark_set_i,
  input  logic [$clog2(W)-1:0] mark_way_i,
  input  logic [$clog2(S)-1:0] query_set_i,
  input  logic [$clog2(W)-1:0] query_default_way_i,
  output logic [$clog2(W)-1:0] query_way_o,
  output logic                 query_override_o,
  input  logic                 fill_valid_i,
  input  logic [$clog2(S)-1:0] fill_set_i,
  input  logic [$clog2(W)-1:0] fill_way_i
);
  localparam int unsigned WAY_W = $clog2(W);

  logic [S-1:0]     marked_q;
  logic [WAY_W-1:0] way_q [S];

  assign query_override_o = marked_q[query_set_i];
  assign query_way_o      = marked_q[query_set_i] ? way_q[query_set_i] : query_default_way_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      marked_q <= '0;
      for (int i = 0; i < S; i++) way_q[i] <= '0;
    end else begin
      if (fill_valid_i && marked_q[fill_set_i] && way_q[fill_set_i] == fill_way_i)
        marked_q[fill_set_i] <= 1'b0;
      if (mark_valid_i) begin
        marked_q[mark_set_i] <= 1'b1;
        way_q[mark_set_i]    <= mark_way_i;
      end
    end
  end

endmodule
