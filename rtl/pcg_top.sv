// pcg_top: PCG (prefetching-based cache guard) as attached to an L1 data
// cache. The cache itself (tag/data arrays, MSHRs, refill path) is outside
// this module; it reports each core request on acc_i, asks for victim ways
// on the rq_* port, reports installed lines on fill_*, and takes prefetch
// addresses from pf_*.
//
// Inside: the AAM flags abnormal sets from MSHR-missing requests
// (dangerSet); the OCM uses dangerSet to give likely victim lines the
// highest replacement priority (through repl_priority) and re-fetch the lines
// they evicted, and adds random, set-balanced noise prefetches on every
// miss; the optional next-line prefetcher (enabled by nlp_en_i) is the basic
// prefetcher. Both prefetch sources append to the shared 32-entry prefetch
// queue, the basic prefetcher on port 0 and PCG on port 1.
//
// Timing: acc_i is sampled every cycle. dangerSet and the priority marks
// are updated at the clock edge that ends the request's cycle; noise prefetches
// start to leave the OCM one cycle after the miss and enter the queue one
// per cycle. The rq_* lookup is combinational.
module pcg_top
  import pcg_pkg::*;
#(
  parameter int unsigned S          = L1D_SETS,
  parameter int unsigned W          = L1D_WAYS,
  parameter int unsigned T          = RESET_PERIOD,
  parameter int unsigned DEGREE     = PF_DEGREE,
  parameter int unsigned NLP_DEGREE = PF_DEGREE,
  parameter int unsigned PQ_D       = PQ_DEPTH,
  parameter int unsigned JOBQ_DEPTH = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // core requests reported by the L1 data cache
  input  access_t              acc_i,
  input  logic [$clog2(W)-1:0] acc_way_i,
  input  logic                 nlp_en_i,
  // victim selection of the cache
  input  logic [$clog2(S)-1:0] rq_set_i,
  input  logic [$clog2(W)-1:0] rq_default_way_i,
  output logic [$clog2(W)-1:0] rq_way_o,
  output logic                 rq_override_o,
  input  logic                 fill_valid_i,
  input  logic [$clog2(S)-1:0] fill_set_i,
  input  logic [$clog2(W)-1:0] fill_way_i,
  // prefetch requests to the cache
  output logic                 pf_valid_o,
  input  logic                 pf_ready_i,
  output addr_t                pf_addr_o,
  // status
  output logic [S-1:0]         danger_set_o,
  output logic                 aam_period_clear_o,
  output logic                 aam_cnt_restart_o,
  output ocm_events_t          ocm_ev_o,
  output logic                 nlp_drop_o,
  output logic                 pq_full_o,
  output logic [$clog2(PQ_D+1)-1:0] pq_count_o
);
  logic [S-1:0]         danger_set;
  logic                 prio_valid;
  logic [$clog2(S)-1:0] prio_set;
  logic [$clog2(W)-1:0] prio_way;
  logic                 ocm_pf_valid, ocm_pf_ready;
  addr_t                ocm_pf_addr;
  logic                 nlp_pf_valid, nlp_pf_ready;
  addr_t                nlp_pf_addr;

  aam #(.S(S), .W(W), .T(T)) u_aam (
    .clk, .rst_n,
    .acc_i,
    .danger_set_o  (danger_set),
    .period_clear_o(aam_period_clear_o),
    .cnt_restart_o (aam_cnt_restart_o)
  );

  ocm #(.S(S), .W(W), .DEGREE(DEGREE), .JOBQ_DEPTH(JOBQ_DEPTH)) u_ocm (
    .clk, .rst_n,
    .acc_i,
    .acc_way_i,
    .danger_set_i(danger_set),
    .prio_valid_o(prio_valid),
    .prio_set_o  (prio_set),
    .prio_way_o  (prio_way),
    .pf_valid_o  (ocm_pf_valid),
    .pf_ready_i  (ocm_pf_ready),
    .pf_addr_o   (ocm_pf_addr),
    .ev_o        (ocm_ev_o)
  );

  repl_priority #(.S(S), .W(W)) u_repl (
    .clk, .rst_n,
    .mark_valid_i       (prio_valid),
    .mark_set_i         (prio_set),
    .mark_way_i         (prio_way),
    .query_set_i        (rq_set_i),
    .query_default_way_i(rq_default_way_i),
    .query_way_o        (rq_way_o),
    .query_override_o   (rq_override_o),
    .fill_valid_i,
    .fill_set_i,
    .fill_way_i
  );

  next_line_prefetcher #(.DEGREE(NLP_DEGREE)) u_nlp (
    .clk, .rst_n,
    .en_i      (nlp_en_i),
    .acc_i,
    .pf_valid_o(nlp_pf_valid),
    .pf_ready_i(nlp_pf_ready),
    .pf_addr_o (nlp_pf_addr),
    .drop_o    (nlp_drop_o)
  );

  prefetch_queue #(.DEPTH(PQ_D)) u_pq (
    .clk, .rst_n,
    .in0_valid(nlp_pf_valid), .in0_ready(nlp_pf_ready), .in0_addr(nlp_pf_addr),
    .in1_valid(ocm_pf_valid), .in1_ready(ocm_pf_ready), .in1_addr(ocm_pf_addr),
    .out_valid(pf_valid_o),   .out_ready(pf_ready_i),   .out_addr(pf_addr_o),
    .full_o   (pq_full_o),
    .count_o  (pq_count_o)
  );

  assign danger_set_o = danger_set;

endmodule
