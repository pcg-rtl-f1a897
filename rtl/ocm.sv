// ocm: Observation Confused Module of PCG. It turns core requests of the L1
// data cache into prefetches that (1) undo the footprint a likely victim
// leaves in a set flagged by the AAM and (2) add balanced random noise.
//
// Per core request to set i (Algorithm 1 of the PCG scheme):
//  * If dangerSet[i] is set and the request's fill evicted a line, the new
//    entry E (set i, way acc_way_i) is given the highest replacement priority
//    (prio_* outputs, combinational, in the cycle of the request) and the evicted block
//    address is queued for prefetching, so the evicted line comes back.
//  * refSet[i] is set.
//  * On a miss, for d = 1..DEGREE a direction is drawn at random and
//    tempAddr = blk +/- d*64 bytes. BalancedSet (Algorithm 2) then replaces
//    its set index: when refSet is all ones, refSet is cleared and danSet is
//    reloaded with ~dangerSet; if danSet still has a zero (an abnormal set not
//    yet visited), the nearest such set to tempAddr's set is chosen and marked
//    in danSet, otherwise the nearest set with refSet = 0 is chosen and marked
//    in refSet. The result is queued for prefetching.
//
// Implementation: refSet and the prio marking are updated in the cycle a
// request arrives. Work that produces prefetches (an eviction re-fetch and/or
// DEGREE noise prefetches) is put in a small work queue of JOBQ_DEPTH entries
// and issued one address per cycle, the eviction re-fetch first, through a
// one-entry output register with a valid/ready port towards the prefetch
// queue. BalancedSet state and the LFSR change when an address is generated
// into that register; back-pressure stalls generation. When the work queue is full the new work is dropped
// (job_drop event). Random directions come from a 16-bit LFSR that advances
// on every generated noise prefetch. "Nearest set" is measured as |s - t_set|
// without wrap-around, since the set index is replaced inside the same tag;
// on a tie the higher set wins. danSet resets to all ones (= ~dangerSet with
// dangerSet = 0). Work queue, LFSR, tie rule, one-address-per-cycle issue and
// dropping are choices of this design.
//
// prio_set_o and prio_way_o are the request's own set index and way, passed
// on unchanged next to prio_valid_o so the marking is a single bundle.
module ocm
  import pcg_pkg::*;
#(
  parameter int unsigned S          = L1D_SETS,
  parameter int unsigned W          = L1D_WAYS,
  parameter int unsigned DEGREE     = PF_DEGREE,
  parameter int unsigned OFF_W      = OFFSET_W,
  parameter int unsigned JOBQ_DEPTH = 4,
  parameter logic [15:0] LFSR_SEED  = 16'hACE1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  access_t              acc_i,        // core request as reported by the cache
  input  logic [$clog2(W)-1:0] acc_way_i,    // way the request was filled into (entry E)
  input  logic [S-1:0]         danger_set_i, // dangerSet from the AAM
  // highest-replacement-priority marking of entry E (combinational from acc_i)
  output logic                 prio_valid_o,
  output logic [$clog2(S)-1:0] prio_set_o,
  output logic [$clog2(W)-1:0] prio_way_o,
  // prefetch addresses towards the prefetch queue
  output logic                 pf_valid_o,
  input  logic                 pf_ready_i,
  output addr_t                pf_addr_o,
  output ocm_events_t          ev_o
);
  localparam int unsigned SET_W = $clog2(S);
  localparam int unsigned D_W   = $clog2(DEGREE + 1);

  typedef struct packed {
    logic  evict_pf;   // re-fetch evict_addr
    addr_t evict_addr;
    logic  noise;      // generate DEGREE noise prefetches around blk
    addr_t blk;
  } job_t;

  // ---------------- request intake ----------------
  logic [SET_W-1:0] req_set;
  logic             danger_evict;
  job_t             new_job;
  logic             job_push, job_ready;

  assign req_set      = acc_i.addr[OFF_W +: SET_W];
  assign danger_evict = acc_i.valid && acc_i.evict && danger_set_i[req_set];
  assign new_job      = '{evict_pf: danger_evict, evict_addr: block_addr(acc_i.evict_addr),
                          noise: acc_i.valid && acc_i.miss, blk: block_addr(acc_i.addr)};
  assign job_push     = danger_evict || (acc_i.valid && acc_i.miss);

  // entry E is marked in the cycle of the request itself
  assign prio_valid_o = danger_evict;
  assign prio_set_o   = req_set;
  assign prio_way_o   = acc_way_i;

  // ---------------- work queue ----------------
  job_t job;
  logic job_valid, job_pop;

  pcg_fifo #(.T(job_t), .DEPTH(JOBQ_DEPTH)) u_jobq (
    .clk, .rst_n,
    .in_valid (job_push), .in_ready (job_ready), .in_data (new_job),
    .out_valid(job_valid), .out_ready(job_pop), .out_data(job),
    .count    ()
  );

  // ---------------- issue state ----------------
  // step 0 = eviction re-fetch, steps 1..DEGREE = noise prefetch with distance d
  logic [D_W-1:0] step_q;
  logic [S-1:0]   ref_q, dan_q;
  logic [15:0]    lfsr_q;

  logic [D_W-1:0] step;        // effective step for the head job
  logic           is_evict_step;
  logic           last_step;

  // skip step 0 when the job has no eviction re-fetch
  assign step          = (step_q == '0 && !job.evict_pf) ? D_W'(1) : step_q;
  assign is_evict_step = (step == '0);
  assign last_step     = is_evict_step ? !job.noise : (step == D_W'(DEGREE));

  // nearest set s to t with v[s] == 0; ties go to the higher set
  function automatic logic [SET_W-1:0] nearest_zero(logic [S-1:0] v, logic [SET_W-1:0] t);
    logic [SET_W-1:0] r;
    r = t;
    for (int k = S - 1; k >= 0; k--) begin
      if (int'(t) - k >= 0 && !v[int'(t) - k]) r = SET_W'(int'(t) - k);
      if (int'(t) + k < S  && !v[int'(t) + k]) r = SET_W'(int'(t) + k);
    end
    return r;
  endfunction

  // BalancedSet for the current noise step
  logic             dir_bwd;
  addr_t            temp_addr;
  logic             wrap;
  logic [S-1:0]     ref_eff, dan_eff;
  logic             use_dan;
  logic [SET_W-1:0] t_set, final_set;
  addr_t            noise_addr;

  always_comb begin
    dir_bwd   = lfsr_q[0];
    temp_addr = dir_bwd ? job.blk - ADDR_W'(step) * ADDR_W'(BLOCK_BYTES)
                        : job.blk + ADDR_W'(step) * ADDR_W'(BLOCK_BYTES);
    wrap      = (ref_q == '1);
    ref_eff   = wrap ? '0 : ref_q;
    dan_eff   = wrap ? ~danger_set_i : dan_q;
    t_set     = temp_addr[OFF_W +: SET_W];
    use_dan   = (dan_eff != '1);
    final_set = use_dan ? nearest_zero(dan_eff, t_set) : nearest_zero(ref_eff, t_set);
    noise_addr = {temp_addr[ADDR_W-1:OFF_W+SET_W], final_set, {OFF_W{1'b0}}};
  end

  // Output register: an address is generated (and BalancedSet/LFSR state is
  // committed) when it is loaded here; it then waits for pf_ready_i.
  logic  out_valid_q;
  addr_t out_addr_q;
  logic  load, noise_load;

  assign load       = job_valid && (!out_valid_q || pf_ready_i);
  assign noise_load = load && !is_evict_step;
  assign job_pop    = load && last_step;
  assign pf_valid_o = out_valid_q;
  assign pf_addr_o  = out_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_q      <= '0;
      ref_q       <= '0;
      dan_q       <= '1;
      lfsr_q      <= LFSR_SEED;
      out_valid_q <= 1'b0;
      out_addr_q  <= '0;
    end else begin
      logic [S-1:0] ref_n, dan_n;
      ref_n = ref_q;
      dan_n = dan_q;
      if (load) begin
        step_q      <= last_step ? '0 : step + 1'b1;
        out_valid_q <= 1'b1;
        out_addr_q  <= is_evict_step ? job.evict_addr : noise_addr;
      end else if (pf_ready_i) begin
        out_valid_q <= 1'b0;
      end
      if (noise_load) begin
        ref_n = ref_eff;
        dan_n = dan_eff;
        if (use_dan) dan_n[final_set] = 1'b1;
        else         ref_n[final_set] = 1'b1;
        lfsr_q <= {1'b0, lfsr_q[15:1]} ^ (lfsr_q[0] ? 16'hB400 : 16'h0000);
      end
      if (acc_i.valid) ref_n[req_set] = 1'b1;
      ref_q <= ref_n;
      dan_q <= dan_n;
    end
  end

  always_comb begin
    ev_o           = '0;
    ev_o.evict_pf  = load && is_evict_step;
    ev_o.prio_mark = prio_valid_o;
    ev_o.rand_fwd  = noise_load && !dir_bwd;
    ev_o.rand_bwd  = noise_load && dir_bwd;
    ev_o.bal_dan   = noise_load && use_dan;
    ev_o.bal_ref   = noise_load && !use_dan;
    ev_o.ref_wrap  = noise_load && wrap;
    ev_o.job_drop  = job_push && !job_ready;
  end

  // An offered prefetch is held stable until it is taken.
  a_pf_hold : assert property (@(posedge clk) disable iff (!rst_n)
                               pf_valid_o && !pf_ready_i |=> pf_valid_o && $stable(pf_addr_o));

endmodule
