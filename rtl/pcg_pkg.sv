// pcg_pkg: types and default sizes shared by the PCG (prefetching-based cache
// guard) blocks. The cache geometry follows the evaluated L1 data cache:
// 16 KB, 4 ways, 64 sets of 64-byte blocks, so address bits [11:6] select the
// set. The prefetch degree (4) and the 32-entry prefetch queue are also the
// evaluated values. Address and PC widths (32 bits, as in the example
// addresses of the AAM description) and the reset period T = 10000 cycles
// (one of the evaluated periods; no single value is singled out) are this
// design's own choices.
package pcg_pkg;

  localparam int unsigned ADDR_W       = 32;
  localparam int unsigned PC_W         = 32;
  localparam int unsigned BLOCK_BYTES  = 64;
  localparam int unsigned OFFSET_W     = $clog2(BLOCK_BYTES);
  localparam int unsigned L1D_SETS     = 64;
  localparam int unsigned L1D_WAYS     = 4;
  localparam int unsigned PF_DEGREE    = 4;
  localparam int unsigned PQ_DEPTH     = 32;
  localparam int unsigned RESET_PERIOD = 10000;
  localparam int unsigned CNT_W        = 16;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PC_W-1:0]   pc_t;

  // One core (demand) request as seen by the L1 data cache, reported in the
  // cycle the cache has looked it up. A miss that did not merge into an
  // outstanding MSHR entry sets mshr_miss. When the request's fill evicted a
  // valid line, evict is set and evict_addr holds that line's block address.
  typedef struct packed {
    logic  valid;
    pc_t   pc;
    addr_t addr;
    logic  miss;
    logic  mshr_miss;
    logic  evict;
    addr_t evict_addr;
  } access_t;

  // One-cycle event flags of the OCM, for monitoring and statistics.
  typedef struct packed {
    logic evict_pf;   // an evicted line of a dangerous set was queued for re-fetch
    logic prio_mark;  // a newly filled entry was given the highest replacement priority
    logic rand_fwd;   // a noise prefetch went forward (+d blocks)
    logic rand_bwd;   // a noise prefetch went backward (-d blocks)
    logic bal_dan;    // BalancedSet moved the prefetch to an unvisited abnormal set
    logic bal_ref;    // BalancedSet moved the prefetch to an unreferenced set
    logic ref_wrap;   // refSet was full: refSet cleared, danSet reloaded from ~dangerSet
    logic job_drop;   // a request arrived while the OCM work queue was full
  } ocm_events_t;

  function automatic addr_t block_addr(addr_t a);
    return {a[ADDR_W-1:OFFSET_W], {OFFSET_W{1'b0}}};
  endfunction

endpackage
