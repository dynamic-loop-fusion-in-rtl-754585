// du_pkg: types and constants shared by the dynamic-loop-fusion Data Unit (DU),
// its address generation units (AGUs) and the top level.
//
// A memory request travels from an AGU to the DU as an (address, schedule) pair.
// The schedule is a tuple with one 32-bit counter per loop depth; element d-1
// holds the counter of loop depth d (depth 1 is the outermost loop). Each
// counter is incremented on every entry into the body of its loop and never
// wraps when an inner loop is re-entered, so two operations that share loop
// depth k can be ordered by comparing element k alone. The 32-bit schedule
// width follows the paper; the address and data widths, the maximum loop depth
// and the pending-buffer depth are this design's own choices.
//
// An AGU that has no more requests sends one last request whose schedule
// elements are all ones (the sentinel).
package du_pkg;

  localparam int unsigned SCHED_W    = 32;  // schedule counter width (paper: 32-bit registers)
  localparam int unsigned ADDR_W     = 32;  // word address width (assumed)
  localparam int unsigned DATA_W     = 32;  // value width (assumed)
  localparam int unsigned MAX_DEPTH  = 4;   // deepest loop nest supported (assumed)
  localparam int unsigned PEND_DEPTH = 16;  // pending-buffer entries: one 512-bit burst of 32-bit words (assumed)
  localparam int unsigned TAG_W      = $clog2(PEND_DEPTH);

  typedef logic [SCHED_W-1:0]          sched_elem_t;
  typedef sched_elem_t [MAX_DEPTH-1:0] schedule_t;   // [d-1] = loop depth d
  typedef logic [MAX_DEPTH-1:0]        lastiter_t;   // [d-1] = last iteration of depth d
  typedef logic [ADDR_W-1:0]           addr_t;
  typedef logic [DATA_W-1:0]           data_t;
  typedef logic [TAG_W-1:0]            tag_t;

  localparam sched_elem_t SENTINEL = '1;

  // AGU -> DU request of one memory operation.
  typedef struct packed {
    addr_t     addr;
    schedule_t sched;
    lastiter_t last_iter;
    logic      no_dep;     // NoDependence hint of an intra-loop RAW pair (loads only)
  } mem_req_t;

  // Progress of an operation: its most recent ACK, or for store-to-load
  // forwarding its next request (the "frontier").
  typedef struct packed {
    addr_t     addr;
    schedule_t sched;
    lastiter_t last_iter;
  } progress_t;

  // CU -> DU store value with the speculation valid bit.
  typedef struct packed {
    data_t data;
    logic  valid;          // 0: mis-speculated store, never committed
  } st_val_t;

  // DU port -> memory (coalescing LSU / DRAM controller) and back.
  typedef struct packed {
    logic  we;
    addr_t addr;
    data_t wdata;
    tag_t  tag;
  } dram_req_t;

  typedef struct packed {
    tag_t  tag;
    data_t rdata;          // read data for loads, ignored for write ACKs
  } dram_resp_t;

  // Compile-time configuration of one hazard pair: destination a checks
  // against source b.
  typedef struct packed {
    logic      en;         // pair is checked (not pruned)
    logic [2:0] k;         // innermost shared loop depth, 0 = no shared loop
    logic      a_first;    // a precedes b in topological program order
    logic [2:0] l;         // deepest non-monotonic loop depth of b with l <= k, 0 = none
    lastiter_t li_mask;    // b depths in (k, m) that are non-monotonic: AND-reduced lastIter bits
    logic      fwd;        // RAW with store-to-load forwarding: compare with b's frontier
    logic      nodep;      // intra-loop RAW pair: NoDependence term enabled
  } pair_cfg_t;

  localparam progress_t PROG_SENTINEL = '1;

  function automatic logic is_sentinel(input schedule_t s);
    return &s;
  endfunction

  function automatic progress_t req_progress(input mem_req_t r);
    progress_t p;
    p.addr      = r.addr;
    p.sched     = r.sched;
    p.last_iter = r.last_iter;
    return p;
  endfunction

endpackage
