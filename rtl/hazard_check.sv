// hazard_check: the Hazard Safety Check of one dependency pair. Operation a
// (the destination, whose next request is being checked) is tested against
// operation b (the source), using b's most recent ACK, or b's next request
// when the pair is a RAW pair with store-to-load forwarding.
//
//   safe = ProgramOrder || (a.addr < b.addr && NoReset) || (NoDependence && NoReset)
//
// ProgramOrder (k > 0), with "op" = "<=" if a precedes b topologically, else "<":
//     a.sched[k] op b.ack.sched[k] || (a.sched[k] op b.req.sched[k] && b has no pending ACK)
// and for k = 0 it is the constant "a precedes b".
// NoReset = AND of b's lastIter bits selected by CFG.li_mask (non-monotonic
// depths below k) && (a.sched[l] == b.ack.sched[l] + delta) when b has a
// non-monotonic depth l <= k (the equality is dropped when l = 0).
// The NoDependence term is used only for intra-loop RAW pairs (CFG.nodep);
// the AGU computes the bit as "load address > most recent store address".
//
// Everything above follows the paper's equations except delta. The paper sets
// delta = 1 whenever a precedes b. This design uses delta = 1 only when in
// addition l = k, and delta = 0 when l < k. With l < k, a request of a in the
// next l-iteration comes after the b requests of that iteration's earlier
// k-iterations, and those may have reset the address. The reduced delta only
// makes fewer requests safe. The example program's ld0/st0 pair (k = 2,
// l = 1) reads stale data with the paper's delta.
//
// Purely combinational. The configuration is a compile-time parameter, as the
// compiler specialises each pair; the default is one pair of the example
// program of the top level. Besides safe, the module reports which term
// made the request safe; the DU counts those as events.
module hazard_check
  import du_pkg::*;
#(
  // Default: the cross-loop RAW pair of the example nest (ld1 after st0,
  // shared depth 1, forwarding).
  parameter pair_cfg_t CFG = '{en: 1'b1, k: 3'd1, a_first: 1'b0, l: 3'd1,
                              li_mask: '0, fwd: 1'b1, nodep: 1'b0}
) (
  input  mem_req_t  a_req,         // next request of a
  input  progress_t b_prog,        // ACK of b (or frontier of b when CFG.fwd)
  input  logic      b_req_valid,   // b's REQ register holds a request
  input  schedule_t b_req_sched,   // b's next request schedule
  input  logic      b_no_pending,  // b waits for no ACK
  output logic      safe,
  output logic      po_safe,
  output logic      addr_safe,
  output logic      nodep_safe
);
  localparam int unsigned K = int'(CFG.k);
  localparam int unsigned L = int'(CFG.l);
  localparam logic        DELTA = CFG.a_first && (L == K);
  localparam int unsigned KI = (K == 0) ? 0 : K - 1;  // element index of depth k
  localparam int unsigned LI = (L == 0) ? 0 : L - 1;  // element index of depth l

  function automatic logic sched_prec(input sched_elem_t x, input sched_elem_t y);
    return CFG.a_first ? (x <= y) : (x < y);
  endfunction

  logic li_check, reset_term, no_reset;

  always_comb begin
    // Program Order Safety Check
    if (K == 0) begin
      po_safe = CFG.a_first;
    end else begin
      po_safe = sched_prec(a_req.sched[KI], b_prog.sched[KI]) ||
                (sched_prec(a_req.sched[KI], b_req_sched[KI]) && b_req_valid && b_no_pending);
    end

    // No Address Reset Check
    li_check = &(b_prog.last_iter | ~CFG.li_mask);
    if (L == 0) reset_term = 1'b1;
    else        reset_term = (a_req.sched[LI] == b_prog.sched[LI] + sched_elem_t'(DELTA));
    no_reset = li_check && reset_term;

    addr_safe  = (a_req.addr < b_prog.addr) && no_reset;
    nodep_safe = CFG.nodep && a_req.no_dep && no_reset;

    safe = !CFG.en || po_safe || addr_safe || nodep_safe;
  end

endmodule
