// dlf_cfg_pkg: hazard-pair configuration of the default top level, the
// two-PE loop nest that the paper uses to introduce its schedule:
//
//   for (i = 0; i < N; ++i)               // depth 1, shared by both PEs
//     for (j = 0; j < J; ++j) ld0; st0;   // PE 0, depth 2
//     for (k = 0; k < K; ++k) ld1;        // PE 1, depth 2
//
// ld0 and st0 access the same address (a read-modify-write A[f(i,j)]), ld1
// reads A[g(i,k)]. The outer i-loop of every access is treated as
// non-monotonic (the conservative choice, valid for any addresses that are
// non-decreasing in the inner loop), so l = 1 in every pair. Pairs:
//   RAW ld0 <- st0 : intra-loop, shared depth 2, ld0 precedes st0, forwarding, NoDependence
//   RAW ld1 <- st0 : across loops, shared depth 1, st0 precedes ld1, forwarding
//   WAR st0 <- ld1 : shared depth 1, st0 precedes ld1
//   WAR st0 <- ld0 : pruned, the value stored depends on the value loaded
// The loop nest is the paper's; addresses, pair pruning and the conservative
// monotonicity marking are this design's choices for its example program.
package dlf_cfg_pkg;
  import du_pkg::*;

  localparam pair_cfg_t RAW_LD0_ST0 = '{en: 1'b1, k: 3'd2, a_first: 1'b1, l: 3'd1,
                                         li_mask: '0, fwd: 1'b1, nodep: 1'b1};
  localparam pair_cfg_t RAW_LD1_ST0 = '{en: 1'b1, k: 3'd1, a_first: 1'b0, l: 3'd1,
                                         li_mask: '0, fwd: 1'b1, nodep: 1'b0};
  localparam pair_cfg_t WAR_ST0_LD0 = '{en: 1'b0, k: 3'd2, a_first: 1'b0, l: 3'd1,
                                         li_mask: '0, fwd: 1'b0, nodep: 1'b0};
  localparam pair_cfg_t WAR_ST0_LD1 = '{en: 1'b1, k: 3'd1, a_first: 1'b1, l: 3'd1,
                                         li_mask: '0, fwd: 1'b0, nodep: 1'b0};
endpackage
