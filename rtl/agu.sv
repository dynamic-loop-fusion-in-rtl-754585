// agu: address generation unit of one loop processing element (PE).
//
// The AGU walks a perfect loop nest of DEPTH loops (trip counts given at run
// time) and, for every innermost iteration, sends one request per memory
// operation of its PE to the Data Unit. All operations share one schedule
// tuple, as in the paper: the tuple starts at 0 and element d is incremented
// on every entry into the body of loop depth d, so the first iteration carries
// schedule {1, 1, ...}. Each request also carries lastIter bits (bit d-1 is set
// on the last iteration of depth d; the loop predicate is known one iteration
// ahead because the trip counts are counters) and, for loads in an intra-loop
// RAW pair, the NoDependence bit: "load address > the most recent store address
// sent by this AGU" (1 before the first store). After the last iteration every
// channel receives a sentinel request whose schedule elements are all ones.
//
// Addresses are affine in the loop indices, addr = base + sum(idx[d]*stride[d]),
// with base and strides set at run time. The paper's AGUs run whatever address
// code the compiler keeps (including data-dependent addresses); the affine
// generator is this design's stand-in for that program-specific code.
// NoDependence assumes the load precedes the store in the loop body, as in the
// paper's examples.
//
// Timing: start is sampled in IDLE. Every operation has its own valid/ready
// channel; the nest advances once every channel has taken the current
// iteration's request, at most one iteration per cycle. done rises after all
// sentinels have been taken.
module agu
  import du_pkg::*;
#(
  parameter int unsigned DEPTH       = 2,   // loop nest depth of this PE (1..MAX_DEPTH)
  parameter int unsigned NUM_OPS     = 1,   // memory operations of this PE
  parameter int          NODEP_STORE = -1,  // operation index of the store of an intra-loop RAW pair, -1 = none
  parameter logic [NUM_OPS-1:0] NODEP_LOADS = '0  // operations that get the NoDependence bit
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [DEPTH-1:0][31:0]                trip,    // trip count of each depth (>= 1), [0] = outermost
  input  addr_t [NUM_OPS-1:0]                   base,
  input  logic [NUM_OPS-1:0][DEPTH-1:0][31:0]   stride,
  output logic     [NUM_OPS-1:0] req_valid,
  input  logic     [NUM_OPS-1:0] req_ready,
  output mem_req_t [NUM_OPS-1:0] req,
  output logic busy,
  output logic done
);
  localparam int unsigned NS = (NODEP_STORE < 0) ? 0 : NODEP_STORE;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_END, S_DONE} state_t;

  state_t                         state;
  logic [DEPTH-1:0][31:0]         idx;
  schedule_t                      sched;
  logic [NUM_OPS-1:0]             sent;       // channel already took this iteration's request
  addr_t                          last_st_addr;
  logic                           st_seen;

  addr_t     [NUM_OPS-1:0] addr;
  lastiter_t               last_iter;
  logic                    all_taken;

  always_comb begin
    for (int o = 0; o < NUM_OPS; o++) begin
      addr[o] = base[o];
      for (int d = 0; d < DEPTH; d++) addr[o] = addr[o] + addr_t'(idx[d] * stride[o][d]);
    end
    last_iter = '1;
    for (int d = 0; d < DEPTH; d++) last_iter[d] = (idx[d] == trip[d] - 32'd1);
  end

  always_comb begin
    for (int o = 0; o < NUM_OPS; o++) begin
      req_valid[o] = ((state == S_RUN) || (state == S_END)) && !sent[o];
      if (state == S_END) begin
        req[o].addr      = '1;
        req[o].sched     = '1;
        req[o].last_iter = '1;
        req[o].no_dep    = 1'b1;
      end else begin
        req[o].addr      = addr[o];
        req[o].sched     = sched;
        req[o].last_iter = last_iter;
        req[o].no_dep    = NODEP_LOADS[o] && (!st_seen || (addr[o] > last_st_addr));
      end
    end
    all_taken = &(sent | (req_valid & req_ready));
  end

  assign busy = (state == S_RUN) || (state == S_END);
  assign done = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      idx          <= '0;
      sched        <= '0;
      sent         <= '0;
      last_st_addr <= '0;
      st_seen      <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          idx     <= '0;
          sent    <= '0;
          st_seen <= 1'b0;
          sched   <= '0;
          for (int d = 0; d < DEPTH; d++) sched[d] <= sched_elem_t'(1);
        end
        S_RUN: begin
          if (all_taken) begin
            logic carry;
            sent  <= '0;
            carry = 1'b1;
            if (NODEP_STORE >= 0) begin
              last_st_addr <= addr[NS];
              st_seen      <= 1'b1;
            end
            for (int d = DEPTH-1; d >= 0; d--) begin
              if (carry) begin
                sched[d] <= sched[d] + 1'b1;
                if (idx[d] == trip[d] - 32'd1) idx[d] <= '0;
                else begin
                  idx[d] <= idx[d] + 32'd1;
                  carry = 1'b0;
                end
              end
            end
            if (carry) state <= S_END;
          end else begin
            sent <= sent | (req_valid & req_ready);
          end
        end
        S_END: begin
          if (all_taken) begin
            sent  <= '0;
            state <= S_DONE;
          end else begin
            sent <= sent | (req_valid & req_ready);
          end
        end
        S_DONE: ;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
