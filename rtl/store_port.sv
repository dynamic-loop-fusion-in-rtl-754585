// store_port: one store port of the Data Unit (one program store operation).
//
// The port holds the REQ registers (the next store request from the AGU) and
// the ACK registers (address, schedule and lastIter of the most recent store
// that left the pending buffer). The next request moves into the pending
// buffer once (1) its value has arrived from the CU, (2) every hazard check of
// this store passes (hz_safe, computed in the Data Unit from the other ports'
// registers), and (3) the buffer has room. A valid value is written to memory.
// An invalid value (mis-speculated store) never reaches memory; it still takes
// a pending entry and, at the head, updates the ACK registers, so that the
// time and address range it covers count as done.
//
// Other ports see this store through: ack (for WAW/WAR checks and for RAW
// checks without forwarding), frontier (for RAW checks with forwarding: the
// REQ registers when they hold a request, otherwise the last request that
// moved into the pending buffer), req_valid/req.sched and no_pending (for the
// second line of the program-order check), and the associative search of the
// pending buffer (youngest valid entry, for store-to-load forwarding).
// When the sentinel request has arrived and the buffer has drained, the ACK
// registers are set to all ones, so no later check waits on this store.
//
// The behaviour follows the paper; the single-cycle check-and-move (the paper
// spreads it over several pipeline stages), the ACK at pop from the head and
// the sentinel ACK value are this design's choices. Reset clears the ACK
// registers and the frontier to zero, meaning "nothing done yet".
module store_port
  import du_pkg::*;
#(
  parameter int unsigned NUM_SEARCH = 1,
  parameter int unsigned PEND       = PEND_DEPTH
) (
  input  logic clk,
  input  logic rst_n,
  // AGU request channel
  input  logic      agu_valid,
  output logic      agu_ready,
  input  mem_req_t  agu_req,
  // CU store value channel
  input  logic      val_valid,
  output logic      val_ready,
  input  st_val_t   val,
  // hazard checks of this port, all pairs ANDed
  input  logic      hz_safe,
  // state seen by the hazard checks
  output logic      req_valid,     // REQ registers hold a request (sentinel included)
  output mem_req_t  req,
  output progress_t ack,
  output progress_t frontier,
  output logic      no_pending,
  output logic      finished,      // sentinel seen and buffer drained
  // forwarding search
  input  addr_t [NUM_SEARCH-1:0] search_addr,
  output logic  [NUM_SEARCH-1:0] search_hit,
  output data_t [NUM_SEARCH-1:0] search_data,
  // memory side
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dram_req_t  mem_req,
  input  logic       mem_resp_valid,
  input  dram_resp_t mem_resp,
  // events
  output logic      ev_stall,      // request and value present, blocked by a hazard check
  output logic      ev_invalid     // a mis-speculated store moved into the pending buffer
);
  logic      req_q_valid;
  mem_req_t  req_q;
  progress_t last_moved;
  logic      pb_full, pb_empty, head_valid, head_commit;
  progress_t head_prog;
  data_t     head_data;

  wire req_is_sent = req_q_valid && is_sentinel(req_q.sched);
  wire move        = req_q_valid && !req_is_sent && val_valid && hz_safe && !pb_full;

  assign agu_ready  = !req_q_valid || move;
  assign val_ready  = move;
  assign req_valid  = req_q_valid;
  assign req        = req_q;
  assign no_pending = pb_empty;
  assign finished   = req_is_sent && pb_empty;
  assign frontier   = req_q_valid ? req_progress(req_q) : last_moved;
  assign ev_stall   = req_q_valid && !req_is_sent && val_valid && !hz_safe;
  assign ev_invalid = move && !val.valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_q_valid <= 1'b0;
      req_q       <= '0;
      last_moved  <= '0;
      ack         <= '0;
    end else begin
      if (agu_valid && agu_ready) begin
        req_q_valid <= 1'b1;
        req_q       <= agu_req;
      end else if (move) begin
        req_q_valid <= 1'b0;
      end
      if (move) last_moved <= req_progress(req_q);
      if (head_valid)    ack <= head_prog;
      else if (finished) ack <= PROG_SENTINEL;
    end
  end

  pending_buffer #(
    .DEPTH(PEND), .NUM_SEARCH(NUM_SEARCH), .RESP_DATA(1'b0)
  ) u_pb (
    .clk, .rst_n,
    .push(move), .push_prog(req_progress(req_q)), .push_data(val.data),
    .push_commit(val.valid), .push_done(1'b0), .push_we(1'b1),
    .full(pb_full), .empty(pb_empty),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp,
    .head_valid, .head_prog, .head_data, .head_commit, .head_pop(head_valid),
    .search_addr, .search_hit, .search_data
  );

  // head_data and head_commit are not needed by a store port's ACK barrier.
  logic unused_head;
  assign unused_head = ^{head_data, head_commit};

endmodule
