// load_port: one load port of the Data Unit (one program load operation).
//
// The port holds the REQ registers (the next load request from the AGU) and
// the ACK registers (the most recent load that has been served). The next
// request is accepted into the pending buffer once every RAW check of this
// load passes (hz_safe, from the Data Unit) and the buffer has room. If the
// Data Unit's search of a forwarding store's pending buffer hits (fwd_hit), the
// entry is complete at once with the forwarded value and makes no memory
// request; otherwise a read goes to memory. Values are returned to the CU in
// request order from the head of the buffer; popping the head updates the
// ACK registers. After the sentinel request, once the buffer is empty, the
// ACK registers are set to all ones.
//
// The behaviour follows the paper; returning values straight from the pending
// buffer and updating the ACK when the value leaves for the CU are this
// design's choices. Reset clears the ACK registers to zero.
module load_port
  import du_pkg::*;
#(
  parameter int unsigned PEND = PEND_DEPTH
) (
  input  logic clk,
  input  logic rst_n,
  // AGU request channel
  input  logic      agu_valid,
  output logic      agu_ready,
  input  mem_req_t  agu_req,
  // CU load value channel
  output logic      val_valid,
  input  logic      val_ready,
  output data_t     val,
  // hazard checks and forwarding, from the Data Unit
  input  logic      hz_safe,
  input  logic      fwd_hit,
  input  data_t     fwd_data,
  // state seen by the hazard checks
  output logic      req_valid,
  output mem_req_t  req,
  output progress_t ack,
  output logic      no_pending,
  output logic      finished,
  // memory side
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dram_req_t  mem_req,
  input  logic       mem_resp_valid,
  input  dram_resp_t mem_resp,
  // events
  output logic      ev_stall,      // request present, blocked by a hazard check
  output logic      ev_fwd         // request served from a store pending buffer
);
  logic      req_q_valid;
  mem_req_t  req_q;
  logic      pb_full, pb_empty, head_valid, head_commit;
  progress_t head_prog;
  logic      s_hit;
  data_t     s_data;

  wire req_is_sent = req_q_valid && is_sentinel(req_q.sched);
  wire accept      = req_q_valid && !req_is_sent && hz_safe && !pb_full;
  wire pop         = head_valid && val_ready;

  assign agu_ready  = !req_q_valid || accept;
  assign req_valid  = req_q_valid;
  assign req        = req_q;
  assign no_pending = pb_empty;
  assign finished   = req_is_sent && pb_empty;
  assign val_valid  = head_valid;
  assign ev_stall   = req_q_valid && !req_is_sent && !hz_safe;
  assign ev_fwd     = accept && fwd_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_q_valid <= 1'b0;
      req_q       <= '0;
      ack         <= '0;
    end else begin
      if (agu_valid && agu_ready) begin
        req_q_valid <= 1'b1;
        req_q       <= agu_req;
      end else if (accept) begin
        req_q_valid <= 1'b0;
      end
      if (pop)           ack <= head_prog;
      else if (finished) ack <= PROG_SENTINEL;
    end
  end

  pending_buffer #(
    .DEPTH(PEND), .NUM_SEARCH(1), .RESP_DATA(1'b1)
  ) u_pb (
    .clk, .rst_n,
    .push(accept), .push_prog(req_progress(req_q)), .push_data(fwd_data),
    .push_commit(1'b1), .push_done(fwd_hit), .push_we(1'b0),
    .full(pb_full), .empty(pb_empty),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp,
    .head_valid, .head_prog, .head_data(val), .head_commit, .head_pop(pop),
    .search_addr(addr_t'(0)), .search_hit(s_hit), .search_data(s_data)
  );

  // A load's own buffer is never searched; its search port is tied off.
  logic unused_pb;
  assign unused_pb = ^{head_commit, s_hit, s_data};

endmodule
