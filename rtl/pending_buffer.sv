// pending_buffer: the per-port buffer of requests that have passed their
// hazard checks but are not yet ACKed, and the ACK barrier in front of the
// port's ACK registers.
//
// Entries (address, schedule, lastIter, value, valid bit) are held in
// registers and kept in program order as a circular buffer with three
// pointers:
//   tail  - next free entry (push),
//   issue - next entry to send to memory (entries that need no memory access
//           are skipped, one per cycle),
//   head  - oldest entry; it leaves the buffer once it is complete.
// An entry is complete when memory has ACKed it (the response carries the
// entry index as its tag), when it was pushed complete (a load served by
// store-to-load forwarding) or when it is an invalid (mis-speculated) store,
// which never reaches memory. Completing out of order is allowed; leaving the
// buffer is in order, so the ACK registers fed from the head only ever move
// forward. The associative search returns the youngest valid entry whose
// address matches a key, as store-to-load forwarding needs.
//
// Following the paper: register implementation, associative youngest-match
// search, invalid stores skipping memory and completing at the head (its
// pending-buffer figure). This design's choices: depth (one 512-bit burst of
// 32-bit words), the tag-based response interface, one push, one issue and
// one pop per cycle. DEPTH must be a power of two.
//
// Timing: a push is visible to the search in the next cycle. The head entry
// is offered (head_valid) in the cycle after it completes.
module pending_buffer
  import du_pkg::*;
#(
  parameter int unsigned DEPTH      = PEND_DEPTH,
  parameter int unsigned NUM_SEARCH = 1,
  parameter bit          RESP_DATA  = 1'b1   // 1: responses carry read data (load port)
) (
  input  logic clk,
  input  logic rst_n,
  // push from the hazard-detection stage
  input  logic      push,
  input  progress_t push_prog,
  input  data_t     push_data,
  input  logic      push_commit,  // 1: entry is a real memory access (0: invalid store)
  input  logic      push_done,    // entry is complete already (forwarded load)
  input  logic      push_we,      // memory request is a write
  output logic      full,
  output logic      empty,
  // memory side
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output dram_req_t  mem_req,
  input  logic       mem_resp_valid,
  input  dram_resp_t mem_resp,
  // head / ACK barrier
  output logic      head_valid,
  output progress_t head_prog,
  output data_t     head_data,
  output logic      head_commit,
  input  logic      head_pop,
  // associative search
  input  addr_t [NUM_SEARCH-1:0] search_addr,
  output logic  [NUM_SEARCH-1:0] search_hit,
  output data_t [NUM_SEARCH-1:0] search_data
);
  localparam int unsigned PW = $clog2(DEPTH);

  progress_t        e_prog   [DEPTH];
  data_t            e_data   [DEPTH];
  logic [DEPTH-1:0] e_commit;
  logic [DEPTH-1:0] e_done;
  logic [DEPTH-1:0] e_we;

  logic [PW:0] head, issue, tail;  // extra bit tells full from empty

  wire [PW-1:0] head_i  = head[PW-1:0];
  wire [PW-1:0] issue_i = issue[PW-1:0];
  wire [PW-1:0] tail_i  = tail[PW-1:0];

  assign empty = (head == tail);
  assign full  = (head[PW] != tail[PW]) && (head_i == tail_i);

  // memory issue
  wire issue_pending = (issue != tail);
  wire issue_needs   = e_commit[issue_i] && !e_done[issue_i];
  assign mem_req_valid = issue_pending && issue_needs;
  always_comb begin
    mem_req.we    = e_we[issue_i];
    mem_req.addr  = e_prog[issue_i].addr;
    mem_req.wdata = e_data[issue_i];
    mem_req.tag   = tag_t'(issue_i);
  end
  wire issue_adv = issue_pending && (!issue_needs || mem_req_ready);

  // head
  assign head_valid  = !empty && e_done[head_i];
  assign head_prog   = e_prog[head_i];
  assign head_data   = e_data[head_i];
  assign head_commit = e_commit[head_i];

  // associative search: scan from oldest to youngest, last match wins
  always_comb begin
    for (int s = 0; s < NUM_SEARCH; s++) begin
      search_hit[s]  = 1'b0;
      search_data[s] = '0;
      for (int i = 0; i < DEPTH; i++) begin
        logic [PW:0]   pos;
        logic [PW-1:0] ei;
        pos = head + (PW+1)'(i);
        ei  = pos[PW-1:0];
        if (((PW+1)'(i) < (tail - head)) && e_commit[ei] && (e_prog[ei].addr == search_addr[s])) begin
          search_hit[s]  = 1'b1;
          search_data[s] = e_data[ei];
        end
      end
    end
  end

  wire do_push = push && !full;
  wire do_pop  = head_pop && head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head     <= '0;
      issue    <= '0;
      tail     <= '0;
      e_done   <= '0;
      e_commit <= '0;
      e_we     <= '0;
    end else begin
      if (do_push) begin
        e_commit[tail_i] <= push_commit;
        e_done[tail_i]   <= push_done || !push_commit;
        e_we[tail_i]     <= push_we;
        tail             <= tail + 1'b1;
      end
      if (mem_resp_valid) e_done[mem_resp.tag[PW-1:0]] <= 1'b1;
      if (issue_adv) issue <= issue + 1'b1;
      if (do_pop)    head  <= head + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) begin
      e_prog[tail_i] <= push_prog;
      e_data[tail_i] <= push_data;
    end
    if (mem_resp_valid && RESP_DATA) e_data[mem_resp.tag[PW-1:0]] <= mem_resp.rdata;
  end

  // A response may only complete an entry that was issued and is still pending.
  property p_resp_pending;
    @(posedge clk) disable iff (!rst_n)
      mem_resp_valid |-> !e_done[mem_resp.tag[PW-1:0]];
  endproperty
  assert property (p_resp_pending);

  property p_no_push_when_full;
    @(posedge clk) disable iff (!rst_n) push |-> !full;
  endproperty
  assert property (p_no_push_when_full);

endmodule
