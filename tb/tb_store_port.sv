// tb_store_port: a stream of store requests (depth-1 schedules 1, 2, ...,
// non-decreasing addresses) with values of random speculation validity, a
// random hazard verdict and a memory that ACKs writes after random delays.
// Checks: nothing moves while a hazard check fails; exactly the valid stores
// are written, in order, with their values; invalid stores reach no memory
// but still advance the ACK registers; the ACK registers only advance to a
// store once its write has been ACKed; the forwarding search returns the
// youngest valid store still in the buffer; the frontier is the REQ registers
// or the last moved store; after the sentinel the ACK becomes all ones.
module tb_store_port;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned N = 300;

  logic agu_valid, agu_ready, val_valid, val_ready, hz_safe;
  mem_req_t agu_req;
  st_val_t val;
  logic req_valid, no_pending, finished;
  mem_req_t req;
  progress_t ack, frontier;
  addr_t [0:0] search_addr;
  logic [0:0] search_hit;
  data_t [0:0] search_data;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  dram_req_t mem_req;
  dram_resp_t mem_resp;
  logic ev_stall, ev_invalid;

  store_port #(.NUM_SEARCH(1), .PEND(8)) dut (.*);

  int checks = 0, failures = 0;
  addr_t   a_of [N+1];
  st_val_t v_of [N+1];
  int unsigned n_req, n_val, n_moved, n_writes, n_stall, n_inv;
  logic [N:0] acked;                 // write ACK seen (or invalid)
  typedef struct { int unsigned due; dram_req_t r; } pend_t;
  pend_t memq [$];
  int unsigned cyc = 0;
  int unsigned exp_writes [$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr_t a = 0;
    for (int i = 1; i <= N; i++) begin
      a = a + addr_t'($urandom % 2);
      a_of[i] = a;
      v_of[i].data  = data_t'($urandom);
      v_of[i].valid = ($urandom % 4) != 0;
      if (v_of[i].valid) exp_writes.push_back(i);
    end
  end

  always_comb begin
    agu_valid = (n_req <= N + 1);
    agu_req = '0;
    if (n_req <= N) begin
      agu_req.addr = a_of[n_req];
      agu_req.sched[0] = sched_elem_t'(n_req);
      agu_req.last_iter = '0;
    end else begin
      agu_req.addr = '1; agu_req.sched = '1; agu_req.last_iter = '1;
    end
    if (n_req > N + 1) agu_valid = 1'b0;
    val_valid = (n_val < N);
    val = v_of[n_val + 1];
  end

  always @(negedge clk) begin
    hz_safe = ($urandom % 3) != 0;
    mem_req_ready = ($urandom % 4) != 0;
    search_addr[0] = a_of[1 + $urandom % N];
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      n_req <= 1; n_val <= 0; n_moved <= 0; n_writes <= 0; n_stall <= 0; n_inv <= 0;
      acked <= '0; mem_resp_valid <= 0;
    end else begin
      // model checks before the edge's updates
      if (val_valid && val_ready) begin
        checks++;
        if (!hz_safe) begin failures++; $display("ERROR: store moved while a hazard check failed"); end
        if (!v_of[n_val + 1].valid) acked[n_val + 1] <= 1'b1;
        n_val <= n_val + 1;
      end
      if (agu_valid && agu_ready) n_req <= n_req + 1;
      if (mem_req_valid && mem_req_ready) begin
        pend_t p;
        int unsigned idx;
        checks++;
        idx = (exp_writes.size() != 0) ? exp_writes.pop_front() : 0;
        if (idx == 0 || !mem_req.we || mem_req.addr != a_of[idx] || mem_req.wdata != v_of[idx].data) begin
          failures++; $display("ERROR: write %0d addr %0d data %0d unexpected", n_writes, mem_req.addr, mem_req.wdata);
        end
        p.due = cyc + 1 + $urandom % 12;
        if (memq.size() != 0 && p.due <= memq[memq.size()-1].due) p.due = memq[memq.size()-1].due + 1;
        p.r = mem_req;
        p.r.wdata = data_t'(idx);   // remember the store index
        memq.push_back(p);
        n_writes <= n_writes + 1;
      end
      mem_resp_valid <= 1'b0;
      if (memq.size() != 0 && memq[0].due <= cyc) begin
        pend_t p;
        p = memq.pop_front();
        mem_resp_valid <= 1'b1;
        mem_resp.tag   <= p.r.tag;
        mem_resp.rdata <= '0;
        acked[int'(p.r.wdata)] <= 1'b1;
      end
      if (ev_stall) n_stall <= n_stall + 1;
      if (ev_invalid) n_inv <= n_inv + 1;
    end
  end

  // ACK, frontier and search, checked mid-cycle on settled values
  always @(negedge clk) if (rst_n) begin
    int unsigned s;
    #1;
    s = int'(ack.sched[0]);
    if (ack.sched != '1 && s != 0) begin
      checks++;
      if (!acked[s] || ack.addr != a_of[s]) begin
        failures++; $display("ERROR: ACK at store %0d before its write was ACKed", s);
      end
    end
    // search: youngest valid store that moved and has not left the buffer
    begin
      logic h;
      data_t d;
      int unsigned lo;
      h = 1'b0; d = '0;
      lo = (ack.sched == '1) ? N + 1 : s + 1;
      for (int unsigned i = lo; i <= n_val; i++)
        if (v_of[i].valid && a_of[i] == search_addr[0]) begin h = 1'b1; d = v_of[i].data; end
      checks++;
      if (search_hit[0] !== h || (h && search_data[0] !== d)) begin
        failures++; $display("ERROR: search addr %0d hit %0b expected %0b", search_addr[0], search_hit[0], h);
      end
    end
    // frontier
    checks++;
    if (req_valid ? (frontier.sched != req.sched) : (n_val != 0 && frontier.sched[0] != sched_elem_t'(n_val))) begin
      failures++; $display("ERROR: frontier");
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!finished) @(posedge clk);
    @(negedge clk); #2;
    checks += 4;
    if (ack != PROG_SENTINEL) begin failures++; $display("ERROR: ACK not sentinel at the end"); end
    if (exp_writes.size() != 0) begin failures++; $display("ERROR: %0d writes missing", exp_writes.size()); end
    if (n_stall == 0) begin failures++; $display("ERROR: no stall"); end
    if (n_inv == 0) begin failures++; $display("ERROR: no invalid store"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
