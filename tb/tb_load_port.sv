// tb_load_port: a stream of load requests with a random hazard verdict, a
// random forwarding hit and a memory that answers reads out of order. Checks:
// nothing is accepted while a hazard check fails; a forwarded load makes no
// memory request and returns the forwarded value; other loads read their own
// address; values reach the CU in request order even when memory answers out
// of order; the ACK registers follow the values handed to the CU; after the
// sentinel the ACK becomes all ones. With a memory that always answers after
// one cycle and a CU that is always ready, back-to-back loads run at one per
// cycle.
module tb_load_port;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned N = 300;

  logic agu_valid, agu_ready, val_valid, val_ready, hz_safe, fwd_hit;
  mem_req_t agu_req;
  data_t val, fwd_data;
  logic req_valid, no_pending, finished;
  mem_req_t req;
  progress_t ack;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  dram_req_t mem_req;
  dram_resp_t mem_resp;
  logic ev_stall, ev_fwd;

  load_port #(.PEND(8)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned n_req, n_out, n_stall, n_fwd, n_mem;
  data_t expq [$];
  typedef struct { tag_t tag; addr_t a; } out_t;
  out_t outst [$];
  logic random_mode;
  int unsigned cyc = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t mem_val(input addr_t a);
    return data_t'(a * 13 + 7);
  endfunction

  always_comb begin
    agu_valid = (n_req <= N + 1);
    agu_req = '0;
    if (n_req <= N) begin
      agu_req.addr = addr_t'(n_req * 3);
      agu_req.sched[0] = sched_elem_t'(n_req);
    end else begin
      agu_req.addr = '1; agu_req.sched = '1; agu_req.last_iter = '1;
    end
  end

  always @(negedge clk) begin
    hz_safe       = random_mode ? (($urandom % 3) != 0) : 1'b1;
    fwd_hit       = random_mode ? (($urandom % 4) == 0) : 1'b0;
    fwd_data      = data_t'($urandom);
    mem_req_ready = random_mode ? (($urandom % 4) != 0) : 1'b1;
    val_ready     = random_mode ? (($urandom % 4) != 0) : 1'b1;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      n_req <= 1; n_out <= 0; n_stall <= 0; n_fwd <= 0; n_mem <= 0; mem_resp_valid <= 1'b0;
    end else begin
      if (agu_valid && agu_ready) n_req <= n_req + 1;
      if (dut.accept) begin
        checks++;
        if (!hz_safe) begin failures++; $display("ERROR: load accepted while a hazard check failed"); end
        expq.push_back(fwd_hit ? fwd_data : mem_val(req.addr));
      end
      if (mem_req_valid && mem_req_ready) begin
        out_t o;
        o.tag = mem_req.tag; o.a = mem_req.addr;
        checks++;
        if (mem_req.we) begin failures++; $display("ERROR: load port wrote memory"); end
        outst.push_back(o);
        n_mem <= n_mem + 1;
      end
      mem_resp_valid <= 1'b0;
      if (outst.size() != 0 && (!random_mode || ($urandom % 2))) begin
        int unsigned pick;
        pick = random_mode ? ($urandom % outst.size()) : 0;
        mem_resp_valid <= 1'b1;
        mem_resp.tag   <= outst[pick].tag;
        mem_resp.rdata <= mem_val(outst[pick].a);
        outst.delete(pick);
      end
      if (val_valid && val_ready) begin
        checks++;
        if (expq.size() == 0 || val !== expq[0]) begin
          failures++; $display("ERROR: load value %0d: got %0d", n_out, val);
        end
        if (expq.size() != 0) void'(expq.pop_front());
        n_out <= n_out + 1;
      end
      if (ev_stall) n_stall <= n_stall + 1;
      if (ev_fwd) n_fwd <= n_fwd + 1;
    end
  end

  // ACK follows the values handed out
  always @(negedge clk) if (rst_n) begin
    #1;
    if (ack.sched != '1) begin
      checks++;
      if (int'(ack.sched[0]) != n_out) begin failures++; $display("ERROR: ACK %0d after %0d values", ack.sched[0], n_out); end
    end
  end

  initial begin
    int unsigned t0;
    random_mode = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // throughput with an ideal memory and CU
    t0 = cyc;
    while (!finished) @(posedge clk);
    checks++;
    if (cyc - t0 > N + 8) begin failures++; $display("ERROR: %0d loads took %0d cycles", N, cyc - t0); end
    // random
    rst_n = 0; random_mode = 1'b1;
    @(negedge clk); rst_n = 1;
    while (!finished) @(posedge clk);
    @(negedge clk); #2;
    checks += 4;
    if (ack != PROG_SENTINEL) begin failures++; $display("ERROR: ACK not sentinel at the end"); end
    if (n_out != N) begin failures++; $display("ERROR: %0d values", n_out); end
    if (n_stall == 0 || n_fwd == 0) begin failures++; $display("ERROR: no stall or no forwarding"); end
    if (n_mem + n_fwd != N) begin failures++; $display("ERROR: %0d reads + %0d forwarded", n_mem, n_fwd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
