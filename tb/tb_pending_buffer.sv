// tb_pending_buffer: random pushes of memory, pre-completed and invalid
// entries into an 8-entry buffer, a memory side that accepts with random
// back-pressure and answers out of order, and random head pops. Checked
// against a model: the order and content of memory requests (invalid and
// pre-completed entries never reach memory, tags are entry indices), in-order
// head release only of complete entries with the right data, the full flag,
// and the associative search (youngest valid matching entry).
module tb_pending_buffer;
  import du_pkg::*;
  localparam int unsigned D = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic push, push_commit, push_done, push_we, full, empty;
  progress_t push_prog;
  data_t push_data;
  logic mem_req_valid, mem_req_ready, mem_resp_valid;
  dram_req_t mem_req;
  dram_resp_t mem_resp;
  logic head_valid, head_commit, head_pop;
  progress_t head_prog;
  data_t head_data;
  addr_t [0:0] search_addr;
  logic [0:0] search_hit;
  data_t [0:0] search_data;

  pending_buffer #(.DEPTH(D), .NUM_SEARCH(1), .RESP_DATA(1'b1)) dut (.*);

  typedef struct { addr_t a; data_t d; logic commit; logic done; logic mem; int unsigned tag; } ent_t;
  ent_t model [$];      // entries in the buffer, oldest first
  ent_t issueq [$];     // entries still to be issued, in order
  int unsigned outst [$];  // tags issued, waiting for a response
  int checks = 0, failures = 0;
  int unsigned tail_tag = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t resp_val(input int unsigned tag, input addr_t a);
    return data_t'(a * 5 + 1000);
  endfunction

  initial begin
    push = 0; mem_req_ready = 0; mem_resp_valid = 0; head_pop = 0; search_addr = '0;
    push_prog = '0; push_data = '0; push_commit = 0; push_done = 0; push_we = 0; mem_resp = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      // stimulus for this cycle
      push          = ($urandom % 2) && !full;
      push_prog     = '0;
      push_prog.addr = addr_t'($urandom % 6);
      push_data     = data_t'($urandom % 1000);
      push_commit   = ($urandom % 5) != 0;
      push_done     = push_commit && (($urandom % 4) == 0);
      push_we       = 1'b0;
      mem_req_ready = ($urandom % 3) != 0;
      head_pop      = ($urandom % 3) != 0;
      search_addr[0] = addr_t'($urandom % 6);
      mem_resp_valid = 1'b0;
      if (outst.size() != 0 && ($urandom % 2)) begin
        int unsigned pick, tg;
        pick = $urandom % outst.size();
        tg = outst[pick];
        outst.delete(pick);
        mem_resp_valid = 1'b1;
        mem_resp.tag   = tag_t'(tg);
        foreach (model[i]) if (model[i].tag == tg && model[i].mem && !model[i].done) begin
          mem_resp.rdata = resp_val(tg, model[i].a);
        end
      end
      #1;
      // search
      begin
        logic h;
        data_t dv;
        h = 1'b0;
        dv = '0;
        foreach (model[i]) if (model[i].commit && model[i].a == search_addr[0]) begin h = 1'b1; dv = model[i].d; end
        checks++;
        if (search_hit[0] !== h || (h && search_data[0] !== dv)) begin
          failures++; $display("ERROR: search %0d hit %0b/%0d expected %0b/%0d", search_addr[0], search_hit[0], search_data[0], h, dv);
        end
      end
      // full / empty
      checks++;
      if (full !== (model.size() == D) || empty !== (model.size() == 0)) begin
        failures++; $display("ERROR: full/empty flags with %0d entries", model.size());
      end
      // memory issue
      while (issueq.size() != 0 && !issueq[0].mem) void'(issueq.pop_front());
      if (mem_req_valid && mem_req_ready) begin
        checks++;
        if (issueq.size() == 0 || mem_req.tag != tag_t'(issueq[0].tag) || mem_req.addr != issueq[0].a || mem_req.we) begin
          failures++; $display("ERROR: unexpected memory request tag %0d addr %0d", mem_req.tag, mem_req.addr);
        end else begin
          outst.push_back(issueq[0].tag);
          void'(issueq.pop_front());
        end
      end
      // head
      checks++;
      if (head_valid !== (model.size() != 0 && model[0].done)) begin
        failures++; $display("ERROR: head_valid %0b", head_valid);
      end
      if (head_valid && model.size() != 0) begin
        checks++;
        if (head_prog.addr !== model[0].a || head_data !== model[0].d || head_commit !== model[0].commit) begin
          failures++; $display("ERROR: head entry addr %0d data %0d", head_prog.addr, head_data);
        end
      end
      @(posedge clk);
      // update the model with what the buffer took at this edge
      if (head_pop && head_valid) void'(model.pop_front());
      if (mem_resp_valid) foreach (model[i]) if (model[i].tag == int'(mem_resp.tag) && model[i].mem && !model[i].done) begin
        model[i].done = 1'b1; model[i].d = mem_resp.rdata;
      end
      if (push) begin
        ent_t e;
        e.a = push_prog.addr; e.d = push_data; e.commit = push_commit;
        e.done = push_done || !push_commit; e.mem = push_commit && !push_done; e.tag = tail_tag;
        model.push_back(e);
        issueq.push_back(e);
        tail_tag = (tail_tag + 1) % D;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
