// tb_hazard_check: the Hazard Safety Check of several pair configurations
// against a reference written directly from the check's equations, on random
// and on directed inputs (including the paper's worked schedule example: a
// store at {2,3} checked by a load of the same i-iteration).
module tb_hazard_check;
  import du_pkg::*;

  localparam int NC = 6;
  localparam pair_cfg_t C0 = '{en:1, k:0, a_first:0, l:0, li_mask:'0,       fwd:0, nodep:0}; // across loops, address only
  localparam pair_cfg_t C1 = '{en:1, k:0, a_first:1, l:0, li_mask:'0,       fwd:0, nodep:0}; // a first, always safe
  localparam pair_cfg_t C2 = '{en:1, k:1, a_first:0, l:0, li_mask:'0,       fwd:0, nodep:0}; // shared depth 1, "<"
  localparam pair_cfg_t C3 = '{en:1, k:2, a_first:1, l:1, li_mask:'0,       fwd:0, nodep:1}; // intra-loop RAW, l < k
  localparam pair_cfg_t C4 = '{en:1, k:2, a_first:0, l:1, li_mask:4'b0100, fwd:0, nodep:0}; // the paper's depth-4 example
  localparam pair_cfg_t C5 = '{en:1, k:1, a_first:1, l:1, li_mask:'0,       fwd:0, nodep:0}; // l = k, delta = 1
  localparam pair_cfg_t CFGS [NC] = '{C0, C1, C2, C3, C4, C5};

  mem_req_t  a_req;
  progress_t b_prog;
  logic      b_req_valid, b_no_pending;
  schedule_t b_req_sched;
  logic [NC-1:0] safe, po, ad, nd;

  for (genvar c = 0; c < NC; c++) begin : g
    hazard_check #(.CFG(CFGS[c])) u (.a_req, .b_prog, .b_req_valid, .b_req_sched, .b_no_pending,
                                     .safe(safe[c]), .po_safe(po[c]), .addr_safe(ad[c]), .nodep_safe(nd[c]));
  end

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic ref_safe(input pair_cfg_t c);
    logic p, nr, lic;
    int k = int'(c.k), l = int'(c.l);
    if (!c.en) return 1'b1;
    if (k == 0) p = c.a_first;
    else if (c.a_first)
      p = (a_req.sched[k-1] <= b_prog.sched[k-1]) ||
          ((a_req.sched[k-1] <= b_req_sched[k-1]) && b_req_valid && b_no_pending);
    else
      p = (a_req.sched[k-1] < b_prog.sched[k-1]) ||
          ((a_req.sched[k-1] < b_req_sched[k-1]) && b_req_valid && b_no_pending);
    lic = 1'b1;
    for (int d = 0; d < MAX_DEPTH; d++) if (c.li_mask[d]) lic = lic && b_prog.last_iter[d];
    nr = lic;
    if (l != 0) nr = nr && (a_req.sched[l-1] == b_prog.sched[l-1] + ((c.a_first && l == k) ? 1 : 0));
    return p || ((a_req.addr < b_prog.addr) && nr) || (c.nodep && a_req.no_dep && nr);
  endfunction

  task automatic check_all(input string what);
    #1;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (safe[c] !== ref_safe(CFGS[c])) begin
        failures++;
        $display("ERROR: %s cfg %0d safe=%0b expected %0b", what, c, safe[c], ref_safe(CFGS[c]));
      end
    end
  endtask

  function automatic sched_elem_t rnd_sched();
    return sched_elem_t'($urandom % 5);
  endfunction

  initial begin
    // The paper's example: st at i=1, j=0 has schedule {2,3}; a load of the
    // same j-iteration that precedes it (C3, "<=") is safe, one that follows
    // it (C2 at depth 1 would be "<") is not, by program order alone.
    a_req = '0; b_prog = '0; b_req_valid = 0; b_no_pending = 0; b_req_sched = '0;
    a_req.sched[0] = 2; a_req.sched[1] = 3; a_req.addr = 100;
    b_prog.sched[0] = 2; b_prog.sched[1] = 3; b_prog.addr = 10;
    check_all("paper example");
    checks += 2;
    if (!po[3]) begin failures++; $display("ERROR: ld0 <= st at equal schedules not safe"); end
    if (po[2])  begin failures++; $display("ERROR: strict order safe at equal schedules"); end
    // No Address Reset with l = k and delta = 1: next i-iteration is safe by address
    a_req.sched[0] = 3; a_req.addr = 5; b_prog.addr = 9;
    check_all("delta");
    checks++;
    if (!ad[5]) begin failures++; $display("ERROR: l = k address path with delta = 1"); end
    // lastIter gating of the depth-4 example (bit of depth 3)
    a_req.sched[0] = 2; b_prog.sched[0] = 2; a_req.sched[1] = 9; b_prog.sched[1] = 3;
    b_prog.last_iter = 4'b0000;
    check_all("lastIter off");
    checks++;
    if (ad[4]) begin failures++; $display("ERROR: address path ignored lastIter"); end
    b_prog.last_iter = 4'b0100;
    check_all("lastIter on");
    checks++;
    if (!ad[4]) begin failures++; $display("ERROR: address path with lastIter set"); end
    // random
    for (int n = 0; n < 20000; n++) begin
      for (int d = 0; d < MAX_DEPTH; d++) begin
        a_req.sched[d] = rnd_sched(); b_prog.sched[d] = rnd_sched(); b_req_sched[d] = rnd_sched();
      end
      a_req.addr = addr_t'($urandom % 8); b_prog.addr = addr_t'($urandom % 8);
      a_req.last_iter = 4'($urandom); b_prog.last_iter = 4'($urandom);
      a_req.no_dep = 1'($urandom); b_req_valid = 1'($urandom); b_no_pending = 1'($urandom);
      check_all("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
