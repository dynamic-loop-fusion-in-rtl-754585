// tb_reset_nest: a Data Unit guarding the four-deep loop nest that the paper
// uses to explain the No Address Reset Check, with a store as operation b
// and a load as operation a:
//
//   for (a = 0; a < NA; ++a)              // depth 1: addresses restart (non-monotonic)
//     for (b = 0; b < NB; ++b) {          // depth 2: monotonic
//       for (c = 0; c < NC; ++c)          // depth 3: addresses restart (non-monotonic)
//         for (e = 0; e < NE; ++e)        // depth 4: monotonic
//           if (t) A[4b + e] = x;         // st0 (b), speculated
//       for (d = 0; d < ND; ++d)          // depth 3
//         use(A[4b + d]);                 // ld0 (a)
//     }
//
// Pairs: RAW ld0 <- st0 with k = 2, l = 1, the lastIter bit of depth 3 in the
// mask, forwarding; WAR st0 <- ld0 with k = 2, st0 first, l = 1. The load
// may overtake the store only when the store is in its last c-iteration
// (lastIter of depth 3) and in the same a-iteration (l-equality), which is
// exactly what the check's two reset terms are for.
//
// The testbench plays the AGUs: it produces the requests of both operations
// with the schedules (one never-reset counter per depth), lastIter bits and
// addresses an AGU would produce, plays the CU (store values with a random
// valid bit) and, through mem_model, the memory. It compares every load value
// and the final array with a sequential run, for several random trip counts,
// and requires address-safe loads (the case the reset terms allow) and load
// stalls to have happened. The nest is the paper's; addresses, trip counts
// and values are the testbench's own.
module tb_reset_nest;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned WORDS = 128;

  localparam pair_cfg_t RAW = '{en: 1'b1, k: 3'd2, a_first: 1'b0, l: 3'd1,
                                li_mask: 4'b0100, fwd: 1'b1, nodep: 1'b0};
  localparam pair_cfg_t WAR = '{en: 1'b1, k: 3'd2, a_first: 1'b1, l: 3'd1,
                                li_mask: 4'b0000, fwd: 1'b0, nodep: 1'b0};

  logic       [0:0] ld_agu_valid, ld_agu_ready, ld_val_valid, ld_val_ready;
  mem_req_t   [0:0] ld_agu_req;
  data_t      [0:0] ld_val;
  logic       [0:0] st_agu_valid, st_agu_ready, st_val_valid, st_val_ready;
  mem_req_t   [0:0] st_agu_req;
  st_val_t    [0:0] st_val;
  logic       [1:0] m_req_valid, m_req_ready, m_resp_valid;
  dram_req_t  [1:0] m_req;
  dram_resp_t [1:0] m_resp;
  logic finished;
  logic [0:0] ev_ld_stall, ev_ld_fwd, ev_ld_po, ev_ld_addr, ev_ld_nodep;
  logic [0:0] ev_st_stall, ev_st_invalid, ev_st_addr;

  data_unit #(
    .NUM_LD(1), .NUM_ST(1), .PEND(PEND_DEPTH),
    .RAW_CFG(RAW), .WAR_CFG(WAR), .WAW_CFG('0)
  ) dut (
    .clk, .rst_n,
    .ld_agu_valid, .ld_agu_ready, .ld_agu_req, .ld_val_valid, .ld_val_ready, .ld_val,
    .ld_mem_req_valid(m_req_valid[0]), .ld_mem_req_ready(m_req_ready[0]), .ld_mem_req(m_req[0]),
    .ld_mem_resp_valid(m_resp_valid[0]), .ld_mem_resp(m_resp[0]),
    .st_agu_valid, .st_agu_ready, .st_agu_req, .st_val_valid, .st_val_ready, .st_val,
    .st_mem_req_valid(m_req_valid[1]), .st_mem_req_ready(m_req_ready[1]), .st_mem_req(m_req[1]),
    .st_mem_resp_valid(m_resp_valid[1]), .st_mem_resp(m_resp[1]),
    .finished, .ev_ld_stall, .ev_ld_fwd, .ev_ld_po, .ev_ld_addr, .ev_ld_nodep,
    .ev_st_stall, .ev_st_invalid, .ev_st_addr
  );

  mem_model #(.NUM_PORTS(2), .WORDS(WORDS)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .resp_valid(m_resp_valid), .resp(m_resp)
  );

  int checks = 0, failures = 0;
  mem_req_t qs [$], ql [$];
  st_val_t  vs [$];
  data_t    expl [$];
  data_t    ref_mem [WORDS];
  int unsigned n_ld_req, n_st_req, n_val;
  int unsigned c_stall = 0, c_addr = 0, c_fwd = 0, c_st_stall = 0, c_inv = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mem_req_t sentinel();
    mem_req_t r;
    r.addr = '1; r.sched = '1; r.last_iter = '1; r.no_dep = 1'b1;
    return r;
  endfunction

  // Request streams and reference for one set of trip counts.
  task automatic build(input int unsigned na, input int unsigned nb, input int unsigned nc,
                       input int unsigned ne, input int unsigned nd);
    sched_elem_t s1 = 0, s2 = 0, s3 = 0, s4 = 0, s3d = 0;
    qs.delete(); ql.delete(); vs.delete(); expl.delete();
    for (int w = 0; w < WORDS; w++) ref_mem[w] = data_t'(7 * w + 3);
    for (int a = 0; a < int'(na); a++) begin
      s1++;
      for (int b = 0; b < int'(nb); b++) begin
        s2++;
        for (int c = 0; c < int'(nc); c++) begin
          s3++;
          for (int e = 0; e < int'(ne); e++) begin
            mem_req_t r;
            st_val_t v;
            s4++;
            r.addr = addr_t'(4 * b + e);
            r.sched = '{s4, s3, s2, s1};
            r.last_iter = {e == int'(ne) - 1, c == int'(nc) - 1, b == int'(nb) - 1, a == int'(na) - 1};
            r.no_dep = 1'b0;
            v.data = data_t'($urandom % 100000);
            v.valid = ($urandom % 5) != 0;
            qs.push_back(r); vs.push_back(v);
            if (v.valid) ref_mem[4 * b + e] = v.data;
          end
        end
        for (int d = 0; d < int'(nd); d++) begin
          mem_req_t r;
          s3d++;
          r.addr = addr_t'(4 * b + d);
          r.sched = '{sched_elem_t'(0), s3d, s2, s1};
          r.last_iter = {1'b0, d == int'(nd) - 1, b == int'(nb) - 1, a == int'(na) - 1};
          r.no_dep = 1'b0;
          ql.push_back(r);
          expl.push_back(ref_mem[4 * b + d]);
        end
      end
    end
  endtask

  always_comb begin
    ld_agu_valid[0] = (n_ld_req <= ql.size());
    ld_agu_req[0]   = (n_ld_req < ql.size()) ? ql[n_ld_req] : sentinel();
    st_agu_valid[0] = (n_st_req <= qs.size());
    st_agu_req[0]   = (n_st_req < qs.size()) ? qs[n_st_req] : sentinel();
    st_val_valid[0] = (n_val < vs.size());
    st_val[0]       = (n_val < vs.size()) ? vs[n_val] : '0;
  end

  always @(negedge clk) ld_val_ready[0] = ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n) begin
    if (ld_agu_valid[0] && ld_agu_ready[0]) n_ld_req <= n_ld_req + 1;
    if (st_agu_valid[0] && st_agu_ready[0]) n_st_req <= n_st_req + 1;
    if (st_val_valid[0] && st_val_ready[0]) n_val <= n_val + 1;
    if (ld_val_valid[0] && ld_val_ready[0]) begin
      checks++;
      if (expl.size() == 0 || ld_val[0] !== expl[0]) begin
        failures++;
        if (failures < 10) $display("ERROR: load got %0d expected %0d", ld_val[0], expl.size() ? expl[0] : 0);
      end
      if (expl.size() != 0) void'(expl.pop_front());
    end
    c_stall    += int'(ev_ld_stall[0]);
    c_addr     += int'(ev_ld_addr[0]);
    c_fwd      += int'(ev_ld_fwd[0]);
    c_st_stall += int'(ev_st_stall[0]);
    c_inv      += int'(ev_st_invalid[0]);
  end

  initial begin
    for (int run = 0; run < 12; run++) begin
      int unsigned na, nb, nc, ne, nd;
      na = 2 + $urandom % 4; nb = 1 + $urandom % 6; nc = 1 + $urandom % 3;
      ne = 1 + $urandom % 4; nd = 1 + $urandom % 4;
      rst_n = 1'b0;
      n_ld_req = 0; n_st_req = 0; n_val = 0;
      build(na, nb, nc, ne, nd);
      for (int w = 0; w < WORDS; w++) u_mem.mem[w] = data_t'(7 * w + 3);
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      while (!finished) @(posedge clk);
      repeat (2) @(posedge clk);
      checks++;
      if (expl.size() != 0) begin
        failures++;
        $display("ERROR: run %0d: %0d load values missing", run, expl.size());
      end
      for (int w = 0; w < WORDS; w++) begin
        checks++;
        if (u_mem.mem[w] !== ref_mem[w]) begin
          failures++;
          if (failures < 10) $display("ERROR: run %0d mem[%0d] = %0d expected %0d", run, w, u_mem.mem[w], ref_mem[w]);
        end
      end
      $display("run %0d: trips %0d %0d %0d %0d / %0d: %0d stores, %0d loads", run, na, nb, nc, ne, nd,
               qs.size(), ql.size());
    end
    $display("events: load stalls %0d, address-safe loads %0d, forwarded %0d, store stalls %0d, invalid stores %0d",
             c_stall, c_addr, c_fwd, c_st_stall, c_inv);
    checks += 3;
    if (c_stall == 0) begin failures++; $display("ERROR: no load stall"); end
    if (c_addr == 0)  begin failures++; $display("ERROR: no address-safe load"); end
    if (c_st_stall == 0) begin failures++; $display("ERROR: no store stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
