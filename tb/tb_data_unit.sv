// tb_data_unit: a Data Unit with one load and two stores, configured for
//
//   for (i = 0; i < N1; ++i) A[a(i)] = x(i);           // PE 0: st0 (speculated)
//   for (j = 0; j < N2; ++j) { y = A[b(j)]; A[c(j)] = z(j); }  // PE 1: ld0, st1
//
// with non-decreasing random addresses a, b, c. Pairs: RAW ld0<-st0 across
// loops (forwarding), RAW ld0<-st1 inside the j-loop (forwarding and
// NoDependence), WAR st1<-ld0 inside the j-loop, WAW st1<-st0 across loops.
// The pairs WAR st0<-ld0 and WAW st0<-st1 are pruned: st0 always comes first.
// The testbench drives the requests with the schedules an AGU would make,
// plays the CUs and compares every load value and the final array with a
// sequential run of the program; it also requires that the WAW and WAR checks
// stalled a store and that both forwarding paths were used.
module tb_data_unit;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned N1 = 200, N2 = 200, WORDS = 512;

  localparam pair_cfg_t OFF         = '0;
  localparam pair_cfg_t RAW_LD0_ST0 = '{en:1, k:0, a_first:0, l:0, li_mask:'0, fwd:1, nodep:0};
  localparam pair_cfg_t RAW_LD0_ST1 = '{en:1, k:1, a_first:1, l:0, li_mask:'0, fwd:1, nodep:1};
  localparam pair_cfg_t WAR_ST1_LD0 = '{en:1, k:1, a_first:0, l:0, li_mask:'0, fwd:0, nodep:0};
  localparam pair_cfg_t WAW_ST1_ST0 = '{en:1, k:0, a_first:0, l:0, li_mask:'0, fwd:0, nodep:0};

  logic       [0:0] ld_agu_valid, ld_agu_ready, ld_val_valid, ld_val_ready;
  mem_req_t   [0:0] ld_agu_req;
  data_t      [0:0] ld_val;
  logic       [1:0] st_agu_valid, st_agu_ready, st_val_valid, st_val_ready;
  mem_req_t   [1:0] st_agu_req;
  st_val_t    [1:0] st_val;
  logic       [2:0] m_req_valid, m_req_ready, m_resp_valid;
  dram_req_t  [2:0] m_req;
  dram_resp_t [2:0] m_resp;
  logic finished;
  logic [0:0] ev_ld_stall, ev_ld_fwd, ev_ld_po, ev_ld_addr, ev_ld_nodep;
  logic [1:0] ev_st_stall, ev_st_invalid, ev_st_addr;

  data_unit #(
    .NUM_LD(1), .NUM_ST(2), .PEND(PEND_DEPTH),
    .RAW_CFG({RAW_LD0_ST1, RAW_LD0_ST0}),
    .WAR_CFG({WAR_ST1_LD0, OFF}),
    .WAW_CFG({OFF, WAW_ST1_ST0, OFF, OFF})
  ) dut (
    .clk, .rst_n,
    .ld_agu_valid, .ld_agu_ready, .ld_agu_req, .ld_val_valid, .ld_val_ready, .ld_val,
    .ld_mem_req_valid(m_req_valid[0]), .ld_mem_req_ready(m_req_ready[0]), .ld_mem_req(m_req[0]),
    .ld_mem_resp_valid(m_resp_valid[0]), .ld_mem_resp(m_resp[0]),
    .st_agu_valid, .st_agu_ready, .st_agu_req, .st_val_valid, .st_val_ready, .st_val,
    .st_mem_req_valid(m_req_valid[2:1]), .st_mem_req_ready(m_req_ready[2:1]), .st_mem_req(m_req[2:1]),
    .st_mem_resp_valid(m_resp_valid[2:1]), .st_mem_resp(m_resp[2:1]),
    .finished, .ev_ld_stall, .ev_ld_fwd, .ev_ld_po, .ev_ld_addr, .ev_ld_nodep,
    .ev_st_stall, .ev_st_invalid, .ev_st_addr
  );

  mem_model #(.NUM_PORTS(3), .WORDS(WORDS)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .resp_valid(m_resp_valid), .resp(m_resp)
  );

  int checks = 0, failures = 0;
  addr_t a [N1], b [N2], c [N2];
  st_val_t x [N1];
  data_t z [N2];
  data_t ref_mem [WORDS];
  data_t exp_ld [$];
  int unsigned i_req, j_req_ld, j_req_st, i_val, j_val, n_ld;
  int unsigned c_fwd, c_nodep, c_st0_stall, c_st1_stall, c_addr, c_inv;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mem_req_t mk(input addr_t ad, input int unsigned it, input logic nd, input logic last);
    mem_req_t r;
    r = '0;
    if (last) begin
      r.addr = '1; r.sched = '1; r.last_iter = '1; r.no_dep = 1'b1;
    end else begin
      r.addr = ad; r.sched[0] = sched_elem_t'(it + 1); r.last_iter = '1; r.no_dep = nd;
    end
    return r;
  endfunction

  always_comb begin
    ld_agu_valid[0] = (j_req_ld <= N2);
    ld_agu_req[0]   = mk((j_req_ld < N2) ? b[j_req_ld] : '0, j_req_ld,
                         (j_req_ld == 0) || (j_req_ld < N2 && b[j_req_ld] > c[j_req_ld - 1]), j_req_ld == N2);
    st_agu_valid[0] = (i_req <= N1);
    st_agu_req[0]   = mk((i_req < N1) ? a[i_req] : '0, i_req, 1'b0, i_req == N1);
    st_agu_valid[1] = (j_req_st <= N2);
    st_agu_req[1]   = mk((j_req_st < N2) ? c[j_req_st] : '0, j_req_st, 1'b0, j_req_st == N2);
    st_val_valid[0] = (i_val < N1);
    st_val[0]       = x[(i_val < N1) ? i_val : 0];
    st_val_valid[1] = (j_val < N2);
    st_val[1].data  = z[(j_val < N2) ? j_val : 0];
    st_val[1].valid = 1'b1;
  end

  always @(negedge clk) ld_val_ready[0] = ($urandom % 4) != 0;

  always @(posedge clk) if (rst_n) begin
    if (ld_agu_valid[0] && ld_agu_ready[0]) j_req_ld <= j_req_ld + 1;
    if (st_agu_valid[0] && st_agu_ready[0]) i_req <= i_req + 1;
    if (st_agu_valid[1] && st_agu_ready[1]) j_req_st <= j_req_st + 1;
    if (st_val_valid[0] && st_val_ready[0]) i_val <= i_val + 1;
    if (st_val_valid[1] && st_val_ready[1]) j_val <= j_val + 1;
    if (ld_val_valid[0] && ld_val_ready[0]) begin
      checks++;
      if (exp_ld.size() == 0 || ld_val[0] !== exp_ld[0]) begin
        failures++; $display("ERROR: ld0 #%0d got %0d expected %0d", n_ld, ld_val[0], exp_ld.size() ? exp_ld[0] : 0);
      end
      if (exp_ld.size() != 0) void'(exp_ld.pop_front());
      n_ld <= n_ld + 1;
    end
    c_fwd       += int'(ev_ld_fwd[0]);
    c_nodep     += int'(ev_ld_nodep[0]);
    c_addr      += int'(ev_ld_addr[0]);
    c_st0_stall += int'(ev_st_stall[0]);
    c_st1_stall += int'(ev_st_stall[1]);
    c_inv       += int'(ev_st_invalid[0]);
  end

  initial begin
    addr_t pa = 0, pb = 0, pc = 0;
    i_req = 0; j_req_ld = 0; j_req_st = 0; i_val = 0; j_val = 0; n_ld = 0;
    c_fwd = 0; c_nodep = 0; c_st0_stall = 0; c_st1_stall = 0; c_addr = 0; c_inv = 0;
    for (int i = 0; i < N1; i++) begin
      pa += addr_t'($urandom % 3); a[i] = pa;
      x[i].data = data_t'($urandom % 100000); x[i].valid = ($urandom % 5) != 0;
    end
    for (int j = 0; j < N2; j++) begin
      pb += addr_t'($urandom % 3); b[j] = pb;
      pc += addr_t'($urandom % 3); c[j] = pc;
      z[j] = data_t'($urandom % 100000);
    end
    for (int w = 0; w < WORDS; w++) ref_mem[w] = data_t'(7 * w + 3);
    for (int i = 0; i < N1; i++) if (x[i].valid) ref_mem[a[i]] = x[i].data;
    for (int j = 0; j < N2; j++) begin
      exp_ld.push_back(ref_mem[b[j]]);
      ref_mem[c[j]] = z[j];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!finished) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (exp_ld.size() != 0) begin failures++; $display("ERROR: %0d loads missing", exp_ld.size()); end
    for (int w = 0; w < WORDS; w++) begin
      checks++;
      if (u_mem.mem[w] !== ref_mem[w]) begin
        failures++;
        if (failures < 10) $display("ERROR: mem[%0d] = %0d expected %0d", w, u_mem.mem[w], ref_mem[w]);
      end
    end
    $display("events: fwd %0d nodep %0d addr %0d st0 stalls %0d st1 stalls %0d invalid %0d",
             c_fwd, c_nodep, c_addr, c_st0_stall, c_st1_stall, c_inv);
    checks += 4;
    if (c_fwd == 0) begin failures++; $display("ERROR: no forwarding"); end
    if (c_st1_stall == 0) begin failures++; $display("ERROR: WAW/WAR never stalled st1"); end
    if (c_addr == 0) begin failures++; $display("ERROR: no address-safe load"); end
    if (c_inv == 0) begin failures++; $display("ERROR: no mis-speculated store"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
