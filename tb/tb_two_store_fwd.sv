// tb_two_store_fwd: two stores and a load in one loop, all on one array and
// all able to forward, the case the paper uses to argue that at most one store
// can hold the value a load needs and that the WAW checks between forwarding
// stores must then be kept:
//
//   for (i = 0; i < N; ++i) {
//     if (t0(i)) A[a(i)] = x(i);   // st0, speculated
//     A[b(i)] = y(i);              // st1
//     v = A[c(i)];                 // ld0
//   }
//
// with non-decreasing random addresses a, b, c that often coincide. Pairs:
// RAW ld0<-st0 and ld0<-st1 (both forwarding), WAW st1<-st0 (same
// iteration order) and st0<-st1 (next iteration), WAR st0<-ld0 and st1<-ld0
// (next iteration). All pairs share the loop (k = 1) and no depth resets.
// The testbench plays the AGU and the CU, compares every load value and the
// final array with a sequential run, and requires forwarding from both
// stores, WAW stalls and mis-speculated stores to have happened. The pair
// set follows the paper's forwarding argument; addresses and values are the
// testbench's own.
module tb_two_store_fwd;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned N = 300, WORDS = 256;

  localparam pair_cfg_t OFF      = '0;
  localparam pair_cfg_t LATER    = '{en: 1'b1, k: 3'd1, a_first: 1'b0, l: 3'd0,
                                     li_mask: '0, fwd: 1'b0, nodep: 1'b0};  // a after b in the body
  localparam pair_cfg_t LATER_F  = '{en: 1'b1, k: 3'd1, a_first: 1'b0, l: 3'd0,
                                     li_mask: '0, fwd: 1'b1, nodep: 1'b0};
  localparam pair_cfg_t EARLIER  = '{en: 1'b1, k: 3'd1, a_first: 1'b1, l: 3'd0,
                                     li_mask: '0, fwd: 1'b0, nodep: 1'b0};  // a before b in the body

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
    .RAW_CFG({LATER_F, LATER_F}),                 // [ld0][st1], [ld0][st0]
    .WAR_CFG({EARLIER, EARLIER}),                 // [st1][ld0], [st0][ld0]
    .WAW_CFG({OFF, LATER, EARLIER, OFF})          // [st1][st1], [st1][st0], [st0][st1], [st0][st0]
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
  addr_t   a [N], b [N], c [N];
  st_val_t x [N], y [N];
  data_t   ref_mem [WORDS];
  data_t   exp_ld [$];
  int unsigned n_st [2], n_val [2], n_ld_req;
  int unsigned c_fwd = 0, c_fwd_st0 = 0, c_fwd_st1 = 0, c_waw = 0, c_inv = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mem_req_t mk(input addr_t ad, input int unsigned it, input logic last);
    mem_req_t r;
    r = '0;
    if (last) begin
      r.addr = '1; r.sched = '1; r.last_iter = '1; r.no_dep = 1'b1;
    end else begin
      r.addr = ad; r.sched[0] = sched_elem_t'(it + 1); r.last_iter = '1;
    end
    return r;
  endfunction

  always_comb begin
    st_agu_valid[0] = (n_st[0] <= N);
    st_agu_req[0]   = mk((n_st[0] < N) ? a[n_st[0]] : '0, n_st[0], n_st[0] == N);
    st_agu_valid[1] = (n_st[1] <= N);
    st_agu_req[1]   = mk((n_st[1] < N) ? b[n_st[1]] : '0, n_st[1], n_st[1] == N);
    ld_agu_valid[0] = (n_ld_req <= N);
    ld_agu_req[0]   = mk((n_ld_req < N) ? c[n_ld_req] : '0, n_ld_req, n_ld_req == N);
    st_val_valid[0] = (n_val[0] < N);
    st_val[0]       = x[(n_val[0] < N) ? n_val[0] : 0];
    st_val_valid[1] = (n_val[1] < N);
    st_val[1]       = y[(n_val[1] < N) ? n_val[1] : 0];
  end

  always @(negedge clk) ld_val_ready[0] = ($urandom % 3) != 0;

  // Which store a forwarded value came from: the value encodes its source.
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 2; s++) begin
      if (st_agu_valid[s] && st_agu_ready[s]) n_st[s] <= n_st[s] + 1;
      if (st_val_valid[s] && st_val_ready[s]) n_val[s] <= n_val[s] + 1;
    end
    if (ld_agu_valid[0] && ld_agu_ready[0]) n_ld_req <= n_ld_req + 1;
    if (ld_val_valid[0] && ld_val_ready[0]) begin
      checks++;
      if (exp_ld.size() == 0 || ld_val[0] !== exp_ld[0]) begin
        failures++;
        if (failures < 10) $display("ERROR: load got %0d expected %0d", ld_val[0], exp_ld.size() ? exp_ld[0] : 0);
      end
      if (exp_ld.size() != 0) void'(exp_ld.pop_front());
    end
    if (ev_ld_fwd[0]) begin
      c_fwd++;
      // stored values: st0 writes 1,000,000 + k, st1 writes 2,000,000 + k
      if (dut.ld_fwd_data[0] >= 2000000) c_fwd_st1++;
      else if (dut.ld_fwd_data[0] >= 1000000) c_fwd_st0++;
    end
    c_waw += int'(ev_st_stall[1]);
    c_inv += int'(ev_st_invalid[0]);
  end

  initial begin
    addr_t pa = 0, pb = 0, pc = 0;
    n_st[0] = 0; n_st[1] = 0; n_val[0] = 0; n_val[1] = 0; n_ld_req = 0;
    for (int i = 0; i < N; i++) begin
      pa += addr_t'($urandom % 2); a[i] = pa;
      pb += addr_t'($urandom % 2); b[i] = pb;
      pc += addr_t'($urandom % 2); c[i] = pc;
      x[i].data = data_t'(1000000 + i); x[i].valid = ($urandom % 4) != 0;
      y[i].data = data_t'(2000000 + i); y[i].valid = 1'b1;
    end
    for (int w = 0; w < WORDS; w++) ref_mem[w] = data_t'(7 * w + 3);
    for (int i = 0; i < N; i++) begin
      if (x[i].valid) ref_mem[a[i]] = x[i].data;
      ref_mem[b[i]] = y[i].data;
      exp_ld.push_back(ref_mem[c[i]]);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
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
    $display("events: forwarded %0d (from st0 %0d, from st1 %0d), st1 stalls %0d, invalid st0 %0d",
             c_fwd, c_fwd_st0, c_fwd_st1, c_waw, c_inv);
    checks += 4;
    if (c_fwd_st0 == 0) begin failures++; $display("ERROR: no forwarding from st0"); end
    if (c_fwd_st1 == 0) begin failures++; $display("ERROR: no forwarding from st1"); end
    if (c_waw == 0)     begin failures++; $display("ERROR: st1 never stalled"); end
    if (c_inv == 0)     begin failures++; $display("ERROR: no mis-speculated store"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
