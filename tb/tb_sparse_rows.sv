// tb_sparse_rows: the Data Unit of the top level's example program, at its
// default parameters, driven with the data-dependent address streams of
// sparse (CSR) kernels such as bnn and pagerank instead of affine ones:
//
//   for (i = 0; i < R; ++i) {
//     for (e = p0[i]; e < p0[i+1]; ++e) { v = A[c0[e]]; if (t(e)) A[c0[e]] = 3*v + 1; }  // PE 0
//     for (e = p1[i]; e < p1[i+1]; ++e) use(A[c1[e]]);                                 // PE 1
//   }
//
// Column indices are sorted within a row (monotonic inner loop) and restart
// at every row (non-monotonic outer loop), rows have random lengths and may
// be empty. The testbench plays the AGUs: it produces the requests with the
// schedules, lastIter bits and NoDependence bits an AGU running this code
// would produce (depth-1 element = row number + 1, depth-2 element = number
// of inner iterations so far + 1, never reset). It also plays the compute
// units (CU 0 stores 3v + 1, with about one store in five mis-speculated)
// and, through mem_model, the memory. Every load value and the final array
// are compared with a sequential run of the code. Several matrices are run,
// with a reset before each. The test requires load stalls, forwarding to
// both loads, NoDependence-safe and address-safe loads and mis-speculated
// stores to have happened. Sizes and the value function are the testbench's
// own; the paper runs these kernels on real sparse data sets.
module tb_sparse_rows;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned WORDS = 256;
  localparam int unsigned R     = 48;    // rows
  localparam int unsigned MAXL  = 12;    // longest row

  logic       [1:0] ld_agu_valid, ld_agu_ready, ld_val_valid, ld_val_ready;
  mem_req_t   [1:0] ld_agu_req;
  data_t      [1:0] ld_val;
  logic       [0:0] st_agu_valid, st_agu_ready, st_val_valid, st_val_ready;
  mem_req_t   [0:0] st_agu_req;
  st_val_t    [0:0] st_val;
  logic       [2:0] m_req_valid, m_req_ready, m_resp_valid;
  dram_req_t  [2:0] m_req;
  dram_resp_t [2:0] m_resp;
  logic finished;
  logic [1:0] ev_ld_stall, ev_ld_fwd, ev_ld_po, ev_ld_addr, ev_ld_nodep;
  logic [0:0] ev_st_stall, ev_st_invalid, ev_st_addr;

  // default parameters: two loads, one store, the example's pair table
  data_unit dut (
    .clk, .rst_n,
    .ld_agu_valid, .ld_agu_ready, .ld_agu_req, .ld_val_valid, .ld_val_ready, .ld_val,
    .ld_mem_req_valid(m_req_valid[1:0]), .ld_mem_req_ready(m_req_ready[1:0]), .ld_mem_req(m_req[1:0]),
    .ld_mem_resp_valid(m_resp_valid[1:0]), .ld_mem_resp(m_resp[1:0]),
    .st_agu_valid, .st_agu_ready, .st_agu_req, .st_val_valid, .st_val_ready, .st_val,
    .st_mem_req_valid(m_req_valid[2]), .st_mem_req_ready(m_req_ready[2]), .st_mem_req(m_req[2]),
    .st_mem_resp_valid(m_resp_valid[2]), .st_mem_resp(m_resp[2]),
    .finished, .ev_ld_stall, .ev_ld_fwd, .ev_ld_po, .ev_ld_addr, .ev_ld_nodep,
    .ev_st_stall, .ev_st_invalid, .ev_st_addr
  );

  mem_model #(.NUM_PORTS(3), .WORDS(WORDS)) u_mem (
    .clk, .rst_n, .req_valid(m_req_valid), .req_ready(m_req_ready), .req(m_req),
    .resp_valid(m_resp_valid), .resp(m_resp)
  );

  int checks = 0, failures = 0;

  // request streams of PE 0 (ld0 and st0 share it) and PE 1
  mem_req_t q0 [$], q1 [$];
  logic     t0 [$];          // speculation outcome of each PE 0 iteration
  data_t    exp0 [$], exp1 [$];
  data_t    ref_mem [WORDS];
  int unsigned n_ld0_req, n_st0_req, n_ld1_req, n_val;
  int unsigned c_stall = 0, c_fwd0 = 0, c_fwd1 = 0, c_nodep = 0, c_addr = 0, c_inv = 0;
  data_t    cu0_v [$];       // ld0 values waiting to become store values

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

  // Build one random matrix pair, the request streams and the reference.
  task automatic build();
    int unsigned g0 = 0, g1 = 0;
    addr_t last_st;
    logic  st_seen = 1'b0;
    q0.delete(); q1.delete(); t0.delete(); exp0.delete(); exp1.delete();
    for (int a = 0; a < WORDS; a++) ref_mem[a] = data_t'(7 * a + 3);
    for (int i = 0; i < R; i++) begin
      for (int pe = 0; pe < 2; pe++) begin
        int unsigned len;
        addr_t col;
        len = (($urandom % 4) == 0) ? 0 : 1 + $urandom % MAXL;
        col = addr_t'($urandom % 16);
        for (int e = 0; e < int'(len); e++) begin
          mem_req_t r;
          col += addr_t'(1 + $urandom % 6);          // sorted, unique in a row
          if (col >= WORDS) break;
          r.addr = col;
          r.sched = '0;
          r.sched[0] = sched_elem_t'(i + 1);
          r.sched[1] = sched_elem_t'(((pe == 0) ? g0 : g1) + 1);
          r.last_iter = '0;
          r.last_iter[0] = (i == R - 1);
          r.last_iter[1] = (e == int'(len) - 1);
          r.no_dep = !st_seen || (col > last_st);
          if (pe == 0) begin
            logic t;
            t = ($urandom % 5) != 0;
            q0.push_back(r); t0.push_back(t);
            exp0.push_back(ref_mem[col]);
            if (t) ref_mem[col] = 3 * ref_mem[col] + 1;
            last_st = col; st_seen = 1'b1;
            g0++;
          end else begin
            q1.push_back(r);
            exp1.push_back(ref_mem[col]);
            g1++;
          end
        end
      end
    end
  endtask

  always_comb begin
    ld_agu_valid[0] = (n_ld0_req <= q0.size());
    ld_agu_req[0]   = (n_ld0_req < q0.size()) ? q0[n_ld0_req] : sentinel();
    st_agu_valid[0] = (n_st0_req <= q0.size());
    st_agu_req[0]   = (n_st0_req < q0.size()) ? q0[n_st0_req] : sentinel();
    st_agu_req[0].no_dep = 1'b0;
    ld_agu_valid[1] = (n_ld1_req <= q1.size());
    ld_agu_req[1]   = (n_ld1_req < q1.size()) ? q1[n_ld1_req] : sentinel();
    ld_agu_req[1].no_dep = 1'b0;
    st_val_valid[0] = (cu0_v.size() != 0);
    st_val[0].data  = (cu0_v.size() != 0) ? 3 * cu0_v[0] + 1 : '0;
    st_val[0].valid = (n_val < t0.size()) ? t0[n_val] : 1'b0;
  end

  always @(negedge clk) begin
    ld_val_ready[0] = ($urandom % 4) != 0;
    ld_val_ready[1] = ($urandom % 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (ld_agu_valid[0] && ld_agu_ready[0]) n_ld0_req <= n_ld0_req + 1;
    if (st_agu_valid[0] && st_agu_ready[0]) n_st0_req <= n_st0_req + 1;
    if (ld_agu_valid[1] && ld_agu_ready[1]) n_ld1_req <= n_ld1_req + 1;
    if (st_val_valid[0] && st_val_ready[0]) begin
      void'(cu0_v.pop_front());
      n_val <= n_val + 1;
    end
    if (ld_val_valid[0] && ld_val_ready[0]) begin
      checks++;
      if (exp0.size() == 0 || ld_val[0] !== exp0[0]) begin
        failures++;
        if (failures < 10) $display("ERROR: ld0 got %0d expected %0d", ld_val[0], exp0.size() ? exp0[0] : 0);
      end
      if (exp0.size() != 0) void'(exp0.pop_front());
      cu0_v.push_back(ld_val[0]);
    end
    if (ld_val_valid[1] && ld_val_ready[1]) begin
      checks++;
      if (exp1.size() == 0 || ld_val[1] !== exp1[0]) begin
        failures++;
        if (failures < 10) $display("ERROR: ld1 got %0d expected %0d", ld_val[1], exp1.size() ? exp1[0] : 0);
      end
      if (exp1.size() != 0) void'(exp1.pop_front());
    end
    c_stall += int'(ev_ld_stall[0]) + int'(ev_ld_stall[1]);
    c_fwd0  += int'(ev_ld_fwd[0]);
    c_fwd1  += int'(ev_ld_fwd[1]);
    c_nodep += int'(ev_ld_nodep[0]);
    c_addr  += int'(ev_ld_addr[0]) + int'(ev_ld_addr[1]);
    c_inv   += int'(ev_st_invalid[0]);
  end

  initial begin
    for (int run = 0; run < 8; run++) begin
      rst_n = 1'b0;
      n_ld0_req = 0; n_st0_req = 0; n_ld1_req = 0; n_val = 0;
      cu0_v.delete();
      build();
      for (int a = 0; a < WORDS; a++) u_mem.mem[a] = data_t'(7 * a + 3);
      repeat (3) @(posedge clk);
      rst_n = 1'b1;
      while (!finished) @(posedge clk);
      repeat (2) @(posedge clk);
      checks++;
      if (exp0.size() != 0 || exp1.size() != 0) begin
        failures++;
        $display("ERROR: run %0d: %0d ld0 / %0d ld1 values missing", run, exp0.size(), exp1.size());
      end
      for (int a = 0; a < WORDS; a++) begin
        checks++;
        if (u_mem.mem[a] !== ref_mem[a]) begin
          failures++;
          if (failures < 10) $display("ERROR: run %0d mem[%0d] = %0d expected %0d", run, a, u_mem.mem[a], ref_mem[a]);
        end
      end
      $display("run %0d: %0d PE 0 and %0d PE 1 iterations", run, q0.size(), q1.size());
    end
    $display("events: load stalls %0d, fwd ld0 %0d, fwd ld1 %0d, nodep-safe %0d, addr-safe %0d, invalid stores %0d",
             c_stall, c_fwd0, c_fwd1, c_nodep, c_addr, c_inv);
    checks += 6;
    if (c_stall == 0) begin failures++; $display("ERROR: no load stall"); end
    if (c_fwd0 == 0)  begin failures++; $display("ERROR: no forwarding to ld0"); end
    if (c_fwd1 == 0)  begin failures++; $display("ERROR: no forwarding to ld1"); end
    if (c_nodep == 0) begin failures++; $display("ERROR: no NoDependence-safe load"); end
    if (c_addr == 0)  begin failures++; $display("ERROR: no address-safe load"); end
    if (c_inv == 0)   begin failures++; $display("ERROR: no mis-speculated store"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
