// tb_dlf_top: end-to-end test of the two-PE design at its default parameters.
//
// The testbench plays both compute units and, through mem_model, the memory:
//   CU 0 takes each ld0 value v and returns the store value 3*v + 1 with a
//        speculation valid bit that is a fixed hash of the iteration number
//        (about one store in five is mis-speculated and must not be written);
//   CU 1 takes the ld1 values.
// A sequential reference run of the same loop nest, in program order, gives
// the value every load must see and the final array. Several runs with
// different trip counts and address patterns (monotonic, overlapping,
// non-monotonic outer loop) are made, each after a reset. The test also counts
// the mechanisms of the Data Unit and fails if one never happened: hazard
// stalls of loads and of the store, forwarding on each load, loads made safe by
// the program-order check, by the address check and by NoDependence, stores
// made safe by the address check, mis-speculated stores, and fused execution
// (PE 1 delivering values while PE 0 is still delivering). A RAWloop-shaped
// run (a store loop then a load loop over the same 1000 words) must finish in
// less than 0.8 of the time its two loops take one after the other.
module tb_dlf_top;
  import du_pkg::*;

  localparam int unsigned WORDS = 1024;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic        start;
  logic [31:0] n_outer, n_inner0, n_inner1;
  addr_t [2:0] base;
  logic  [2:0][31:0] stride_outer, stride_inner;
  logic  [1:0] ld_val_valid, ld_val_ready;
  data_t [1:0] ld_val;
  logic        st_val_valid, st_val_ready;
  st_val_t     st_val;
  logic       [2:0] m_req_valid, m_req_ready, m_resp_valid;
  dram_req_t  [2:0] m_req;
  dram_resp_t [2:0] m_resp;
  logic finished;
  logic [1:0] ev_ld_stall, ev_ld_fwd, ev_ld_po, ev_ld_addr, ev_ld_nodep;
  logic ev_st_stall, ev_st_invalid, ev_st_addr;

  dlf_top dut (
    .clk, .rst_n, .start, .n_outer, .n_inner0, .n_inner1, .base, .stride_outer, .stride_inner,
    .ld_val_valid, .ld_val_ready, .ld_val, .st_val_valid, .st_val_ready, .st_val,
    .ld_mem_req_valid(m_req_valid[1:0]), .ld_mem_req_ready(m_req_ready[1:0]), .ld_mem_req(m_req[1:0]),
    .ld_mem_resp_valid(m_resp_valid[1:0]), .ld_mem_resp(m_resp[1:0]),
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
  longint unsigned cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- reference
  data_t ref_mem [WORDS];
  data_t exp0 [$], exp1 [$];

  function automatic logic spec_valid(input int unsigned it);
    int unsigned h;
    h = it * 32'd2654435761;
    return ((h >> 13) % 5) != 0;
  endfunction

  task automatic build_reference();
    int unsigned it = 0;
    exp0.delete();
    exp1.delete();
    for (int a = 0; a < WORDS; a++) ref_mem[a] = data_t'(7 * a + 3);
    for (int unsigned i = 0; i < n_outer; i++) begin
      for (int unsigned j = 0; j < n_inner0; j++) begin
        int unsigned a0;
        data_t v;
        a0 = (base[0] + i * stride_outer[0] + j * stride_inner[0]) % WORDS;
        v  = ref_mem[a0];
        exp0.push_back(v);
        if (spec_valid(it)) ref_mem[(base[1] + i * stride_outer[1] + j * stride_inner[1]) % WORDS] = 3 * v + 1;
        it++;
      end
      for (int unsigned k = 0; k < n_inner1; k++)
        exp1.push_back(ref_mem[(base[2] + i * stride_outer[2] + k * stride_inner[2]) % WORDS]);
    end
  endtask

  // ---------------------------------------------------------------- CUs
  st_val_t stq [$];
  int unsigned cu0_it, n0, n1;
  int unsigned overlap;
  logic run_active;

  always @(posedge clk) begin
    if (!rst_n) begin
      stq.delete();
      cu0_it <= 0;
      ld_val_ready <= '0;
    end else begin
      // CU 0: ld0 value in, store value out
      if (ld_val_valid[0] && ld_val_ready[0]) begin
        st_val_t sv;
        checks++;
        if (exp0.size() == 0) begin
          failures++;
          $display("ERROR: unexpected ld0 value %0d", ld_val[0]);
        end else begin
          data_t e;
          e = exp0.pop_front();
          if (ld_val[0] !== e) begin
            failures++;
            $display("ERROR: ld0 #%0d got %0d expected %0d", n0, ld_val[0], e);
          end
        end
        sv.data  = 3 * ld_val[0] + 1;
        sv.valid = spec_valid(cu0_it);
        stq.push_back(sv);
        cu0_it <= cu0_it + 1;
        n0++;
      end
      // CU 1: ld1 value in
      if (ld_val_valid[1] && ld_val_ready[1]) begin
        checks++;
        if (exp1.size() == 0) begin
          failures++;
          $display("ERROR: unexpected ld1 value %0d", ld_val[1]);
        end else begin
          data_t e;
          e = exp1.pop_front();
          if (ld_val[1] !== e) begin
            failures++;
            $display("ERROR: ld1 #%0d got %0d expected %0d", n1, ld_val[1], e);
          end
        end
        if (exp0.size() != 0) overlap++;
        n1++;
      end
      if (st_val_valid && st_val_ready) void'(stq.pop_front());
      ld_val_ready <= {($urandom % 8) != 0, ($urandom % 8) != 0};
    end
  end

  always_comb begin
    st_val_valid = (stq.size() != 0);
    st_val       = (stq.size() != 0) ? stq[0] : '0;
  end

  // ---------------------------------------------------------------- events
  int unsigned c_ld_stall, c_st_stall, c_fwd0, c_fwd1, c_po, c_addr, c_nodep, c_st_addr, c_inv;
  always @(posedge clk) if (rst_n) begin
    c_ld_stall += $countones(ev_ld_stall);
    c_st_stall += int'(ev_st_stall);
    c_fwd0     += int'(ev_ld_fwd[0]);
    c_fwd1     += int'(ev_ld_fwd[1]);
    c_po       += $countones(ev_ld_po);
    c_addr     += $countones(ev_ld_addr);
    c_nodep    += $countones(ev_ld_nodep);
    c_st_addr  += int'(ev_st_addr);
    c_inv      += int'(ev_st_invalid);
  end

  // ---------------------------------------------------------------- runs
  longint unsigned last_cycles, raw_cycles, seq_cycles;

  task automatic run(input int unsigned n, input int unsigned j, input int unsigned k,
                     input int unsigned b0, input int unsigned so0, input int unsigned si0,
                     input int unsigned b2, input int unsigned so2, input int unsigned si2);
    longint unsigned t0;
    rst_n = 1'b0;
    start = 1'b0;
    n_outer = n; n_inner0 = j; n_inner1 = k;
    base[0] = b0; stride_outer[0] = so0; stride_inner[0] = si0;
    base[1] = b0; stride_outer[1] = so0; stride_inner[1] = si0;
    base[2] = b2; stride_outer[2] = so2; stride_inner[2] = si2;
    n0 = 0; n1 = 0;
    build_reference();
    // restore the memory image the reference started from
    for (int a = 0; a < WORDS; a++) u_mem.mem[a] = data_t'(7 * a + 3);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    t0 = cycle;
    @(posedge clk);
    start = 1'b0;
    while (!finished) @(posedge clk);
    repeat (2) @(posedge clk);
    checks++;
    if (exp0.size() != 0 || exp1.size() != 0) begin
      failures++;
      $display("ERROR: %0d ld0 / %0d ld1 values never delivered", exp0.size(), exp1.size());
    end
    for (int a = 0; a < WORDS; a++) begin
      checks++;
      if (u_mem.mem[a] !== ref_mem[a]) begin
        failures++;
        if (failures < 20) $display("ERROR: mem[%0d] = %0d expected %0d", a, u_mem.mem[a], ref_mem[a]);
      end
    end
    // Each AGU issues at most one iteration per cycle: the run cannot be
    // shorter than the longer PE's iteration count.
    checks++;
    if (cycle - t0 < longint'(n * ((j > k) ? j : k))) begin
      failures++;
      $display("ERROR: run finished in %0d cycles, fewer than its iterations", cycle - t0);
    end
    last_cycles = cycle - t0;
    $display("run n=%0d j=%0d k=%0d: %0d cycles, %0d ld0 and %0d ld1 values", n, j, k, cycle - t0, n0, n1);
  endtask

  initial begin
    rst_n = 1'b0;
    start = 1'b0;
    overlap = 0;
    c_ld_stall = 0; c_st_stall = 0; c_fwd0 = 0; c_fwd1 = 0; c_po = 0;
    c_addr = 0; c_nodep = 0; c_st_addr = 0; c_inv = 0;
    //   n   j  k   b0 so0 si0  b2 so2 si2
    run(40,  2, 4,   0, 1,  1,   0, 2,  1);   // the loop nest of the example, overlapping reads
    run(30,  8, 8,   0, 0,  1,   0, 0,  1);   // address resets every i: non-monotonic outer loop
    run(60,  1, 2,   0, 1,  0,   0, 1,  0);   // same address for a whole inner loop
    run(50,  4, 3,   5, 4,  1,  20, 4,  1);   // monotonic in both loops, ld1 behind st0
    run(50,  4, 3, 100, 4,  1,   0, 4,  1);   // ld1 reads far below the stores
    run(25, 16, 4,   0, 16, 1, 300, 4,  1);   // disjoint regions
    // RAWloop shape: one i-iteration, a store loop over A[0..999] followed
    // by a load loop over A[0..999] (the paper's RAWloop at n = 1000).
    // Each loop alone gives the time of running them one after the other;
    // fused, the pair must take clearly less than that sum.
    run(1, 1000, 1000, 0, 0, 1, 0, 0, 1);
    raw_cycles = last_cycles;
    run(1, 1000, 1, 0, 0, 1, 0, 0, 1);
    seq_cycles = last_cycles;
    run(1, 1, 1000, 0, 0, 1, 0, 0, 1);
    seq_cycles += last_cycles;
    checks++;
    $display("RAWloop n=1000: fused %0d cycles, loops one after the other %0d cycles", raw_cycles, seq_cycles);
    if (raw_cycles * 5 > seq_cycles * 4) begin
      failures++;
      $display("ERROR: fused RAWloop not faster than 0.8 of the sequential time");
    end
    begin
      int unsigned nn, jj, kk, b0, so0, si0, b2, so2, si2;
      for (int r = 0; r < 6; r++) begin
        nn = 5 + $urandom % 30; jj = 1 + $urandom % 6; kk = 1 + $urandom % 6;
        b0 = $urandom % 64; so0 = $urandom % 6; si0 = $urandom % 3;
        b2 = $urandom % 64; so2 = $urandom % 6; si2 = $urandom % 3;
        run(nn, jj, kk, b0, so0, si0, b2, so2, si2);
      end
    end
    $display("events: ld stalls %0d, st stalls %0d, fwd ld0 %0d, fwd ld1 %0d, po-safe %0d, addr-safe %0d, nodep-safe %0d, st addr-safe %0d, invalid stores %0d, fused deliveries %0d",
             c_ld_stall, c_st_stall, c_fwd0, c_fwd1, c_po, c_addr, c_nodep, c_st_addr, c_inv, overlap);
    checks += 10;
    if (c_ld_stall == 0) begin failures++; $display("ERROR: no load hazard stall"); end
    if (c_st_stall == 0) begin failures++; $display("ERROR: no store hazard stall"); end
    if (c_fwd0 == 0)     begin failures++; $display("ERROR: no forwarding to ld0"); end
    if (c_fwd1 == 0)     begin failures++; $display("ERROR: no forwarding to ld1"); end
    if (c_po == 0)       begin failures++; $display("ERROR: no program-order safe load"); end
    if (c_addr == 0)     begin failures++; $display("ERROR: no address-safe load"); end
    if (c_nodep == 0)    begin failures++; $display("ERROR: no NoDependence-safe load"); end
    if (c_st_addr == 0)  begin failures++; $display("ERROR: no address-safe store"); end
    if (c_inv == 0)      begin failures++; $display("ERROR: no mis-speculated store"); end
    if (overlap == 0)    begin failures++; $display("ERROR: loops never ran in parallel"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
