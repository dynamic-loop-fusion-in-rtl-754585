// loop_pair_bench: runs one of the three two-loop kernels RAWloop, WARloop and
// WAWloop through an AGU per loop, a Data Unit and the memory model, and
// reports correctness and timing. Used by tb_sibling_loops.
//
//   KIND 0, RAWloop: for (i < N) A[i] = x(i);   for (j < N) use(A[j]);
//   KIND 1, WARloop: for (i < N) use(A[i]);     for (j < N) A[j] = y(j);
//   KIND 2, WAWloop: for (i < N) A[i] = x(i);   for (j < N) A[j] = y(j);
//
// The loops share no loop (k = 0) and the first loop precedes the second, so
// the Data Unit gets a single cross-loop pair: RAW with forwarding, WAR or WAW.
// Ports: load ld0, stores st0 and st1 (memory ports 0, 1, 2). A port the
// kernel does not use receives only the sentinel request.
//
// The bench runs the kernel three times after a reset each time: both loops
// started together (fused), the first loop alone and the second loop alone.
// The last two add up to the time of running the loops one after the other.
// In every run it checks each load value and the final array against a
// sequential execution. It counts the stalls of the dependent operation: in a
// fused run with the same addresses in both loops, the second loop must wait
// on the first at least once. Results are outputs, valid when done rises.
// The kernels and their shape are the paper's evaluation kernels. The values
// stored, the memory latencies and the size N are the bench's own.
module loop_pair_bench
  import du_pkg::*;
#(
  parameter int unsigned KIND  = 0,
  parameter int unsigned N     = 1000,
  parameter int unsigned WORDS = 1024
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   fused_cycles,
  output int   seq_cycles,
  output int   dep_stalls
);
  localparam logic FIRST_ST  = (KIND != 1);  // the first loop stores
  localparam logic SECOND_ST = (KIND != 0);  // the second loop stores

  localparam pair_cfg_t OFF   = '0;
  localparam pair_cfg_t CROSS = '{en: 1'b1, k: 3'd0, a_first: 1'b0, l: 3'd0,
                                  li_mask: '0, fwd: 1'b1, nodep: 1'b0};
  localparam pair_cfg_t CROSS_NF = '{en: 1'b1, k: 3'd0, a_first: 1'b0, l: 3'd0,
                                     li_mask: '0, fwd: 1'b0, nodep: 1'b0};
  // Loop roles: RAW: st0 = loop 1, ld0 = loop 2. WAR: ld0 = loop 1, st0 =
  // loop 2. WAW: st0 = loop 1, st1 = loop 2, ld0 unused.
  localparam pair_cfg_t [0:0][1:0] RAW_CFG = (KIND == 0) ? {OFF, CROSS} : {OFF, OFF};
  localparam pair_cfg_t [1:0][0:0] WAR_CFG = (KIND == 1) ? {OFF, CROSS_NF} : {OFF, OFF};
  localparam pair_cfg_t [1:0][1:0] WAW_CFG = (KIND == 2) ? {OFF, CROSS_NF, OFF, OFF} : {OFF, OFF, OFF, OFF};

  logic rst_n;
  logic start;
  logic en1, en2;

  // one AGU per loop, single depth, address = index
  logic     [1:0] g_valid, g_ready;
  mem_req_t [1:0] g_req;
  for (genvar p = 0; p < 2; p++) begin : g_loop
    logic b, d;
    agu #(.DEPTH(1), .NUM_OPS(1)) u_agu (
      .clk, .rst_n, .start(start && ((p == 0) ? en1 : en2)),
      .trip(32'(N)), .base(addr_t'(0)), .stride(32'd1),
      .req_valid(g_valid[p]), .req_ready(g_ready[p]), .req(g_req[p]),
      .busy(b), .done(d)
    );
  end

  // a port with no running loop gets one sentinel request
  localparam mem_req_t SENT = '{addr: '1, sched: '1, last_iter: '1, no_dep: 1'b1};

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

  // sentinel state of the three ports: 1 = still to send
  logic [2:0] sent_pend;
  // which loop (1 or 2) drives ld0, st0, st1; 0 = none
  localparam int unsigned SRC_LD  = (KIND == 0) ? 2 : (KIND == 1) ? 1 : 0;
  localparam int unsigned SRC_ST0 = (KIND == 1) ? 2 : 1;
  localparam int unsigned SRC_ST1 = (KIND == 2) ? 2 : 0;

  function automatic logic loop_on(input int unsigned src, input logic e1, input logic e2);
    return (src == 1) ? e1 : (src == 2) ? e2 : 1'b0;
  endfunction

  always_comb begin
    g_ready = '0;
    // ld0
    if (loop_on(SRC_LD, en1, en2)) begin
      ld_agu_valid[0] = g_valid[SRC_LD-1]; ld_agu_req[0] = g_req[SRC_LD-1];
      g_ready[SRC_LD-1] = ld_agu_ready[0];
    end else begin
      ld_agu_valid[0] = sent_pend[0]; ld_agu_req[0] = SENT;
    end
    // st0
    if (loop_on(SRC_ST0, en1, en2)) begin
      st_agu_valid[0] = g_valid[SRC_ST0-1]; st_agu_req[0] = g_req[SRC_ST0-1];
      g_ready[SRC_ST0-1] = st_agu_ready[0];
    end else begin
      st_agu_valid[0] = sent_pend[1]; st_agu_req[0] = SENT;
    end
    // st1
    if (loop_on(SRC_ST1, en1, en2)) begin
      st_agu_valid[1] = g_valid[SRC_ST1-1]; st_agu_req[1] = g_req[SRC_ST1-1];
      g_ready[SRC_ST1-1] = st_agu_ready[1];
    end else begin
      st_agu_valid[1] = sent_pend[2]; st_agu_req[1] = SENT;
    end
  end

  data_unit #(
    .NUM_LD(1), .NUM_ST(2), .PEND(PEND_DEPTH),
    .RAW_CFG(RAW_CFG), .WAR_CFG(WAR_CFG), .WAW_CFG(WAW_CFG)
  ) u_du (
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

  // values: loop 1 stores x(i) = 13 i + 5, loop 2 stores y(j) = 17 j + 11
  function automatic data_t xv(input int unsigned i); return data_t'(13 * i + 5); endfunction
  function automatic data_t yv(input int unsigned j); return data_t'(17 * j + 11); endfunction
  function automatic data_t init(input int unsigned a); return data_t'(7 * a + 3); endfunction

  int unsigned n_val [2];   // store values handed over, per store port
  int unsigned n_ld;
  int unsigned stalls;

  // the CU side: store values always ready, loads taken at a random rate
  always_comb begin
    for (int s = 0; s < 2; s++) begin
      st_val_valid[s] = (n_val[s] < N);
      st_val[s].valid = 1'b1;
      // st0 holds loop 1's values except in WARloop, st1 holds loop 2's
      st_val[s].data  = (s == 0 && KIND != 1) ? xv(n_val[s]) : yv(n_val[s]);
    end
  end
  always @(negedge clk) ld_val_ready[0] = ($urandom % 4) != 0;

  logic [1:0] mode_q;  // 0 fused, 1 first loop alone, 2 second loop alone

  always @(posedge clk) begin
    if (!rst_n) begin
      sent_pend <= '1;
      n_val[0] <= 0; n_val[1] <= 0; n_ld <= 0;
    end else begin
      if (ld_agu_valid[0] && ld_agu_ready[0] && !loop_on(SRC_LD, en1, en2))   sent_pend[0] <= 1'b0;
      if (st_agu_valid[0] && st_agu_ready[0] && !loop_on(SRC_ST0, en1, en2))  sent_pend[1] <= 1'b0;
      if (st_agu_valid[1] && st_agu_ready[1] && !loop_on(SRC_ST1, en1, en2))  sent_pend[2] <= 1'b0;
      for (int s = 0; s < 2; s++) if (st_val_valid[s] && st_val_ready[s]) n_val[s] <= n_val[s] + 1;
      if (ld_val_valid[0] && ld_val_ready[0]) begin
        // RAWloop: the load sees loop 1's store when loop 1 ran; WARloop:
        // always the initial value
        checks++;
        if (ld_val[0] !== ((KIND == 0 && en1) ? xv(n_ld) : init(n_ld))) begin
          failures++;
          if (failures < 10)
            $display("ERROR: kind %0d mode %0d load %0d got %0d", KIND, mode_q, n_ld, ld_val[0]);
        end
        n_ld <= n_ld + 1;
      end
      // stalls of the dependent (second-loop) operation
      if (KIND == 0) stalls <= stalls + int'(ev_ld_stall[0]);
      if (KIND == 1) stalls <= stalls + int'(ev_st_stall[0]);
      if (KIND == 2) stalls <= stalls + int'(ev_st_stall[1]);
    end
  end

  task automatic run(input logic [1:0] mode, output int cyc);
    int t;
    mode_q = mode;
    en1 = (mode != 2);
    en2 = (mode != 1);
    rst_n = 1'b0;
    start = 1'b0;
    for (int a = 0; a < WORDS; a++) u_mem.mem[a] = init(a);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    t = 1;
    while (!finished) begin
      @(posedge clk);
      t++;
    end
    repeat (2) @(posedge clk);
    cyc = t;
    // final array against the sequential program (with only the loops run)
    for (int a = 0; a < WORDS; a++) begin
      data_t e;
      e = init(a);
      if (a < N) begin
        if (FIRST_ST && en1)  e = xv(a);
        if (SECOND_ST && en2) e = yv(a);
      end
      checks++;
      if (u_mem.mem[a] !== e) begin
        failures++;
        if (failures < 10)
          $display("ERROR: kind %0d mode %0d mem[%0d] = %0d expected %0d", KIND, mode, a, u_mem.mem[a], e);
      end
    end
    checks++;
    if (n_ld != ((SRC_LD == 1 && en1) || (SRC_LD == 2 && en2) ? N : 0)) begin
      failures++;
      $display("ERROR: kind %0d mode %0d: %0d load values", KIND, mode, n_ld);
    end
  endtask

  initial begin
    int c1, c2;
    done = 1'b0;
    checks = 0; failures = 0; stalls = 0;
    rst_n = 1'b0; start = 1'b0; en1 = 1'b0; en2 = 1'b0; mode_q = 0;
    run(2'd0, fused_cycles);
    dep_stalls = stalls;
    run(2'd1, c1);
    run(2'd2, c2);
    seq_cycles = c1 + c2;
    done = 1'b1;
  end
endmodule
