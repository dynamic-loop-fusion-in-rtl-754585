// tb_agu: schedule, address, lastIter, NoDependence and sentinel generation of
// a two-deep, two-operation AGU (op 0 a load, op 1 the store of an intra-loop
// RAW pair). The first run reproduces the paper's schedule table for N = 2,
// J = 2 ({1,1} {1,2} {2,3} {2,4}) and checks the rate of one iteration per
// cycle when every channel is ready. Further runs use random trip counts,
// strides and back-pressure against a reference loop nest in the testbench.
module tb_agu;
  import du_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start;
  logic [1:0][31:0] trip;
  addr_t [1:0] base;
  logic [1:0][1:0][31:0] stride;
  logic [1:0] req_valid, req_ready;
  mem_req_t [1:0] req;
  logic busy, done;

  agu #(.DEPTH(2), .NUM_OPS(2), .NODEP_STORE(1), .NODEP_LOADS(2'b01)) dut (.*);

  int checks = 0, failures = 0;
  mem_req_t expq [2][$];
  int unsigned got [2];
  logic random_ready;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic build(input int unsigned n, input int unsigned j);
    addr_t last_st;
    logic  st_seen = 1'b0;
    for (int o = 0; o < 2; o++) expq[o].delete();
    for (int unsigned i = 0; i < n; i++)
      for (int unsigned jj = 0; jj < j; jj++) begin
        for (int o = 0; o < 2; o++) begin
          mem_req_t r;
          r = '0;
          r.addr = base[o] + addr_t'(i * stride[o][0] + jj * stride[o][1]);
          r.sched[0] = sched_elem_t'(i + 1);
          r.sched[1] = sched_elem_t'(i * j + jj + 1);
          r.last_iter = 4'b1100;
          r.last_iter[0] = (i == n - 1);
          r.last_iter[1] = (jj == j - 1);
          r.no_dep = (o == 0) && (!st_seen || r.addr > last_st);
          expq[o].push_back(r);
        end
        last_st = base[1] + addr_t'(i * stride[1][0] + jj * stride[1][1]);
        st_seen = 1'b1;
      end
    for (int o = 0; o < 2; o++) begin
      mem_req_t s;
      s.addr = '1; s.sched = '1; s.last_iter = '1; s.no_dep = 1'b1;
      expq[o].push_back(s);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 2; o++) if (req_valid[o] && req_ready[o]) begin
      checks++;
      if (expq[o].size() == 0) begin
        failures++; $display("ERROR: op %0d extra request", o);
      end else begin
        mem_req_t e;
        e = expq[o].pop_front();
        if (req[o] !== e) begin
          failures++;
          $display("ERROR: op %0d #%0d got addr %0d sched {%0d,%0d} li %b nd %b, expected addr %0d sched {%0d,%0d} li %b nd %b",
                   o, got[o], req[o].addr, req[o].sched[0], req[o].sched[1], req[o].last_iter, req[o].no_dep,
                   e.addr, e.sched[0], e.sched[1], e.last_iter, e.no_dep);
        end
      end
      got[o]++;
    end
  end
  always @(negedge clk) req_ready = random_ready ? 2'($urandom) : 2'b11;

  task automatic run(input int unsigned n, input int unsigned j, input logic rnd, output int unsigned cycles);
    random_ready = rnd;
    trip[0] = n; trip[1] = j;
    got[0] = 0; got[1] = 0;
    build(n, j);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (expq[0].size() != 0 || expq[1].size() != 0) begin failures++; $display("ERROR: requests missing"); end
    rst_n = 0; @(negedge clk); rst_n = 1;
  endtask

  initial begin
    int unsigned cyc;
    start = 0; random_ready = 0; req_ready = '1;
    base = '0; stride = '0; trip = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // the paper's schedule table, addresses f = i + j for both operations
    stride[0][0] = 1; stride[0][1] = 1; stride[1][0] = 1; stride[1][1] = 1;
    run(2, 2, 1'b0, cyc);
    checks++;
    if (cyc != 5) begin failures++; $display("ERROR: 4 iterations and a sentinel took %0d cycles, expected 5", cyc); end
    run(7, 5, 1'b0, cyc);
    checks++;
    if (cyc != 36) begin failures++; $display("ERROR: 35 iterations took %0d cycles, expected 36", cyc); end
    for (int r = 0; r < 20; r++) begin
      base[0] = addr_t'($urandom % 100); base[1] = addr_t'($urandom % 100);
      for (int o = 0; o < 2; o++) for (int d = 0; d < 2; d++) stride[o][d] = $urandom % 7;
      run(1 + $urandom % 9, 1 + $urandom % 9, 1'b1, cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
