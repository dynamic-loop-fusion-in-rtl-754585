// tb_sibling_loops: the paper's three two-loop kernels RAWloop, WARloop and
// WAWloop, each a pair of sibling loops over the same array with one memory
// operation per loop, run through AGUs and a Data Unit (loop_pair_bench).
// The paper runs them at n = 10,000,000; here n = 1000, which is enough to
// reach the steady state of the pipelines.
//
// Per kernel it checks every load value and the final array of the fused run
// and of each loop run alone. It also requires that in the fused run the
// second loop stalled on the first at least once: both loops walk the same
// addresses, so the hazard check must have held the dependent operation back.
// Finally it requires the fused run to take less than 0.6 of the time of the
// two loops run one after the other. The paper gives 2x as the theoretical
// speedup of these kernels, i.e. a ratio of one half; the memory model's
// random latencies and back-pressure leave the measured ratio slightly above.
module tb_sibling_loops;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int unsigned N = 1000;
  localparam string NAME [3] = '{"RAWloop", "WARloop", "WAWloop"};

  logic [2:0] done;
  int ck [3], fl [3], fc [3], sc [3], st [3];

  for (genvar k = 0; k < 3; k++) begin : g_kernel
    loop_pair_bench #(.KIND(k), .N(N)) u_bench (
      .clk, .done(done[k]), .checks(ck[k]), .failures(fl[k]),
      .fused_cycles(fc[k]), .seq_cycles(sc[k]), .dep_stalls(st[k])
    );
  end

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    $display("ERROR: watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (&done);
    @(posedge clk);
    for (int k = 0; k < 3; k++) begin
      checks += ck[k];
      failures += fl[k];
      $display("%s n=%0d: fused %0d cycles, one after the other %0d cycles, %0d dependency stalls",
               NAME[k], N, fc[k], sc[k], st[k]);
      checks += 2;
      if (st[k] == 0) begin
        failures++;
        $display("ERROR: %s: the second loop never waited on the first", NAME[k]);
      end
      if (fc[k] * 5 > sc[k] * 3) begin
        failures++;
        $display("ERROR: %s: fused run not faster than 0.6 of the sequential time", NAME[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
