// tb_sync_fifo: random pushes and pops against a queue model; checks order,
// data, the full/empty flags, the one-cycle latency and pass-through when full.
module tb_sync_fifo;
  localparam int unsigned W = 16, D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // latency: a word written in one cycle is visible in the next
    @(negedge clk); in_valid = 1; in_data = 16'hbeef;
    checks++; if (out_valid) begin failures++; $display("ERROR: not empty after reset"); end
    @(negedge clk); in_valid = 0;
    checks++; if (!out_valid || out_data != 16'hbeef) begin failures++; $display("ERROR: latency"); end
    out_ready = 1; @(negedge clk); out_ready = 0;
    // fill to full
    for (int i = 0; i < D; i++) begin in_valid = 1; in_data = 16'(i); @(negedge clk); end
    in_valid = 1; in_data = 16'h55;
    #1;
    checks++; if (in_ready) begin failures++; $display("ERROR: full FIFO ready without a read"); end
    out_ready = 1;
    #1;
    checks++; if (!in_ready) begin failures++; $display("ERROR: full FIFO not ready while read"); end
    @(negedge clk); in_valid = 0; out_ready = 0;
    for (int i = 1; i < D; i++) model.push_back(16'(i));
    model.push_back(16'h55);
    // random traffic
    for (int c = 0; c < 5000; c++) begin
      in_valid  = ($urandom % 3) != 0;
      in_data   = 16'($urandom);
      out_ready = ($urandom % 3) != 0;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        if (model.size() == 0 || out_data != model[0]) begin
          failures++; $display("ERROR: data mismatch");
        end
        if (model.size() != 0) void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
      checks++;
      if ((model.size() != 0) != out_valid) begin failures++; $display("ERROR: valid flag"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
