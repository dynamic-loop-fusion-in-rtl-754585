// sync_fifo: the latency-insensitive FIFO channel that connects the decoupled
// units (AGU -> DU requests, DU -> CU load values, CU -> DU store values).
//
// A circular buffer of DEPTH entries with valid/ready handshakes on both
// sides. Data written in a cycle is visible at the output from the next cycle
// (one cycle of latency); a full FIFO accepts a write in the same cycle as a
// read. The FIFO discipline follows the paper ("All communication is FIFO
// based"); depth, width and the handshake are this design's choices.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;
  logic [PW:0]      count;

  wire do_rd = out_valid && out_ready;
  wire do_wr = in_valid && in_ready;

  assign out_valid = (count != 0);
  assign in_ready  = (count != (PW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      count <= count + (PW+1)'(do_wr) - (PW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= in_data;
  end

  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH);
  endproperty
  assert property (p_no_overflow);

endmodule
