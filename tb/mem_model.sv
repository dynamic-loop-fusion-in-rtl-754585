// mem_model: behavioural stand-in for the coalescing LSUs, the DRAM
// interconnect and the DRAM, for simulation only.
//
// NUM_PORTS independent request/response channels share one word array of
// WORDS entries (addresses wrap modulo WORDS). Each port accepts a request
// when req_ready is high (ready toggles pseudo-randomly) and answers it after
// a pseudo-random latency of MIN_LAT..MAX_LAT cycles, in order per port, with
// the request's tag. A read samples the array when it is accepted; a write
// changes the array only when its ACK is sent. This makes any read issued
// before the ACK of a conflicting write return the old value, so hazards the
// Data Unit fails to stop show up as wrong data. The array starts at
// mem[a] = INIT_MUL*a + INIT_ADD.
module mem_model
  import du_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 3,
  parameter int unsigned WORDS     = 1024,
  parameter int unsigned MIN_LAT   = 1,
  parameter int unsigned MAX_LAT   = 24,
  parameter int unsigned INIT_MUL  = 7,
  parameter int unsigned INIT_ADD  = 3
) (
  input  logic clk,
  input  logic rst_n,
  input  logic       [NUM_PORTS-1:0] req_valid,
  output logic       [NUM_PORTS-1:0] req_ready,
  input  dram_req_t  [NUM_PORTS-1:0] req,
  output logic       [NUM_PORTS-1:0] resp_valid,
  output dram_resp_t [NUM_PORTS-1:0] resp
);
  typedef struct {
    longint unsigned due;
    logic            we;
    int unsigned     a;
    data_t           wdata;
    data_t           rdata;
    tag_t            tag;
  } item_t;

  data_t           mem [WORDS];
  item_t           q   [NUM_PORTS][$];
  longint unsigned cyc;
  longint unsigned last_due [NUM_PORTS];

  initial begin
    for (int a = 0; a < WORDS; a++) mem[a] = data_t'(INIT_MUL * a + INIT_ADD);
    cyc = 0;
    for (int p = 0; p < NUM_PORTS; p++) last_due[p] = 0;
  end

  function automatic data_t peek(input int unsigned a);
    return mem[a % WORDS];
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst_n) begin
      resp_valid <= '0;
      req_ready  <= '0;
      for (int p = 0; p < NUM_PORTS; p++) q[p].delete();
    end else begin
      for (int p = 0; p < NUM_PORTS; p++) begin
        resp_valid[p] <= 1'b0;
        if (q[p].size() > 0 && q[p][0].due <= cyc) begin
          item_t it;
          it = q[p].pop_front();
          if (it.we) mem[it.a] = it.wdata;
          resp_valid[p]  <= 1'b1;
          resp[p].tag    <= it.tag;
          resp[p].rdata  <= it.we ? '0 : it.rdata;
        end
        if (req_valid[p] && req_ready[p]) begin
          item_t it;
          longint unsigned due;
          it.we    = req[p].we;
          it.a     = int'(req[p].addr) % WORDS;
          it.wdata = req[p].wdata;
          it.rdata = mem[it.a];
          it.tag   = req[p].tag;
          due      = cyc + longint'(MIN_LAT + ($urandom % (MAX_LAT - MIN_LAT + 1)));
          if (due <= last_due[p]) due = last_due[p] + 1;
          it.due      = due;
          last_due[p] = due;
          q[p].push_back(it);
        end
        req_ready[p] <= ($urandom % 4) != 0;
      end
    end
  end

endmodule
