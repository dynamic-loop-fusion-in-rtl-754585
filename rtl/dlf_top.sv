// dlf_top: two decoupled loop processing elements sharing one array through a
// Data Unit (the paper's streaming architecture of AGUs, DU and CUs).
//
//   AGU 0 (PE 0, loops i/j) --ld0, st0 requests--> FIFOs --> DU load port 0, store port 0
//   AGU 1 (PE 1, loops i/k) --ld1 requests-------> FIFO  --> DU load port 1
//   DU --ld0/ld1 values--> CUs (outside),  CUs --st0 values (+valid bit)--> DU
//   DU --per-port memory channels--> coalescing LSUs / DRAM (outside)
//
// The CUs, the coalescing LSUs and the DRAM are not part of this module; their
// channels are ports. The hazard-pair configuration defaults to the example in
// dlf_cfg_pkg (ld0 and st0 a read-modify-write in the j-loop, ld1 a read in the
// sibling k-loop, both under a shared i-loop). Loop trip counts and the affine
// address of each operation, addr = base + i*stride_i + inner*stride_inner,
// are run-time inputs sampled at start; the i-loop trip count is shared by
// both AGUs as both replicate the same outer loop.
//
// Timing: start pulses once with the configuration stable until finished.
// finished rises when both AGUs have sent their sentinels and every DU port
// has drained.
module dlf_top
  import du_pkg::*;
  import dlf_cfg_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,          // AGU -> DU request FIFOs (assumed)
  parameter int unsigned PEND       = PEND_DEPTH,
  parameter pair_cfg_t [1:0][0:0] RAW_CFG = {RAW_LD1_ST0, RAW_LD0_ST0},
  parameter pair_cfg_t [0:0][1:0] WAR_CFG = {WAR_ST0_LD1, WAR_ST0_LD0},
  parameter pair_cfg_t [0:0][0:0] WAW_CFG = '0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic [31:0] n_outer,            // i-loop trip count
  input  logic [31:0] n_inner0,           // j-loop trip count (PE 0)
  input  logic [31:0] n_inner1,           // k-loop trip count (PE 1)
  input  addr_t [2:0] base,               // [0] ld0, [1] st0, [2] ld1
  input  logic  [2:0][31:0] stride_outer,
  input  logic  [2:0][31:0] stride_inner,
  // CU channels
  output logic       [1:0] ld_val_valid,
  input  logic       [1:0] ld_val_ready,
  output data_t      [1:0] ld_val,
  input  logic             st_val_valid,
  output logic             st_val_ready,
  input  st_val_t          st_val,
  // memory channels, [0] ld0, [1] ld1 / store st0
  output logic       [1:0] ld_mem_req_valid,
  input  logic       [1:0] ld_mem_req_ready,
  output dram_req_t  [1:0] ld_mem_req,
  input  logic       [1:0] ld_mem_resp_valid,
  input  dram_resp_t [1:0] ld_mem_resp,
  output logic             st_mem_req_valid,
  input  logic             st_mem_req_ready,
  output dram_req_t        st_mem_req,
  input  logic             st_mem_resp_valid,
  input  dram_resp_t       st_mem_resp,
  // status and events
  output logic       finished,
  output logic [1:0] ev_ld_stall,
  output logic [1:0] ev_ld_fwd,
  output logic [1:0] ev_ld_po,
  output logic [1:0] ev_ld_addr,
  output logic [1:0] ev_ld_nodep,
  output logic       ev_st_stall,
  output logic       ev_st_invalid,
  output logic       ev_st_addr
);
  localparam int unsigned RW = $bits(mem_req_t);

  // ------------------------------------------------------------ AGUs
  logic     [1:0] a0_valid, a0_ready;
  mem_req_t [1:0] a0_req;
  logic     [0:0] a1_valid, a1_ready;
  mem_req_t [0:0] a1_req;
  logic a0_busy, a0_done, a1_busy, a1_done;

  agu #(.DEPTH(2), .NUM_OPS(2), .NODEP_STORE(1), .NODEP_LOADS(2'b01)) u_agu0 (
    .clk, .rst_n, .start,
    .trip  ({n_inner0, n_outer}),        // [0] = outermost depth
    .base  ({base[1], base[0]}),
    .stride({{stride_inner[1], stride_outer[1]}, {stride_inner[0], stride_outer[0]}}),
    .req_valid(a0_valid), .req_ready(a0_ready), .req(a0_req),
    .busy(a0_busy), .done(a0_done)
  );

  agu #(.DEPTH(2), .NUM_OPS(1)) u_agu1 (
    .clk, .rst_n, .start,
    .trip  ({n_inner1, n_outer}),
    .base  (base[2]),
    .stride({stride_inner[2], stride_outer[2]}),
    .req_valid(a1_valid), .req_ready(a1_ready), .req(a1_req),
    .busy(a1_busy), .done(a1_done)
  );

  // ------------------------------------------------------------ request FIFOs
  logic     [1:0] ld_q_valid, ld_q_ready;
  mem_req_t [1:0] ld_q;
  logic           st_q_valid, st_q_ready;
  mem_req_t       st_q;

  sync_fifo #(.WIDTH(RW), .DEPTH(FIFO_DEPTH)) u_q_ld0 (
    .clk, .rst_n, .in_valid(a0_valid[0]), .in_ready(a0_ready[0]), .in_data(a0_req[0]),
    .out_valid(ld_q_valid[0]), .out_ready(ld_q_ready[0]), .out_data(ld_q[0]));
  sync_fifo #(.WIDTH(RW), .DEPTH(FIFO_DEPTH)) u_q_st0 (
    .clk, .rst_n, .in_valid(a0_valid[1]), .in_ready(a0_ready[1]), .in_data(a0_req[1]),
    .out_valid(st_q_valid), .out_ready(st_q_ready), .out_data(st_q));
  sync_fifo #(.WIDTH(RW), .DEPTH(FIFO_DEPTH)) u_q_ld1 (
    .clk, .rst_n, .in_valid(a1_valid[0]), .in_ready(a1_ready[0]), .in_data(a1_req[0]),
    .out_valid(ld_q_valid[1]), .out_ready(ld_q_ready[1]), .out_data(ld_q[1]));

  // ------------------------------------------------------------ Data Unit
  logic du_finished;

  data_unit #(
    .NUM_LD(2), .NUM_ST(1), .PEND(PEND),
    .RAW_CFG(RAW_CFG), .WAR_CFG(WAR_CFG), .WAW_CFG(WAW_CFG)
  ) u_du (
    .clk, .rst_n,
    .ld_agu_valid(ld_q_valid), .ld_agu_ready(ld_q_ready), .ld_agu_req(ld_q),
    .ld_val_valid, .ld_val_ready, .ld_val,
    .ld_mem_req_valid, .ld_mem_req_ready, .ld_mem_req, .ld_mem_resp_valid, .ld_mem_resp,
    .st_agu_valid(st_q_valid), .st_agu_ready(st_q_ready), .st_agu_req(st_q),
    .st_val_valid, .st_val_ready, .st_val,
    .st_mem_req_valid, .st_mem_req_ready, .st_mem_req, .st_mem_resp_valid, .st_mem_resp,
    .finished(du_finished),
    .ev_ld_stall, .ev_ld_fwd, .ev_ld_po, .ev_ld_addr, .ev_ld_nodep,
    .ev_st_stall, .ev_st_invalid, .ev_st_addr
  );

  assign finished = a0_done && a1_done && du_finished;

  logic unused_busy;
  assign unused_busy = a0_busy ^ a1_busy;

endmodule
