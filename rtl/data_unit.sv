// data_unit: the Data Unit (DU) that protects one base pointer shared by
// several decoupled loops. It has one port per program load and store and the
// compiler-specialised hazard checks between them.
//
// Every load checks every enabled RAW pair (against a store), every store its
// enabled WAR pairs (against loads) and WAW pairs (against other stores). A
// request proceeds only when all its pairs are safe. The check of each pair
// uses the destination's REQ registers and the source's ACK registers, except
// for RAW pairs with forwarding (cfg.fwd), which use the store's frontier (its
// next request) instead; for those the load also searches the store's pending
// buffer with its own address and takes the youngest valid match. At most one
// store can hold a forwardable value for a given load (the paper's argument:
// the WAW check orders the stores), so the hits of several stores are merged
// by priority.
//
// The set of pairs, their shared loop depth, topological order, monotonicity
// information and forwarding are compile-time parameters, one pair_cfg_t per
// (destination, source). Pruned pairs have en = 0. The paper's compiler
// produces this configuration; here it is written by hand for each program,
// and the defaults are the table of the top level's example program.
//
// Interfaces: per port an AGU request channel, a CU value channel and a
// memory request/response channel (tags index the port's pending buffer), all
// valid/ready. Event outputs pulse for one cycle and are meant for counting.
// Timing: the checks are combinational on registered state, so a request
// whose checks pass moves in the cycle after it reached the REQ registers.
module data_unit
  import du_pkg::*;
  import dlf_cfg_pkg::*;
#(
  parameter int unsigned NUM_LD = 2,
  parameter int unsigned NUM_ST = 1,
  parameter int unsigned PEND   = PEND_DEPTH,
  // Defaults: the pair table of the example program (dlf_cfg_pkg).
  parameter pair_cfg_t [NUM_LD-1:0][NUM_ST-1:0] RAW_CFG = {RAW_LD1_ST0, RAW_LD0_ST0},  // [load][store]
  parameter pair_cfg_t [NUM_ST-1:0][NUM_LD-1:0] WAR_CFG = {WAR_ST0_LD1, WAR_ST0_LD0},  // [store][load]
  parameter pair_cfg_t [NUM_ST-1:0][NUM_ST-1:0] WAW_CFG = '0   // [store][other store]
) (
  input  logic clk,
  input  logic rst_n,
  // load ports
  input  logic       [NUM_LD-1:0] ld_agu_valid,
  output logic       [NUM_LD-1:0] ld_agu_ready,
  input  mem_req_t   [NUM_LD-1:0] ld_agu_req,
  output logic       [NUM_LD-1:0] ld_val_valid,
  input  logic       [NUM_LD-1:0] ld_val_ready,
  output data_t      [NUM_LD-1:0] ld_val,
  output logic       [NUM_LD-1:0] ld_mem_req_valid,
  input  logic       [NUM_LD-1:0] ld_mem_req_ready,
  output dram_req_t  [NUM_LD-1:0] ld_mem_req,
  input  logic       [NUM_LD-1:0] ld_mem_resp_valid,
  input  dram_resp_t [NUM_LD-1:0] ld_mem_resp,
  // store ports
  input  logic       [NUM_ST-1:0] st_agu_valid,
  output logic       [NUM_ST-1:0] st_agu_ready,
  input  mem_req_t   [NUM_ST-1:0] st_agu_req,
  input  logic       [NUM_ST-1:0] st_val_valid,
  output logic       [NUM_ST-1:0] st_val_ready,
  input  st_val_t    [NUM_ST-1:0] st_val,
  output logic       [NUM_ST-1:0] st_mem_req_valid,
  input  logic       [NUM_ST-1:0] st_mem_req_ready,
  output dram_req_t  [NUM_ST-1:0] st_mem_req,
  input  logic       [NUM_ST-1:0] st_mem_resp_valid,
  input  dram_resp_t [NUM_ST-1:0] st_mem_resp,
  // status and events
  output logic                    finished,     // every port has seen its sentinel and drained
  output logic       [NUM_LD-1:0] ev_ld_stall,
  output logic       [NUM_LD-1:0] ev_ld_fwd,
  output logic       [NUM_LD-1:0] ev_ld_po,     // request made safe by the program-order check (a shared-loop pair)
  output logic       [NUM_LD-1:0] ev_ld_addr,   // request made safe only by the address check on some pair
  output logic       [NUM_LD-1:0] ev_ld_nodep,  // request made safe only by NoDependence on some pair
  output logic       [NUM_ST-1:0] ev_st_stall,
  output logic       [NUM_ST-1:0] ev_st_invalid,
  output logic       [NUM_ST-1:0] ev_st_addr    // store made safe only by the address check on some pair
);
  // per-port state seen by the checks
  logic      [NUM_LD-1:0] ld_req_valid, ld_no_pending, ld_finished;
  mem_req_t  [NUM_LD-1:0] ld_req;
  progress_t [NUM_LD-1:0] ld_ack;
  logic      [NUM_ST-1:0] st_req_valid, st_no_pending, st_finished;
  mem_req_t  [NUM_ST-1:0] st_req;
  progress_t [NUM_ST-1:0] st_ack, st_front;

  // search ports: store s, searched by load l
  addr_t [NUM_LD-1:0] ld_key;
  logic  [NUM_ST-1:0][NUM_LD-1:0] st_hit;
  data_t [NUM_ST-1:0][NUM_LD-1:0] st_hdata;

  // pair results
  logic [NUM_LD-1:0][NUM_ST-1:0] raw_safe, raw_po, raw_addr, raw_nd;
  logic [NUM_ST-1:0][NUM_LD-1:0] war_safe, war_po, war_addr, war_nd;
  logic [NUM_ST-1:0][NUM_ST-1:0] waw_safe, waw_po, waw_addr, waw_nd;

  logic  [NUM_LD-1:0] ld_safe, ld_fwd_hit, ld_stall_i;
  data_t [NUM_LD-1:0] ld_fwd_data;
  logic  [NUM_ST-1:0] st_safe, st_stall_i;

  // ---------------------------------------------------------------- checks
  for (genvar l = 0; l < NUM_LD; l++) begin : g_raw
    assign ld_key[l] = ld_req[l].addr;
    for (genvar s = 0; s < NUM_ST; s++) begin : g_st
      hazard_check #(.CFG(RAW_CFG[l][s])) u_chk (
        .a_req       (ld_req[l]),
        .b_prog      (RAW_CFG[l][s].fwd ? st_front[s] : st_ack[s]),
        .b_req_valid (st_req_valid[s]),
        .b_req_sched (st_req[s].sched),
        .b_no_pending(st_no_pending[s]),
        .safe(raw_safe[l][s]), .po_safe(raw_po[l][s]),
        .addr_safe(raw_addr[l][s]), .nodep_safe(raw_nd[l][s])
      );
    end
  end

  for (genvar s = 0; s < NUM_ST; s++) begin : g_war
    for (genvar l = 0; l < NUM_LD; l++) begin : g_ld
      hazard_check #(.CFG(WAR_CFG[s][l])) u_chk (
        .a_req       (st_req[s]),
        .b_prog      (ld_ack[l]),
        .b_req_valid (ld_req_valid[l]),
        .b_req_sched (ld_req[l].sched),
        .b_no_pending(ld_no_pending[l]),
        .safe(war_safe[s][l]), .po_safe(war_po[s][l]),
        .addr_safe(war_addr[s][l]), .nodep_safe(war_nd[s][l])
      );
    end
    for (genvar t = 0; t < NUM_ST; t++) begin : g_waw
      if (t == s) begin : g_self
        assign waw_safe[s][t] = 1'b1;
        assign waw_po[s][t]   = 1'b1;
        assign waw_addr[s][t] = 1'b0;
        assign waw_nd[s][t]   = 1'b0;
      end else begin : g_other
        hazard_check #(.CFG(WAW_CFG[s][t])) u_chk (
          .a_req       (st_req[s]),
          .b_prog      (st_ack[t]),
          .b_req_valid (st_req_valid[t]),
          .b_req_sched (st_req[t].sched),
          .b_no_pending(st_no_pending[t]),
          .safe(waw_safe[s][t]), .po_safe(waw_po[s][t]),
          .addr_safe(waw_addr[s][t]), .nodep_safe(waw_nd[s][t])
        );
      end
    end
  end

  always_comb begin
    for (int l = 0; l < NUM_LD; l++) begin
      ld_safe[l]     = &raw_safe[l];
      ld_fwd_hit[l]  = 1'b0;
      ld_fwd_data[l] = '0;
      for (int s = NUM_ST-1; s >= 0; s--) begin
        if (RAW_CFG[l][s].en && RAW_CFG[l][s].fwd && st_hit[s][l]) begin
          ld_fwd_hit[l]  = 1'b1;
          ld_fwd_data[l] = st_hdata[s][l];
        end
      end
    end
    for (int s = 0; s < NUM_ST; s++) st_safe[s] = (&war_safe[s]) && (&waw_safe[s]);
  end

  // ---------------------------------------------------------------- ports
  for (genvar l = 0; l < NUM_LD; l++) begin : g_ld_port
    load_port #(.PEND(PEND)) u_ld (
      .clk, .rst_n,
      .agu_valid(ld_agu_valid[l]), .agu_ready(ld_agu_ready[l]), .agu_req(ld_agu_req[l]),
      .val_valid(ld_val_valid[l]), .val_ready(ld_val_ready[l]), .val(ld_val[l]),
      .hz_safe(ld_safe[l]), .fwd_hit(ld_fwd_hit[l]), .fwd_data(ld_fwd_data[l]),
      .req_valid(ld_req_valid[l]), .req(ld_req[l]), .ack(ld_ack[l]),
      .no_pending(ld_no_pending[l]), .finished(ld_finished[l]),
      .mem_req_valid(ld_mem_req_valid[l]), .mem_req_ready(ld_mem_req_ready[l]),
      .mem_req(ld_mem_req[l]), .mem_resp_valid(ld_mem_resp_valid[l]), .mem_resp(ld_mem_resp[l]),
      .ev_stall(ld_stall_i[l]), .ev_fwd(ev_ld_fwd[l])
    );
  end

  for (genvar s = 0; s < NUM_ST; s++) begin : g_st_port
    store_port #(.NUM_SEARCH(NUM_LD), .PEND(PEND)) u_st (
      .clk, .rst_n,
      .agu_valid(st_agu_valid[s]), .agu_ready(st_agu_ready[s]), .agu_req(st_agu_req[s]),
      .val_valid(st_val_valid[s]), .val_ready(st_val_ready[s]), .val(st_val[s]),
      .hz_safe(st_safe[s]),
      .req_valid(st_req_valid[s]), .req(st_req[s]), .ack(st_ack[s]), .frontier(st_front[s]),
      .no_pending(st_no_pending[s]), .finished(st_finished[s]),
      .search_addr(ld_key), .search_hit(st_hit[s]), .search_data(st_hdata[s]),
      .mem_req_valid(st_mem_req_valid[s]), .mem_req_ready(st_mem_req_ready[s]),
      .mem_req(st_mem_req[s]), .mem_resp_valid(st_mem_resp_valid[s]), .mem_resp(st_mem_resp[s]),
      .ev_stall(st_stall_i[s]), .ev_invalid(ev_st_invalid[s])
    );
  end

  // ---------------------------------------------------------------- events
  always_comb begin
    for (int l = 0; l < NUM_LD; l++) begin
      logic go;
      go = ld_req_valid[l] && !is_sentinel(ld_req[l].sched) && ld_safe[l] && ld_agu_ready[l];
      ev_ld_po[l]    = 1'b0;
      ev_ld_addr[l]  = 1'b0;
      ev_ld_nodep[l] = 1'b0;
      for (int s = 0; s < NUM_ST; s++) begin
        if (go && RAW_CFG[l][s].en && RAW_CFG[l][s].k != 0 && raw_po[l][s]) ev_ld_po[l] = 1'b1;
        if (go && RAW_CFG[l][s].en && !raw_po[l][s] && raw_addr[l][s]) ev_ld_addr[l] = 1'b1;
        if (go && RAW_CFG[l][s].en && !raw_po[l][s] && !raw_addr[l][s] && raw_nd[l][s]) ev_ld_nodep[l] = 1'b1;
      end
    end
    for (int s = 0; s < NUM_ST; s++) begin
      logic go;
      go = st_req_valid[s] && !is_sentinel(st_req[s].sched) && st_safe[s] && st_val_valid[s] && st_agu_ready[s];
      ev_st_addr[s] = 1'b0;
      for (int l = 0; l < NUM_LD; l++)
        if (go && WAR_CFG[s][l].en && !war_po[s][l] && war_addr[s][l]) ev_st_addr[s] = 1'b1;
      for (int t = 0; t < NUM_ST; t++)
        if (go && t != s && WAW_CFG[s][t].en && !waw_po[s][t] && waw_addr[s][t]) ev_st_addr[s] = 1'b1;
    end
  end

  assign ev_ld_stall = ld_stall_i;
  assign ev_st_stall = st_stall_i;
  assign finished    = (&ld_finished) && (&st_finished);

endmodule
