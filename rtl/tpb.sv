// tpb: Tensor Processing Block.
//
// The TPB's functional units all stream tensors to and from one banked
// shared memory (HBSM) and coordinate through one Synchronization Unit:
//   TCU  matrix engine          HBSM ports 0 (read), 1 (write)
//   CVU  vector operators       ports 2, 3 (read a, b), 4 (write)
//   DTDU data transformation    ports 5 (read), 6 (write)
//   custom engine + DRB terminal port 7 (CPU accesses, ring writes)
//   CSU  CPU starter            interrupt to the cluster CPU
//   SU   synchronization counters: updated by HBSM grants (sync tied to
//        memory access), by the CSU and by sync-only ring flits; monitored
//        by TCU, CVU, DTDU and CSU.
// Instructions arrive one at a time from the cluster instruction queue;
// inst.fu selects the unit, which must be ready (fu_ready). Each unit runs
// its instructions in arrival order; different units run concurrently, and
// their order is set only by the counters the instructions wait on and
// update. An SU instruction (SU_SET) sets counter upd_sc to imm[15:0].
//
// The unit set, the shared memory, counter-based synchronization and the
// interrupt / custom-engine path follow the source. The assignment of HBSM
// ports to units is this design's choice (the source gives 8 ports but not
// their users). The Gather/Scatter DMA is not built.
module tpb
  import m100_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned RD_LAT     = 20
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  input  tpb_inst_t   inst,
  output logic [N_FU-1:0] fu_ready,
  output logic        busy,
  input  logic        drb_valid,
  input  drb_flit_t   drb_flit,
  output logic        drb_ready,
  input  cpu_req_t    cpu_req,
  output cpu_rsp_t    cpu_rsp,
  output logic        csu_irq
);
  mreq_t [7:0] req;
  mrsp_t [7:0] rsp;
  logic  [7:0] hb_upd;
  logic  [7:0][SC_ID_W-1:0] hb_upd_id;
  logic  [3:0][SC_ID_W-1:0] mon_id;
  logic  [3:0][SC_W-1:0]    mon_val;
  logic  [3:0]              mon_ok;
  logic  csu_upd, drb_upd;
  logic  [SC_ID_W-1:0] csu_upd_id, drb_upd_id;
  mreq_t drb_req;
  logic  drb_gnt, csu_rv, csu_we;
  logic  [15:0] csu_addr;
  word_t csu_rdata;
  logic  tcu_mac;
  logic  [NUM_SC-1:0][SC_W-1:0] counters;

  hbsm #(.NP(8), .NBANK(32), .BANK_WORDS(BANK_WORDS), .RD_LAT(RD_LAT)) u_hbsm (
    .clk, .rst_n, .req, .rsp, .sc_upd_valid(hb_upd), .sc_upd_id(hb_upd_id));

  sync_unit #(.N_UPD(10), .N_MON(4)) u_su (
    .clk, .rst_n,
    .upd_valid({drb_upd, csu_upd, hb_upd}),
    .upd_id({drb_upd_id, csu_upd_id, hb_upd_id}),
    .mon_id, .mon_val, .mon_ok,
    .set_valid(inst_valid && inst.fu == FU_SU && inst.op == SU_SET),
    .set_id(inst.upd_sc), .set_val(inst.imm[SC_W-1:0]), .counters);

  tcu u_tcu (.clk, .rst_n, .inst_valid(inst_valid && inst.fu == FU_TCU), .inst,
    .ready(fu_ready[FU_TCU]), .mon_id(mon_id[0]), .mon_val(mon_val[0]), .mon_ok(mon_ok[0]),
    .rd_req(req[0]), .rd_rsp(rsp[0]), .wr_req(req[1]), .wr_rsp(rsp[1]), .mac_active(tcu_mac));

  cvu u_cvu (.clk, .rst_n, .inst_valid(inst_valid && inst.fu == FU_CVU), .inst,
    .ready(fu_ready[FU_CVU]), .mon_id(mon_id[1]), .mon_val(mon_val[1]), .mon_ok(mon_ok[1]),
    .rda_req(req[2]), .rda_rsp(rsp[2]), .rdb_req(req[3]), .rdb_rsp(rsp[3]),
    .wr_req(req[4]), .wr_rsp(rsp[4]));

  dtdu u_dtdu (.clk, .rst_n, .inst_valid(inst_valid && inst.fu == FU_DTDU), .inst,
    .ready(fu_ready[FU_DTDU]), .mon_id(mon_id[2]), .mon_val(mon_val[2]), .mon_ok(mon_ok[2]),
    .rd_req(req[5]), .rd_rsp(rsp[5]), .wr_req(req[6]), .wr_rsp(rsp[6]));

  csu u_csu (.clk, .rst_n, .inst_valid(inst_valid && inst.fu == FU_CSU), .inst,
    .ready(fu_ready[FU_CSU]), .mon_id(mon_id[3]), .mon_val(mon_val[3]), .mon_ok(mon_ok[3]),
    .irq(csu_irq), .reg_valid(csu_rv), .reg_we(csu_we), .reg_addr(csu_addr),
    .reg_rdata(csu_rdata), .upd_valid(csu_upd), .upd_id(csu_upd_id));

  assign fu_ready[FU_SU] = 1'b1;

  drb_terminal u_drbt (.clk, .rst_n, .in_valid(drb_valid), .in_flit(drb_flit),
    .in_ready(drb_ready), .mem_req(drb_req), .mem_gnt(drb_gnt),
    .sc_upd_valid(drb_upd), .sc_upd_id(drb_upd_id));

  custom_engine u_ce (.clk, .rst_n, .cpu_req, .cpu_rsp, .drb_req, .drb_gnt,
    .mem_req(req[7]), .mem_rsp(rsp[7]), .csu_valid(csu_rv), .csu_we, .csu_addr,
    .csu_rdata);

  assign busy = !(&fu_ready);
  logic unused;
  assign unused = ^{tcu_mac, counters};
endmodule
