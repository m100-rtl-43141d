// tpb_cluster: a cluster of four TPBs sharing instruction, ring and CPU
// resources.
//
// The cluster's ICB node takes instructions addressed to any of its four
// TPBs off the instruction chain and queues them in the cluster
// instruction queue, which dispatches them to the TPBs' functional units
// as they become ready. The DRB node delivers broadcast ring data to the
// TPBs' ring terminals. The cluster CPU (outside this module, a licensed
// RISC-V vector core) serves CSU interrupts through the VCIX multiplexer
// and reaches each TPB's HBSM and CSU registers through it. tpb_idle tells
// the CCB barrier that a TPB has no queued and no running instruction.
//
// Structure follows the source's cluster figure. The cluster NoC and its
// mesh ports are not built (their design is not given), so TPBs of one
// cluster exchange data here only through the ring and the CPU.
module tpb_cluster
  import m100_pkg::*;
#(
  parameter int unsigned IDX        = 0,
  parameter int unsigned BANK_WORDS = 2048,
  parameter int unsigned RD_LAT     = 20,
  parameter int unsigned CIQ_DEPTH  = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  icb_beat_t  icb_in,
  output logic       icb_in_ready,
  output icb_beat_t  icb_out,
  input  logic       icb_out_ready,
  input  drb_flit_t  drb_in,
  output logic       drb_in_ready,
  output drb_flit_t  drb_out,
  input  logic       drb_out_ready,
  output logic       cpu_irq,
  output logic [1:0] cpu_irq_id,
  input  logic [1:0] cpu_sel,
  input  cpu_req_t   cpu_req,
  output cpu_rsp_t   cpu_rsp,
  output logic [TPB_PER_CLUSTER-1:0] tpb_idle,
  output logic       icb_busy
);
  logic      push, q_ready;
  logic [TPB_PER_CLUSTER-1:0] push_mask, inst_valid, pending, busy, irq;
  logic [TPB_PER_CLUSTER-1:0] drb_v, drb_r;
  tpb_inst_t push_inst;
  tpb_inst_t [TPB_PER_CLUSTER-1:0] inst;
  logic [TPB_PER_CLUSTER-1:0][N_FU-1:0] fu_ready;
  drb_flit_t tpb_flit;
  cpu_req_t [TPB_PER_CLUSTER-1:0] t_req;
  cpu_rsp_t [TPB_PER_CLUSTER-1:0] t_rsp;

  icb_node #(.IDX(IDX)) u_icb (.clk, .rst_n, .in_beat(icb_in), .in_ready(icb_in_ready),
    .out_beat(icb_out), .out_ready(icb_out_ready), .push, .push_mask, .push_inst,
    .q_ready, .busy(icb_busy));

  ciq #(.DEPTH(CIQ_DEPTH)) u_ciq (.clk, .rst_n, .push, .push_mask, .push_inst,
    .ready(q_ready), .fu_ready, .inst_valid, .inst, .pending);

  drb_node #(.IDX(IDX)) u_drb (.clk, .rst_n, .in_flit(drb_in), .in_ready(drb_in_ready),
    .out_flit(drb_out), .out_ready(drb_out_ready), .tpb_valid(drb_v), .tpb_flit,
    .tpb_ready(drb_r));

  cvm u_cvm (.clk, .rst_n, .tpb_irq(irq), .cpu_irq, .cpu_irq_id, .cpu_sel, .cpu_req,
    .cpu_rsp, .tpb_req(t_req), .tpb_rsp(t_rsp));

  for (genvar t = 0; t < int'(TPB_PER_CLUSTER); t++) begin : g_tpb
    tpb #(.BANK_WORDS(BANK_WORDS), .RD_LAT(RD_LAT)) u_tpb (
      .clk, .rst_n, .inst_valid(inst_valid[t]), .inst(inst[t]), .fu_ready(fu_ready[t]),
      .busy(busy[t]), .drb_valid(drb_v[t]), .drb_flit(tpb_flit), .drb_ready(drb_r[t]),
      .cpu_req(t_req[t]), .cpu_rsp(t_rsp[t]), .csu_irq(irq[t]));
    assign tpb_idle[t] = !busy[t] && !pending[t] && !(icb_busy);
  end
endmodule
