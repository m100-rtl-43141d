// npu_top: the M100-style NPU.
//
// One Central Control Block (CCB) and N_CL clusters of four Tensor
// Processing Blocks (TPBs). The CCB sends TPB instructions down the
// Instruction Chain Bus, which runs from the CCB through cluster 0, 1, ...,
// N_CL-1 in turn; each cluster queues the instructions meant for its TPBs
// and dispatches them to the functional units as they become ready. The
// CCB's DMA engines broadcast data along the Data Ring Bus, which leaves
// the CCB, passes cluster 0 ... N_CL-1 in the same order and returns to the
// CCB. Inside each TPB, units stream tensors through a shared banked memory
// and coordinate through synchronization counters; the host and the CCB
// are told about barriers and DMA completion by interrupts.
//
// Not built, so brought out as ports: the four CCB CPU cores (their custom
// engine instruction / barrier / DMA-descriptor ports), the cluster CPUs
// (one VCIX-style port and one interrupt per cluster), the DDR side of the
// two AXI masters, the host's access to the CCB SRAM and registers. The
// 2-D mesh bus and the cluster NoCs are not built (their design is not
// given).
//
// Defaults are the source's: 14 clusters, 2 MB HBSM per TPB, 32 MB CCB
// SRAM, 20-cycle HBSM latency (the source says about 20).
module npu_top
  import m100_pkg::*;
#(
  parameter int unsigned N_CL            = N_CLUSTERS,
  parameter int unsigned BANK_WORDS      = 2048,
  parameter int unsigned RD_LAT          = 20,
  parameter int unsigned SRAM_BANK_WORDS = 262144
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [N_ENGINES-1:0]            eng_valid,
  input  logic [N_ENGINES-1:0][N_TPB-1:0] eng_mask,
  input  tpb_inst_t  [N_ENGINES-1:0]      eng_inst,
  output logic [N_ENGINES-1:0]            eng_ready,
  input  logic [N_ENGINES-1:0]            bar_req,
  input  logic [N_ENGINES-1:0][N_TPB-1:0] bar_mask,
  output logic [N_ENGINES-1:0]            bar_done,
  input  logic [1:0]      dma_valid,
  input  dma_desc_t [1:0] dma_desc,
  output logic [1:0]      dma_ready,
  output logic [1:0]      dma_done,
  output mreq_t [1:0]     ddr_req,
  input  mrsp_t [1:0]     ddr_rsp,
  input  mreq_t           ext_req,
  output mrsp_t           ext_rsp,
  input  logic            reg_valid,
  input  logic            reg_we,
  input  logic [1:0]      reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  output logic            irq_host,
  output logic            irq_ccb,
  output logic [N_CL-1:0]       cl_cpu_irq,
  output logic [N_CL-1:0][1:0]  cl_cpu_irq_id,
  input  logic [N_CL-1:0][1:0]  cl_cpu_sel,
  input  cpu_req_t [N_CL-1:0]   cl_cpu_req,
  output cpu_rsp_t [N_CL-1:0]   cl_cpu_rsp
);
  icb_beat_t [N_CL:0] icb;
  logic      [N_CL:0] icb_rdy;
  drb_flit_t [N_CL:0] drb;
  logic      [N_CL:0] drb_rdy;
  logic      [N_CL-1:0] cl_busy;
  logic      [N_CL-1:0][TPB_PER_CLUSTER-1:0] idle;
  logic      [N_TPB-1:0] tpb_idle;

  always_comb begin
    tpb_idle = '1;   // TPBs of clusters not instantiated count as idle
    for (int c = 0; c < int'(N_CL); c++)
      tpb_idle[c*TPB_PER_CLUSTER +: TPB_PER_CLUSTER] = idle[c];
  end
  assign icb_rdy[N_CL] = 1'b1;   // end of the chain

  ccb #(.SRAM_BANK_WORDS(SRAM_BANK_WORDS)) u_ccb (.clk, .rst_n,
    .eng_valid, .eng_mask, .eng_inst, .eng_ready, .bar_req, .bar_mask, .bar_done,
    .dma_valid, .dma_desc, .dma_ready, .dma_done, .ddr_req, .ddr_rsp, .ext_req, .ext_rsp,
    .reg_valid, .reg_we, .reg_addr, .reg_wdata, .reg_rdata, .irq_host, .irq_ccb,
    .icb_out(icb[0]), .icb_out_ready(icb_rdy[0]),
    .drb_out(drb[0]), .drb_out_ready(drb_rdy[0]),
    .drb_ret(drb[N_CL]), .drb_ret_ready(drb_rdy[N_CL]),
    .tpb_idle, .chain_busy(|cl_busy));

  for (genvar c = 0; c < int'(N_CL); c++) begin : g_cl
    tpb_cluster #(.IDX(c), .BANK_WORDS(BANK_WORDS), .RD_LAT(RD_LAT)) u_cl (
      .clk, .rst_n,
      .icb_in(icb[c]), .icb_in_ready(icb_rdy[c]),
      .icb_out(icb[c+1]), .icb_out_ready(icb_rdy[c+1]),
      .drb_in(drb[c]), .drb_in_ready(drb_rdy[c]),
      .drb_out(drb[c+1]), .drb_out_ready(drb_rdy[c+1]),
      .cpu_irq(cl_cpu_irq[c]), .cpu_irq_id(cl_cpu_irq_id[c]), .cpu_sel(cl_cpu_sel[c]),
      .cpu_req(cl_cpu_req[c]), .cpu_rsp(cl_cpu_rsp[c]),
      .tpb_idle(idle[c]), .icb_busy(cl_busy[c]));
  end

  logic unused;
  assign unused = ^icb[N_CL];
endmodule
