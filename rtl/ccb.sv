// ccb: Central Control Block of the NPU.
//
// The control centre. Four CPU cores (licensed RISC-V vector cores, outside
// this RTL) each drive a custom engine that hands complete TPB
// instructions, with a TPB destination mask, to the ICB master, which
// serialises them onto the instruction chain. The 32 MB SRAM (four 8 MB
// banks, 4 KB interleave) holds data close to the TPBs; two DMA engines
// move data between DDR (one AXI-side master port each) and the SRAM, or
// read from either and broadcast onto the Data Ring Bus. The barrier unit
// lets each engine wait until a group of TPBs has finished; barrier
// releases and DMA completions set interrupt status bits in the interrupt
// generator, which can interrupt the host and the CCB CPUs.
// SRAM ports: 0 = DMA 0, 1 = DMA 1, 2 = external access (host / CPU side).
// Interrupt events: bits 0-3 = barrier done for engine 0-3, 4-5 = DMA 0/1
// done.
//
// Structure follows the source's CCB figure; the internal NoC (a vendor
// interconnect) is replaced by direct connections, and the DDR masters use
// the design's simple word-wide port instead of AXI.
module ccb
  import m100_pkg::*;
#(
  parameter int unsigned SRAM_BANK_WORDS = 262144
) (
  input  logic       clk,
  input  logic       rst_n,
  // custom engines (driven by the CCB CPU cores)
  input  logic [N_ENGINES-1:0]            eng_valid,
  input  logic [N_ENGINES-1:0][N_TPB-1:0] eng_mask,
  input  tpb_inst_t  [N_ENGINES-1:0]      eng_inst,
  output logic [N_ENGINES-1:0]            eng_ready,
  input  logic [N_ENGINES-1:0]            bar_req,
  input  logic [N_ENGINES-1:0][N_TPB-1:0] bar_mask,
  output logic [N_ENGINES-1:0]            bar_done,
  // DMA descriptors
  input  logic [1:0]      dma_valid,
  input  dma_desc_t [1:0] dma_desc,
  output logic [1:0]      dma_ready,
  output logic [1:0]      dma_done,
  // DDR masters
  output mreq_t [1:0]     ddr_req,
  input  mrsp_t [1:0]     ddr_rsp,
  // external access to the SRAM
  input  mreq_t           ext_req,
  output mrsp_t           ext_rsp,
  // control registers
  input  logic            reg_valid,
  input  logic            reg_we,
  input  logic [1:0]      reg_addr,
  input  logic [31:0]     reg_wdata,
  output logic [31:0]     reg_rdata,
  output logic            irq_host,
  output logic            irq_ccb,
  // buses
  output icb_beat_t       icb_out,
  input  logic            icb_out_ready,
  output drb_flit_t       drb_out,
  input  logic            drb_out_ready,
  input  drb_flit_t       drb_ret,
  output logic            drb_ret_ready,
  input  logic [N_TPB-1:0] tpb_idle,
  input  logic            chain_busy
);
  mreq_t [2:0] s_req;
  mrsp_t [2:0] s_rsp;
  drb_flit_t [1:0] dflit;
  logic [1:0] dgnt, dready;
  logic       dgidx, icb_busy;
  logic [15:0] events;

  ccb_sram #(.NP(3), .BANK_WORDS(SRAM_BANK_WORDS)) u_sram (.clk, .rst_n,
    .req(s_req), .rsp(s_rsp));
  assign s_req[2] = ext_req;
  assign ext_rsp  = s_rsp[2];

  for (genvar i = 0; i < 2; i++) begin : g_dma
    ccb_dma u_dma (.clk, .rst_n, .desc_valid(dma_valid[i]), .desc(dma_desc[i]),
      .desc_ready(dma_ready[i]), .done(dma_done[i]), .ddr_req(ddr_req[i]),
      .ddr_rsp(ddr_rsp[i]), .sram_req(s_req[i]), .sram_rsp(s_rsp[i]),
      .drb_out(dflit[i]), .drb_ready(dready[i]));
  end

  // two DMA engines share the ring entry point
  rr_arb #(.N(2)) u_darb (.clk, .rst_n, .req({dflit[1].valid, dflit[0].valid}),
    .advance(drb_out_ready), .gnt(dgnt), .gnt_idx(dgidx));
  assign drb_out   = dflit[dgidx] & {$bits(drb_flit_t){|dgnt}};
  assign dready    = dgnt & {2{drb_out_ready}};
  assign drb_ret_ready = 1'b1;   // flits that come back around are dropped

  icb_master u_icbm (.clk, .rst_n, .eng_valid, .eng_mask, .eng_inst, .eng_ready,
    .out_beat(icb_out), .out_ready(icb_out_ready), .busy(icb_busy));

  barrier_unit u_bar (.clk, .rst_n, .bar_req, .bar_mask, .bar_done,
    .tpb_idle, .icb_busy(icb_busy || chain_busy || (|eng_valid)));

  assign events = {10'd0, dma_done, bar_done};
  irq_gen #(.NEV(16)) u_irq (.clk, .rst_n, .events, .reg_valid, .reg_we, .reg_addr,
    .reg_wdata, .reg_rdata, .irq_host, .irq_ccb);

  logic unused;
  assign unused = ^drb_ret;
endmodule
