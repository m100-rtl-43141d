// ccb_dma: one of the CCB's DMA engines.
//
// Executes one descriptor at a time: reads len consecutive 32-byte words
// starting at src_addr from DDR (its AXI-side master port) or from the CCB
// SRAM, and writes them starting at dst_addr to DDR, to the CCB SRAM, or
// onto the Data Ring Bus as flits addressed to the TPBs in drb_dst (their
// HBSM word address counting up from dst_addr). For a ring transfer the
// last flit also carries a synchronization-counter increment when sc_upd is
// set, so the receiving units learn that the whole block has arrived.
// Reads are issued ahead into an FD-word FIFO whenever room is left, so the
// engine keeps one word per cycle moving despite memory latency; 'done'
// pulses when the last word has been written or sent.
//
// The source says two such engines move data between DDR and the CCB SRAM
// and can broadcast weights to TPBs over the ring; the descriptor format,
// the simplified word-wide memory ports standing in for AXI, and the
// read-ahead scheme are this design's choice.
module ccb_dma
  import m100_pkg::*;
#(
  parameter int unsigned FD = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      desc_valid,
  input  dma_desc_t desc,
  output logic      desc_ready,
  output logic      done,
  output mreq_t     ddr_req,
  input  mrsp_t     ddr_rsp,
  output mreq_t     sram_req,
  input  mrsp_t     sram_rsp,
  output drb_flit_t drb_out,
  input  logic      drb_ready
);
  localparam int unsigned CW = $clog2(FD + 1);
  dma_desc_t d_q;
  logic      act_q;
  logic [15:0] rd_cnt_q, wr_cnt_q;
  logic [CW-1:0] outst_q, fcnt;
  logic      fempty, ffull, pop, rd_go, wr_go, rvalid, last_wr;
  word_t     rdata, head;
  mreq_t     rd_r, wr_r;

  assign desc_ready = !act_q;
  assign rvalid = (d_q.src == DMA_DDR) ? ddr_rsp.rvalid : sram_rsp.rvalid;
  assign rdata  = (d_q.src == DMA_DDR) ? ddr_rsp.rdata  : sram_rsp.rdata;

  sync_fifo #(.W(WORD_BITS), .DEPTH(FD)) u_fifo (.clk, .rst_n, .push(rvalid), .din(rdata),
    .pop, .dout(head), .empty(fempty), .full(ffull), .count(fcnt));

  always_comb begin
    rd_r       = '0;
    rd_r.valid = act_q && (rd_cnt_q < d_q.len) && (32'(outst_q) + 32'(fcnt) < FD);
    rd_r.addr  = d_q.src_addr + ADDR_W'(rd_cnt_q);
    wr_r       = '0;
    wr_r.valid = act_q && !fempty && (d_q.dst != DMA_DRB);
    wr_r.we    = 1'b1;
    wr_r.addr  = d_q.dst_addr + ADDR_W'(wr_cnt_q);
    wr_r.wdata = head;
    last_wr    = (wr_cnt_q + 16'd1 == d_q.len);

    drb_out           = '0;
    drb_out.valid     = act_q && !fempty && (d_q.dst == DMA_DRB);
    drb_out.dst       = d_q.drb_dst;
    drb_out.addr      = 16'(d_q.dst_addr + ADDR_W'(wr_cnt_q));
    drb_out.data      = head;
    drb_out.sc_upd    = d_q.sc_upd && last_wr;
    drb_out.sc_id     = d_q.sc_id;

    // the write side has priority on a port both sides use
    ddr_req  = '0;
    sram_req = '0;
    wr_go    = 1'b0;
    rd_go    = 1'b0;
    if (wr_r.valid && d_q.dst == DMA_DDR)       begin ddr_req  = wr_r; wr_go = ddr_rsp.gnt;  end
    else if (wr_r.valid && d_q.dst == DMA_SRAM) begin sram_req = wr_r; wr_go = sram_rsp.gnt; end
    if (drb_out.valid) wr_go = drb_ready;
    if (rd_r.valid) begin
      if (d_q.src == DMA_DDR && !ddr_req.valid)        begin ddr_req  = rd_r; rd_go = ddr_rsp.gnt;  end
      else if (d_q.src == DMA_SRAM && !sram_req.valid) begin sram_req = rd_r; rd_go = sram_rsp.gnt; end
    end
    pop  = wr_go;
    done = wr_go && last_wr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q    <= 1'b0;
      d_q      <= '0;
      rd_cnt_q <= '0;
      wr_cnt_q <= '0;
      outst_q  <= '0;
    end else begin
      outst_q <= outst_q + CW'(rd_go) - CW'(rvalid);
      if (!act_q) begin
        if (desc_valid && desc.len != 0) begin
          act_q    <= 1'b1;
          d_q      <= desc;
          rd_cnt_q <= '0;
          wr_cnt_q <= '0;
        end
      end else begin
        if (rd_go) rd_cnt_q <= rd_cnt_q + 1'b1;
        if (wr_go) begin
          wr_cnt_q <= wr_cnt_q + 1'b1;
          if (last_wr) act_q <= 1'b0;
        end
      end
    end
  end
  logic unused;
  assign unused = ^{ffull, ddr_rsp, sram_rsp};
endmodule
