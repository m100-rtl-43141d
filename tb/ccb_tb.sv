// ccb_tb: the central control block (SRAM reduced to 1024-word banks).
// DMA 0 fills the SRAM from a DDR model while the external port reads and
// writes other SRAM banks; DMA 1 broadcasts from SRAM onto the ring with
// back-pressure; the four engines push instructions onto the chain while a
// barrier waits for TPB idle flags driven by the test; the interrupt
// generator sees DMA and barrier completions. Checks: SRAM contents, ring
// flits, chain packets (mask and instruction, none lost or interleaved),
// barrier timing, interrupt status and lines.
module ccb_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_ENGINES-1:0]            eng_valid = '0, eng_ready, bar_req = '0, bar_done;
  logic [N_ENGINES-1:0][N_TPB-1:0] eng_mask = '0, bar_mask = '0;
  tpb_inst_t  [N_ENGINES-1:0]      eng_inst = '0;
  logic [1:0]      dma_valid = '0, dma_ready, dma_done;
  dma_desc_t [1:0] dma_desc = '0;
  mreq_t [1:0]     ddr_req;
  mrsp_t [1:0]     ddr_rsp;
  mreq_t           ext_req = '0;
  mrsp_t           ext_rsp;
  logic            reg_valid = 0, reg_we = 0, irq_host, irq_ccb;
  logic [1:0]      reg_addr = 0;
  logic [31:0]     reg_wdata = 0, reg_rdata;
  icb_beat_t icb_out;
  logic icb_out_ready, drb_out_ready, drb_ret_ready, chain_busy = 0;
  drb_flit_t drb_out, drb_ret = '0;
  logic [N_TPB-1:0] tpb_idle = '1;
  int pkts = 0, beat_n = 0, flits = 0;
  logic [INST_BEATS*ICB_W-1:0] flat;
  logic [N_TPB-1:0] hdr;
  word_t flit_q[$];
  typedef struct { logic [N_TPB-1:0] m; tpb_inst_t i; } pkt_t;
  pkt_t sent[$];

  ccb #(.SRAM_BANK_WORDS(1024)) dut (.*);
  tb_mem #(.NP(2), .WORDS(4096), .LAT(40), .STALL(1)) ddr (.clk, .req(ddr_req), .rsp(ddr_rsp));

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    icb_out_ready = ($urandom % 3) != 0;
    drb_out_ready = ($urandom % 3) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < 4; e++) if (eng_valid[e] && eng_ready[e]) begin
      pkt_t p;
      p.m = eng_mask[e]; p.i = eng_inst[e];
      sent.push_back(p);
    end
    if (icb_out.valid && icb_out_ready) begin
      if (beat_n == 0) hdr = N_TPB'(icb_out.data);
      else flat[(beat_n-1)*ICB_W +: ICB_W] = icb_out.data;
      if (icb_out.last) begin
        pkt_t p;
        p = sent.pop_front();
        chk(beat_n == INST_BEATS && hdr == p.m && flat[INST_W-1:0] == p.i, "chain packet");
        beat_n = 0; pkts++;
      end else beat_n++;
    end
    if (drb_out.valid && drb_out_ready) begin
      chk(drb_out.data == flit_q.pop_front() && drb_out.dst == N_TPB'(56'hF0F), "ring flit");
      flits++;
    end
  end

  task automatic dma(input int k, input dma_desc_t d);
    dma_desc[k] = d; dma_valid[k] = 1;
    #1;
    while (!dma_ready[k]) begin @(negedge clk); #1; end
    @(negedge clk);
    dma_valid[k] = 0;
    #1;
    while (!dma_done[k]) begin @(negedge clk); #1; end
    @(negedge clk);
  endtask
  task automatic ext(input mreq_t r);
    ext_req = r;
    #1;
    while (!ext_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    ext_req = '0;
  endtask

  initial begin
    mreq_t r;
    dma_desc_t d;
    for (int a = 0; a < 4096; a++) ddr.mem[a] = {8{$urandom}};
    repeat (50) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    reg_valid = 1; reg_we = 1; reg_addr = 1; reg_wdata = 32'h3F;
    @(negedge clk);
    reg_valid = 0; reg_we = 0;
    fork
      begin
        d = '0; d.src = DMA_DDR; d.dst = DMA_SRAM; d.src_addr = 100; d.dst_addr = 0; d.len = 200;
        dma(0, d);
        for (int i = 0; i < 50; i++) flit_q.push_back(ddr.mem[100 + 10 + i]);
        d = '0; d.src = DMA_SRAM; d.dst = DMA_DRB; d.src_addr = 10; d.len = 50; d.drb_dst = 56'hF0F;
        dma(1, d);
      end
      begin // external port: write then read back words in bank 3
        for (int i = 0; i < 20; i++) begin
          r = '0; r.valid = 1; r.we = 1; r.addr = 384 + i; r.wdata = {8{32'(i * 7)}};
          ext(r);
        end
        for (int i = 0; i < 20; i++) begin
          r = '0; r.valid = 1; r.addr = 384 + i;
          ext(r);
          chk(ext_rsp.rvalid && ext_rsp.rdata == {8{32'(i * 7)}}, "external read");
        end
      end
      begin // engines
        for (int n = 0; n < 12; n++) begin
          int e;
          e = n % 4;
          eng_mask[e] = {$urandom, $urandom};
          eng_inst[e] = mk(fu_e'(e), 4'($urandom), lin(n, 5), '0, '0, $urandom, 0, 0, 0, 1, n);
          eng_valid[e] = 1;
          #1;
          while (!eng_ready[e]) begin @(negedge clk); #1; end
          @(negedge clk);
          eng_valid[e] = 0;
        end
      end
      begin // barrier: TPB 17 stays busy for a while
        tpb_idle[17] = 0;
        bar_mask[2] = N_TPB'(1) << 17 | N_TPB'(1); bar_req[2] = 1;
        repeat (300) begin @(negedge clk); chk(!bar_done[2], "barrier waits for the busy TPB"); end
        tpb_idle[17] = 1;
        #1;
        while (!bar_done[2]) begin @(negedge clk); #1; end
        @(negedge clk);
        bar_req[2] = 0;
      end
    join
    for (int i = 0; i < 200; i++) begin
      r = '0; r.valid = 1; r.addr = i;
      ext(r);
      chk(ext_rsp.rvalid && ext_rsp.rdata == ddr.mem[100 + i], "SRAM contents after DMA");
    end
    repeat (50) @(negedge clk);
    chk(pkts == 12 && flits == 50, $sformatf("packets %0d flits %0d", pkts, flits));
    reg_addr = 0;
    #1 chk(reg_rdata[5:0] == 6'b110100 && irq_host && !irq_ccb, $sformatf("interrupt status %b %b %b", reg_rdata[5:0], irq_host, irq_ccb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
