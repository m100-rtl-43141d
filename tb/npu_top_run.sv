// npu_top_run: end-to-end run of the whole NPU, used by npu_top_tb. With
// FULL = 0 the top is built with 2 clusters, 256-word HBSM banks and
// 1024-word SRAM banks; with FULL = 1 it is built with its default,
// full-size parameters (14 clusters, 2 MB per TPB, 32 MB SRAM) and no
// overrides. The full-size model takes far longer than ten minutes to
// compile with Verilator, so no testbench instantiates FULL = 1 by default.
//
// Scenario (one 32x32 x 32x64 int8 matrix tile, a post-op and a custom op):
//   1. DMA 0 copies A (32 words) and W (64 words) from DDR to the CCB SRAM.
//   2. DMA 1 broadcasts them from SRAM over the ring into the HBSM of TPBs
//      {0, 1, 5, last}; the last flit updates sync counter 1 there.
//   3. Engine 0 multicasts a TCU tile instruction to those TPBs over the
//      instruction chain; it waits for counter 1 >= 1 (data arrived) and
//      updates counter 2.
//   4. Engine 1 sends TPB 0 a CVU add of the tile result with itself
//      (waits counter 2, updates 3); engine 2 then sends TPB 0 a DTDU copy
//      of W that only waits for the data (counter 1) and so overtakes the
//      older CVU instruction; engine 3 sends TPB 5 a CSU instruction that
//      interrupts cluster 1's processor once the tile is done.
//   5. The processor model reads the CSU registers and one result word
//      through the custom engine and writes done (counter 5 update).
//   6. Engine 0 raises a barrier over the four TPBs; DMA and barrier
//      completions reach the host interrupt line.
// Checks: every result byte in all four TPBs, the CVU and DTDU results, the
// CSU register and read data, the 32-cycle MAC phase, the counters, and that
// each mechanism (ring multicast, instruction multicast, sync stall, queue
// overtaking, CSU interrupt, barrier, host interrupt, HBSM bank conflict)
// happened at least once; chain back-pressure is only reported.
module npu_top_run #(
  parameter bit FULL = 0
);
  import m100_pkg::*;
  import tb_util_pkg::*;
  localparam int NCL  = FULL ? N_CLUSTERS : 2;
  localparam int LAST = NCL * TPB_PER_CLUSTER - 1;
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
  logic [NCL-1:0]       cl_cpu_irq;
  logic [NCL-1:0][1:0]  cl_cpu_irq_id, cl_cpu_sel = '0;
  cpu_req_t [NCL-1:0]   cl_cpu_req = '0;
  cpu_rsp_t [NCL-1:0]   cl_cpu_rsp;

  if (FULL) begin : g_dut
    npu_top dut (.*);
  end else begin : g_dut
    npu_top #(.N_CL(2), .BANK_WORDS(256), .RD_LAT(20), .SRAM_BANK_WORDS(1024)) dut (.*);
  end
  tb_mem #(.NP(2), .WORDS(4096), .LAT(40), .STALL(1)) ddr (.clk, .req(ddr_req), .rsp(ddr_rsp));

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------------------------------------------------------- probes
  int n_drb_mcast = 0, n_icb_mcast = 0, n_stall = 0, n_ooo = 0, n_csu_irq = 0;
  int n_barrier = 0, n_host_irq = 0, n_conflict = 0, n_icb_bp = 0, n_drb_bp = 0;
  int mac_cycles = 0, n_deliver = 0;
  logic host_irq_q = 0;
  logic [N_TPB-1:0] tgt;
  assign tgt = (N_TPB'(1) << 0) | (N_TPB'(1) << 1) | (N_TPB'(1) << 5) | (N_TPB'(1) << LAST);

  always @(posedge clk) if (rst_n) begin
    if (g_dut.dut.drb[0].valid && g_dut.dut.drb_rdy[0] && $countones(g_dut.dut.drb[0].dst) > 1) n_drb_mcast++;
    if (g_dut.dut.drb[0].valid && !g_dut.dut.drb_rdy[0]) n_drb_bp++;
    if (g_dut.dut.icb[0].valid && !g_dut.dut.icb_rdy[0]) n_icb_bp++;
    for (int e = 0; e < 4; e++) if (eng_valid[e] && eng_ready[e] && $countones(eng_mask[e]) > 1) n_icb_mcast++;
    if (g_dut.dut.g_cl[0].u_cl.g_tpb[0].u_tpb.u_tcu.st_q == 3'd1) n_stall++;
    if (g_dut.dut.g_cl[0].u_cl.g_tpb[0].u_tpb.tcu_mac) mac_cycles++;
    if (g_dut.dut.g_cl[0].u_cl.g_tpb[0].u_tpb.u_su.cnt_q[4] != 0 &&
        g_dut.dut.g_cl[0].u_cl.g_tpb[0].u_tpb.u_su.cnt_q[3] == 0) n_ooo++;
    if (|bar_done) n_barrier++;
    if (irq_host && !host_irq_q) n_host_irq++;
    host_irq_q <= irq_host;
    begin
      mreq_t [7:0] q;
      mrsp_t [7:0] r;
      q = g_dut.dut.g_cl[0].u_cl.g_tpb[0].u_tpb.req;
      r = g_dut.dut.g_cl[0].u_cl.g_tpb[0].u_tpb.rsp;
      for (int a = 0; a < 8; a++) for (int b = a + 1; b < 8; b++)
        if (q[a].valid && q[b].valid && q[a].addr[4:0] == q[b].addr[4:0] && !(r[a].gnt && r[b].gnt)) n_conflict++;
    end
  end
  for (genvar c = 0; c < NCL; c++) begin : g_dl
    for (genvar t = 0; t < 4; t++) begin : g_t
      always @(posedge clk)
        if (rst_n && g_dut.dut.g_cl[c].u_cl.g_tpb[t].u_tpb.drb_valid && g_dut.dut.g_cl[c].u_cl.g_tpb[t].u_tpb.drb_ready) begin
          n_deliver++;
          chk(tgt[c*4+t], "ring delivery only to named TPBs");
        end
    end
  end

  // ------------------------------------------------------------- helpers
  int A [32][32], W [32][64], C [32][64];
  word_t aw [32], ww [64];
  function automatic int sat8(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction
  function automatic int sat16(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  function automatic word_t cword(input int q);
    word_t w;
    for (int j = 0; j < 32; j++) begin
      int v;
      v = C[q/2][32*(q%2)+j];
      if (v < 0) v = 0;
      w[j*8 +: 8] = 8'(sat8(v >>> 10));
    end
    return w;
  endfunction

  task automatic send(input int e, input logic [N_TPB-1:0] m, input tpb_inst_t i);
    eng_mask[e] = m; eng_inst[e] = i; eng_valid[e] = 1;
    #1;
    while (!eng_ready[e]) begin @(negedge clk); #1; end
    @(negedge clk);
    eng_valid[e] = 0;
  endtask
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
  task automatic regw(input logic [1:0] a, input logic [31:0] d);
    @(negedge clk);
    reg_valid = 1; reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk);
    reg_valid = 0; reg_we = 0;
  endtask
  task automatic cpu(input int c, input cpu_req_t q, output word_t rd);
    cl_cpu_req[c] = q;
    #1;
    while (!cl_cpu_rsp[c].gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cl_cpu_req[c] = '0;
    rd = '0;
    if (!q.we) begin
      while (!cl_cpu_rsp[c].rvalid) @(negedge clk);
      rd = cl_cpu_rsp[c].rdata;
      @(negedge clk);
    end
  endtask

  // counters of a TPB by global index (generate-time fan-out)
  logic [N_TPB-1:0][NUM_SC-1:0][SC_W-1:0] sc;
  word_t hb_rd [N_TPB];
  int hb_addr = 0;
  for (genvar c = 0; c < NCL; c++) begin : g_sc
    for (genvar t = 0; t < 4; t++) begin : g_t
      assign sc[c*4+t] = g_dut.dut.g_cl[c].u_cl.g_tpb[t].u_tpb.u_su.cnt_q;
      // HBSM word at hb_addr (bank = low 5 bits, row = the rest)
      word_t bw [32];
      for (genvar b = 0; b < 32; b++) begin : g_b
        assign bw[b] = g_dut.dut.g_cl[c].u_cl.g_tpb[t].u_tpb.u_hbsm.g_bank[b].mem[hb_addr / 32];
      end
      assign hb_rd[c*4+t] = bw[hb_addr % 32];
    end
  end
  for (genvar c = NCL; c < N_CLUSTERS; c++) begin : g_sc0
    for (genvar t = 0; t < 4; t++) begin : g_t
      assign sc[c*4+t] = '0;
      assign hb_rd[c*4+t] = '0;
    end
  end
  task automatic hb_check(input int g, input int base, input word_t exp [], input string what);
    for (int i = 0; i < exp.size(); i++) begin
      hb_addr = base + i;
      #1;
      chk(hb_rd[g] == exp[i], $sformatf("%s TPB %0d word %0d got %h exp %h", what, g, i, hb_rd[g][63:0], exp[i][63:0]));
    end
  endtask

  // --------------------------------------------------------------- scenario
  initial begin
    word_t ex [];
    word_t rd;
    cpu_req_t q;
    for (int i = 0; i < 32; i++) for (int k = 0; k < 32; k++) A[i][k] = int'($urandom % 256) - 128;
    for (int k = 0; k < 32; k++) for (int j = 0; j < 64; j++) W[k][j] = int'($urandom % 256) - 128;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 64; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < 32; k++) C[i][j] += A[i][k] * W[k][j];
    end
    for (int t = 0; t < 32; t++) begin
      int k, m;
      k = t / 4; m = t % 4;
      for (int r = 0; r < 8; r++) for (int e = 0; e < 4; e++) aw[t][(r*4+e)*8 +: 8] = 8'(A[8*m+r][4*k+e]);
      ddr.mem[t] = aw[t];
    end
    for (int q2 = 0; q2 < 64; q2++) begin
      for (int j = 0; j < 32; j++) ww[q2][j*8 +: 8] = 8'(W[q2/2][32*(q2%2)+j]);
      ddr.mem[32 + q2] = ww[q2];
    end
    repeat (50) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    regw(2'd1, 32'h0000_003F);            // host sees barrier and DMA done
    fork
      begin // data path: DDR -> SRAM -> ring multicast
        dma_desc_t d;
        d = '0; d.src = DMA_DDR; d.dst = DMA_SRAM; d.src_addr = 0; d.dst_addr = 32'h300; d.len = 96;
        dma(0, d);
        d = '0; d.src = DMA_SRAM; d.dst = DMA_DRB; d.src_addr = 32'h300; d.dst_addr = 0; d.len = 96;
        d.drb_dst = tgt; d.sc_upd = 1; d.sc_id = 1;
        dma(1, d);
      end
      begin // instructions, issued while the data is still moving
        fork
          send(0, tgt, mk(FU_TCU, 0, lin(0, 32), lin(32, 64), lin(200, 64), 32'h10a, 1, 1, 1, 1, 2));
          send(1, N_TPB'(1), mk(FU_CVU, CVU_ADD, lin(200, 64), lin(200, 64), lin(400, 64), 0, 1, 2, 1, 1, 3));
        join
        fork
          send(2, N_TPB'(1), mk(FU_DTDU, DT_COPY, lin(32, 64), '0, lin(600, 64), 0, 1, 1, 1, 1, 4));
          send(3, N_TPB'(1) << 5, mk(FU_CSU, 4'd7, lin(200, 64), '0, '0, 32'hC0FFEE, 1, 2, 1, 1, 5));
        join
      end
      begin // cluster 1 processor: serve the CSU interrupt of TPB 5
        int t;
        t = 0;
        while (!cl_cpu_irq[1] && t < 200000) begin @(negedge clk); t++; end
        chk(cl_cpu_irq[1] && cl_cpu_irq_id[1] == 2'd1, "CSU interrupt from TPB 5");
        n_csu_irq++;
        cl_cpu_sel[1] = cl_cpu_irq_id[1];
        q = '0; q.valid = 1; q.target = 1; q.addr = 0;
        cpu(1, q, rd);
        chk(rd[35:0] == {4'd7, 32'hC0FFEE}, "CSU parameter register");
        q = '0; q.valid = 1; q.target = 0; q.addr = 200 + 5;
        cpu(1, q, rd);
        chk(rd == cword(5), "processor reads a result word through the custom engine");
        q = '0; q.valid = 1; q.we = 1; q.target = 1; q.addr = 0;
        cpu(1, q, rd);
        @(negedge clk);
        chk(!cl_cpu_irq[1], "interrupt cleared by done");
      end
    join
    // barrier over the four TPBs
    bar_mask[0] = tgt; bar_req[0] = 1;
    #1;
    while (!bar_done[0]) begin @(negedge clk); #1; end
    @(negedge clk);
    bar_req[0] = 0;
    chk(sc[0][1] == 1 && sc[0][2] == 1 && sc[0][3] == 1 && sc[0][4] == 1, "TPB 0 counters");
    chk(sc[5][2] == 1 && sc[5][5] == 1 && sc[LAST][2] == 1, "TPB 5 / last counters");
    // results
    ex = new[64];
    for (int q2 = 0; q2 < 64; q2++) ex[q2] = cword(q2);
    foreach (tgt[g]) if (tgt[g]) hb_check(g, 200, ex, "tile");
    for (int q2 = 0; q2 < 64; q2++) for (int l = 0; l < 16; l++)
      ex[q2][l*16 +: 16] = 16'(sat16(2 * int'($signed(cword(q2)[l*16 +: 16]))));
    hb_check(0, 400, ex, "cvu");
    hb_check(0, 600, ww, "dtdu");
    chk(mac_cycles == 32, $sformatf("MAC phase %0d cycles", mac_cycles));
    @(negedge clk);
    chk(irq_host, "host interrupt pending");
    #1 reg_addr = 0;
    #1 chk(reg_rdata[5:4] == 2'b11 && reg_rdata[0], "interrupt status");
    regw(2'd0, 32'hFFFF);
    #1 chk(!irq_host, "interrupt cleared");
    $display("mechanisms: drb_mcast=%0d icb_mcast=%0d stall=%0d ooo=%0d csu_irq=%0d barrier=%0d host_irq=%0d hbsm_conflict=%0d icb_bp=%0d drb_bp=%0d deliveries=%0d",
      n_drb_mcast, n_icb_mcast, n_stall, n_ooo, n_csu_irq, n_barrier, n_host_irq, n_conflict, n_icb_bp, n_drb_bp, n_deliver);
    chk(n_drb_mcast > 0, "ring multicast happened");
    chk(n_deliver == 4 * 96, "ring deliveries");
    chk(n_icb_mcast > 0, "instruction multicast happened");
    chk(n_stall > 0, "sync stall happened");
    chk(n_ooo > 0, "queue overtaking happened");
    chk(n_csu_irq > 0, "CSU interrupt happened");
    chk(n_barrier > 0, "barrier happened");
    chk(n_host_irq > 0, "host interrupt happened");
    chk(n_conflict > 0, "HBSM bank conflict happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (FULL ? 20000 : 20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
