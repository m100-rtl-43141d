// ccb_dma_tb: the central DMA moving data DDR->SRAM, SRAM->DDR, SRAM->SRAM
// and SRAM->ring for random lengths and addresses. The memories are models
// with random grant stalls (DDR with a 40-cycle latency). Checks: the
// destination holds exactly the source words, ring flits carry the
// destination mask, consecutive addresses and the update flag on the last
// flit only, done pulses once per descriptor, ring back-pressure is obeyed.
module ccb_dma_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_valid = 0, desc_ready, done, drb_ready;
  dma_desc_t desc;
  mreq_t [0:0] ddr_req, sram_req;
  mrsp_t [0:0] ddr_rsp, sram_rsp;
  drb_flit_t drb_out;
  drb_flit_t flits[$];
  int dones = 0, ring_stalls = 0;

  ccb_dma dut (.clk, .rst_n, .desc_valid, .desc, .desc_ready, .done,
    .ddr_req(ddr_req[0]), .ddr_rsp(ddr_rsp[0]), .sram_req(sram_req[0]), .sram_rsp(sram_rsp[0]),
    .drb_out, .drb_ready);
  tb_mem #(.NP(1), .WORDS(8192), .LAT(40), .STALL(1)) ddr (.clk, .req(ddr_req), .rsp(ddr_rsp));
  tb_mem #(.NP(1), .WORDS(8192), .LAT(1), .STALL(1)) sram (.clk, .req(sram_req), .rsp(sram_rsp));

  always @(negedge clk) drb_ready = ($urandom % 4) != 0;
  always @(negedge clk) if (rst_n) begin
    #1;
    if (done) dones++;
    if (drb_out.valid && drb_ready) flits.push_back(drb_out);
    if (drb_out.valid && !drb_ready) ring_stalls++;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic run(input dma_desc_t d);
    int d0;
    d0 = dones;
    while (!desc_ready) @(negedge clk);
    desc = d; desc_valid = 1;
    @(negedge clk);
    desc_valid = 0;
    while (!desc_ready) @(negedge clk);
    chk(dones == d0 + 1, $sformatf("one done per descriptor %0d %0d len %0d", dones, d0, d.len));
  endtask

  initial begin
    for (int a = 0; a < 8192; a++) begin ddr.mem[a] = {8{$urandom}}; sram.mem[a] = {8{$urandom}}; end
    repeat (50) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      dma_desc_t d;
      int k;
      word_t src [];
      d = '0;
      k = n % 4;
      d.len = 16'(1 + ($urandom & 127));
      d.src_addr = $urandom % 4000; d.dst_addr = 4096 + $urandom % 3000;
      d.src = (k == 0) ? DMA_DDR : DMA_SRAM;
      d.dst = (k == 1) ? DMA_DDR : (k == 3 ? DMA_DRB : DMA_SRAM);
      d.drb_dst = {$urandom, $urandom}; d.sc_upd = 1; d.sc_id = 5'($urandom);
      src = new[d.len];
      for (int i = 0; i < int'(d.len); i++) src[i] = (d.src == DMA_DDR) ? ddr.mem[d.src_addr + i] : sram.mem[d.src_addr + i];
      flits.delete();
      run(d);
      for (int i = 0; i < int'(d.len); i++) begin
        if (d.dst == DMA_DDR) chk(ddr.mem[d.dst_addr + i] == src[i], "DDR destination");
        else if (d.dst == DMA_SRAM) chk(sram.mem[d.dst_addr + i] == src[i], "SRAM destination");
      end
      if (d.dst == DMA_DRB) begin
        chk(flits.size() == int'(d.len), "flit count");
        foreach (flits[i]) chk(flits[i].data == src[i] && flits[i].dst == d.drb_dst
          && flits[i].addr == 16'(d.dst_addr + i) && flits[i].sc_upd == (i == flits.size() - 1)
          && !flits[i].sync_only, "ring flit");
      end
    end
    chk(ring_stalls > 0, "ring back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
