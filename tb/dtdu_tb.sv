// dtdu_tb: the data transformation DMA against a memory model with random
// grant stalls: a strided copy (every second word of a 2-D region), a fill
// with a 32-bit pattern, and a 32x32-byte transposition. The waiting on the
// monitor request and the update on the last write are checked too.
module dtdu_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, ready, mon_ok = 0;
  tpb_inst_t inst;
  logic [SC_ID_W-1:0] mon_id;
  logic [SC_W-1:0] mon_val;
  mreq_t [1:0] req;
  mrsp_t [1:0] rsp;
  int upd = 0, early = 0;

  dtdu dut (.clk, .rst_n, .inst_valid, .inst, .ready, .mon_id, .mon_val, .mon_ok,
            .rd_req(req[0]), .rd_rsp(rsp[0]), .wr_req(req[1]), .wr_rsp(rsp[1]));
  tb_mem #(.NP(2), .WORDS(4096), .LAT(20), .STALL(1)) mem (.clk, .req, .rsp);

  always @(posedge clk) begin
    if (req[1].valid && rsp[1].gnt && req[1].sc_upd) upd++;
    if (rst_n && !mon_ok && (req[0].valid || req[1].valid)) early++;
  end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic run(input tpb_inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
    while (!ready) @(negedge clk);
  endtask

  initial begin
    twu_cfg_t s;
    for (int a = 0; a < 256; a++)
      mem.mem[a] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (30) @(negedge clk);
    rst_n = 1;
    // strided copy: rows 0..3 of 16 words, every second word -> 32 words
    s = '0; s.levels = 2;
    s.init[0] = 0; s.step[0] = 16; s.fin[0] = 48;
    s.init[1] = 0; s.step[1] = 2;  s.fin[1] = 14;
    fork
      run(mk(FU_DTDU, DT_COPY, s, '0, lin(1000, 32), 0, 1, 4, 1, 1, 6));
      begin repeat (20) @(negedge clk); mon_ok = 1; end
    join
    chk(early == 0, "no access before the monitor is answered");
    for (int r = 0; r < 4; r++) for (int c = 0; c < 8; c++)
      chk(mem.mem[1000 + r*8 + c] == mem.mem[r*16 + 2*c], $sformatf("copy %0d,%0d", r, c));
    run(mk(FU_DTDU, DT_FILL, '0, '0, lin(1100, 20), 32'hA5C3_0F01, 0, 0, 0, 1, 6));
    for (int a = 0; a < 20; a++) chk(mem.mem[1100 + a] == {8{32'hA5C3_0F01}}, "fill");
    run(mk(FU_DTDU, DT_TRANS, lin(64, 32), '0, lin(1200, 32), 0, 0, 0, 0, 1, 6));
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++)
      chk(mem.mem[1200 + j][i*8 +: 8] == mem.mem[64 + i][j*8 +: 8], $sformatf("transpose %0d,%0d", i, j));
    chk(upd == 3, "updates");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
