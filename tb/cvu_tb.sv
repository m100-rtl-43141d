// cvu_tb: the four vector operators on random int16 data from a memory
// model that withholds grants at random: element-wise add and multiply
// (with shift) over 40 words, reduction max and sum over 40 words. Every
// output lane is compared with a reference computed here; the reduction
// result must appear in all lanes and the last write must carry the update.
module cvu_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, ready, mon_ok = 1;
  tpb_inst_t inst;
  logic [SC_ID_W-1:0] mon_id;
  logic [SC_W-1:0] mon_val;
  mreq_t [2:0] req;
  mrsp_t [2:0] rsp;
  int upd = 0;

  cvu dut (.clk, .rst_n, .inst_valid, .inst, .ready, .mon_id, .mon_val, .mon_ok,
           .rda_req(req[0]), .rda_rsp(rsp[0]), .rdb_req(req[1]), .rdb_rsp(rsp[1]),
           .wr_req(req[2]), .wr_rsp(rsp[2]));
  tb_mem #(.NP(3), .WORDS(4096), .LAT(20), .STALL(1)) mem (.clk, .req, .rsp);

  always @(posedge clk) if (req[2].valid && rsp[2].gnt && req[2].sc_upd) upd++;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic int s16(input int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction
  task automatic run(input tpb_inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
    while (!ready) @(negedge clk);
  endtask
  function automatic int lane(input int a, input int l);
    return int'($signed(mem.mem[a][l*16 +: 16]));
  endfunction

  initial begin
    int mx, sm;
    for (int a = 0; a < 80; a++)
      mem.mem[a] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (30) @(negedge clk);
    rst_n = 1;
    run(mk(FU_CVU, CVU_ADD, lin(0, 40), lin(40, 40), lin(100, 40), 0, 0, 0, 0, 1, 2));
    for (int w = 0; w < 40; w++) for (int l = 0; l < 16; l++)
      chk(lane(100 + w, l) == s16(lane(w, l) + lane(40 + w, l)), $sformatf("add w%0d l%0d", w, l));
    run(mk(FU_CVU, CVU_MUL, lin(0, 40), lin(40, 40), lin(200, 40), 32'd9, 0, 0, 0, 1, 2));
    for (int w = 0; w < 40; w++) for (int l = 0; l < 16; l++)
      chk(lane(200 + w, l) == s16((lane(w, l) * lane(40 + w, l)) >>> 9), $sformatf("mul w%0d l%0d", w, l));
    run(mk(FU_CVU, CVU_RMAX, lin(0, 40), '0, lin(300, 1), 0, 0, 0, 0, 1, 2));
    mx = -32768; sm = 0;
    for (int w = 0; w < 40; w++) for (int l = 0; l < 16; l++) begin
      if (lane(w, l) > mx) mx = lane(w, l);
    end
    for (int w = 0; w < 3; w++) for (int l = 0; l < 16; l++) sm += lane(w, l);
    for (int l = 0; l < 16; l++) chk(lane(300, l) == mx, "max");
    run(mk(FU_CVU, CVU_RSUM, lin(0, 3), '0, lin(301, 1), 0, 0, 0, 0, 1, 2));
    for (int l = 0; l < 16; l++) chk(lane(301, l) == s16(sm), $sformatf("sum %0d vs %0d", lane(301, l), s16(sm)));
    chk(upd == 4, "one update per instruction");
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
