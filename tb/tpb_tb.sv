// tpb_tb: one tensor processing block with its real HBSM (2048-word banks,
// 20-cycle latency). Activations and weights arrive as broadcast-ring
// flits, the last one updating counter 1. A TCU tile (waits for counter 1,
// updates 2), a DTDU transpose (waits for counter 1, updates 3) and a CVU
// reduction-max over the tile output (waits for counter 2, updates 4) are
// issued back to back, followed by a CSU instruction (waits for counter 4).
// The test plays the cluster processor: it takes the CSU interrupt, reads
// results through the custom-engine port and writes done. Checks: all
// results, that TCU and DTDU run at the same time, that instructions are
// accepted only when their unit is ready, and that the TPB ends idle.
module tpb_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  import tpb_common_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, busy, drb_valid = 0, drb_ready, csu_irq;
  tpb_inst_t inst;
  logic [N_FU-1:0] fu_ready;
  drb_flit_t drb_flit;
  cpu_req_t cpu_req = '0;
  cpu_rsp_t cpu_rsp;
  int overlap = 0;

  tpb #(.BANK_WORDS(2048), .RD_LAT(20)) dut (.*);

  always @(posedge clk) if (dut.u_tcu.st_q > 3'd1 && dut.u_dtdu.st_q > 3'd1) overlap++;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  task automatic issue(input tpb_inst_t i);
    inst = i; inst_valid = 1;
    #1;
    while (!fu_ready[i.fu]) begin @(negedge clk); #1; end
    @(negedge clk);
    inst_valid = 0;
  endtask
  task automatic flit(input int a, input word_t d, input bit upd);
    drb_flit = '0;
    drb_flit.valid = 1; drb_flit.addr = 16'(a); drb_flit.data = d;
    drb_flit.sc_upd = upd; drb_flit.sc_id = 1;
    drb_valid = 1;
    #1;
    while (!drb_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    drb_valid = 0;
  endtask
  task automatic cpu(input cpu_req_t q, output word_t rd);
    cpu_req = q;
    #1;
    while (!cpu_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cpu_req = '0;
    rd = '0;
    if (!q.we) begin
      while (!cpu_rsp.rvalid) @(negedge clk);
      rd = cpu_rsp.rdata;
    end
  endtask
  function automatic cpu_req_t rq(input bit tgt, input int a, input bit we = 0);
    cpu_req_t q;
    q = '0; q.valid = 1; q.target = tgt; q.addr = 16'(a); q.we = we;
    return q;
  endfunction

  initial begin
    word_t rd, mx;
    make_tile();
    repeat (30) @(negedge clk);
    rst_n = 1;
    fork
      begin
        for (int t = 0; t < 32; t++) flit(t, aw[t], 0);
        for (int q = 0; q < 64; q++) flit(32 + q, ww[q], q == 63);
      end
      begin
        issue(mk(FU_TCU, 0, lin(0, 32), lin(32, 64), lin(200, 64), 32'h10a, 1, 1, 1, 1, 2));
        issue(mk(FU_DTDU, DT_TRANS, lin(32, 32), '0, lin(300, 32), 0, 1, 1, 1, 1, 3));
        issue(mk(FU_CVU, CVU_RMAX, lin(200, 64), '0, lin(400, 1), 0, 1, 2, 1, 1, 4));
        issue(mk(FU_CSU, 4'd1, lin(400, 1), '0, '0, 32'h55, 1, 4, 1, 1, 5));
      end
    join
    while (!csu_irq) @(negedge clk);
    cpu(rq(1, 0), rd);
    chk(rd[35:0] == {4'd1, 32'h55}, "CSU parameters");
    for (int q = 0; q < 64; q++) begin
      cpu(rq(0, 200 + q), rd);
      chk(rd == cword(q), $sformatf("tile word %0d", q));
    end
    for (int j = 0; j < 32; j++) begin
      cpu(rq(0, 300 + j), rd);
      for (int i = 0; i < 32; i++) chk(rd[i*8 +: 8] == ww[i][j*8 +: 8], "transpose");
    end
    for (int l = 0; l < 16; l++) begin
      int m;
      m = -32768;
      for (int q = 0; q < 64; q++) if ($signed(cword(q)[l*16 +: 16]) > m) m = $signed(cword(q)[l*16 +: 16]);
      mx[l*16 +: 16] = 16'(m);
    end
    cpu(rq(0, 400), rd);
    begin
      int m;
      m = -32768;
      for (int l = 0; l < 16; l++) if ($signed(mx[l*16 +: 16]) > m) m = $signed(mx[l*16 +: 16]);
      chk(rd == {16{16'(m)}}, "reduction max broadcast to all lanes");
    end
    cpu(rq(1, 0, 1), rd);
    @(negedge clk);
    chk(!csu_irq, "CSU released");
    repeat (5) @(negedge clk);
    chk(!busy && fu_ready == '1, "idle at the end");
    chk(dut.u_su.cnt_q[5] == 1, "CSU update");
    chk(overlap > 0, "TCU and DTDU worked in parallel");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
