// tpb_cluster_tb: cluster 1 of the chain (TPB indices 4-7) with small HBSMs.
// The test drives the instruction chain and the broadcast ring from the
// upstream side and plays the cluster processor. Ring flits for TPBs 4 and
// 6 (and, mixed in, for other clusters) carry a tile; a TCU instruction is
// multicast to TPBs 4 and 6, a packet for another cluster passes through,
// and a CSU instruction on TPB 6 interrupts the processor. Checks: results
// in both TPBs read through the processor port, beats and flits for other
// clusters leave downstream unchanged and in order, local ring bits are
// cleared on the forwarded copy, the interrupt names TPB 6, and the cluster
// reports idle at the end.
module tpb_cluster_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  import tpb_common_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  icb_beat_t icb_in = '0, icb_out;
  logic icb_in_ready, icb_out_ready, drb_in_ready, drb_out_ready, cpu_irq, icb_busy;
  drb_flit_t drb_in = '0, drb_out;
  logic [1:0] cpu_irq_id, cpu_sel = 0;
  cpu_req_t cpu_req = '0;
  cpu_rsp_t cpu_rsp;
  logic [TPB_PER_CLUSTER-1:0] tpb_idle;
  icb_beat_t exp_beats[$];
  drb_flit_t exp_flits[$];

  tpb_cluster #(.IDX(1), .BANK_WORDS(256), .RD_LAT(20), .CIQ_DEPTH(16)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    icb_out_ready = ($urandom % 4) != 0;
    drb_out_ready = ($urandom % 4) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (icb_out.valid && icb_out_ready) chk(exp_beats.size() > 0 && icb_out == exp_beats.pop_front(), "beat forwarded");
    if (drb_out.valid && drb_out_ready) chk(exp_flits.size() > 0 && drb_out == exp_flits.pop_front(), "flit forwarded");
  end

  task automatic send_inst(input logic [N_TPB-1:0] m, input tpb_inst_t i);
    logic [INST_BEATS*ICB_W-1:0] flat;
    flat = '0;
    flat[INST_W-1:0] = i;
    for (int k = 0; k <= INST_BEATS; k++) begin
      icb_in.valid = 1; icb_in.last = (k == INST_BEATS);
      icb_in.data  = (k == 0) ? ICB_W'(m) : flat[(k-1)*ICB_W +: ICB_W];
      exp_beats.push_back(icb_in);
      #1;
      while (!icb_in_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    icb_in = '0;
  endtask
  task automatic send_flit(input logic [N_TPB-1:0] m, input int a, input word_t d, input bit upd);
    drb_flit_t f;
    f = '0; f.valid = 1; f.dst = m; f.addr = 16'(a); f.data = d; f.sc_upd = upd; f.sc_id = 1;
    drb_in = f;
    f.dst[4 +: 4] = '0;
    if (f.dst != '0) exp_flits.push_back(f);
    #1;
    while (!drb_in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    drb_in = '0;
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
    word_t rd;
    logic [N_TPB-1:0] m;
    make_tile();
    repeat (30) @(negedge clk);
    rst_n = 1;
    m = (N_TPB'(1) << 4) | (N_TPB'(1) << 6);
    fork
      begin
        for (int t = 0; t < 32; t++) send_flit(m | (N_TPB'($urandom % 2) << 9), t, aw[t], 0);
        for (int q = 0; q < 64; q++) send_flit(m, 32 + q, ww[q], q == 63);
        for (int q = 0; q < 10; q++) send_flit(N_TPB'(1) << 20, q, '1, 0);
      end
      begin
        send_inst(m | (N_TPB'(1) << 30), mk(FU_TCU, 0, lin(0, 32), lin(32, 64), lin(120, 64), 32'h10a, 1, 1, 1, 1, 2));
        send_inst(N_TPB'(1) << 33, mk(FU_CVU, 0, '0, '0, '0, 0, 0, 0, 0, 0, 0));
        send_inst(N_TPB'(1) << 6, mk(FU_CSU, 4'd2, '0, '0, '0, 32'h77, 1, 2, 1, 1, 5));
      end
    join
    while (!cpu_irq) @(negedge clk);
    chk(cpu_irq_id == 2'd2, "interrupt from TPB 6");
    for (int t = 0; t < 2; t++) begin
      cpu_sel = 2'(2 * t);
      for (int q = 0; q < 64; q++) begin
        cpu(rq(0, 120 + q), rd);
        chk(rd == cword(q), $sformatf("TPB %0d tile word %0d", 4 + 2 * t, q));
      end
    end
    cpu_sel = 2;
    cpu(rq(1, 0), rd);
    chk(rd[35:0] == {4'd2, 32'h77}, "CSU parameters");
    cpu(rq(1, 0, 1), rd);
    repeat (20) @(negedge clk);
    chk(!cpu_irq && tpb_idle == '1 && !icb_busy, "idle at the end");
    chk(exp_beats.size() == 0 && exp_flits.size() == 0, "all traffic forwarded");
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
