// ciq_tb: the cluster instruction queue with 16 entries. Random instructions
// with random TPB masks and function units are pushed while the TPBs' unit
// ready flags change at random. A reference model checks that: every TPB
// named in an entry receives it once; per TPB and function unit the order
// of issue is the order of arrival; a TPB never starts an instruction while
// an older one for the same unit is still waiting; younger instructions for
// a free unit overtake older ones for a busy unit (counted, must happen);
// the queue fills up and back-pressures.
module ciq_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push = 0, ready;
  logic [TPB_PER_CLUSTER-1:0] push_mask, inst_valid, pending;
  tpb_inst_t push_inst;
  logic [TPB_PER_CLUSTER-1:0][N_FU-1:0] fu_ready;
  tpb_inst_t [TPB_PER_CLUSTER-1:0] inst;
  // per TPB the instructions still owed, oldest first
  tpb_inst_t owed[TPB_PER_CLUSTER][$];
  int issued = 0, overtakes = 0, full_seen = 0, pushed = 0;

  ciq #(.DEPTH(16)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) for (int t = 0; t < 4; t++) fu_ready[t] = N_FU'($urandom) & N_FU'($urandom);

  always @(posedge clk) if (rst_n) begin
    if (!ready) full_seen++;
    for (int t = 0; t < 4; t++) if (inst_valid[t]) begin
      int k;
      k = -1;
      chk(fu_ready[t][inst[t].fu], "unit ready");
      // must be the oldest owed instruction for that unit
      for (int j = 0; j < owed[t].size(); j++)
        if (owed[t][j].fu == inst[t].fu) begin k = j; break; end
      chk(k >= 0 && owed[t][k] == inst[t], "oldest for its unit");
      if (k > 0) overtakes++;
      if (k >= 0) owed[t].delete(k);
      issued++;
    end
    if (push && ready) begin
      for (int t = 0; t < 4; t++) if (push_mask[t]) owed[t].push_back(push_inst);
      pushed++;
    end
  end
  always @(negedge clk) if (rst_n)
    for (int t = 0; t < 4; t++) chk(pending[t] == (owed[t].size() > 0), "pending flag");

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      push_mask = 4'($urandom);
      if (push_mask == 0) push_mask = 4'b0001;
      push_inst = mk(fu_e'($urandom % N_FU), 4'($urandom), lin(n, 1), '0, '0, n, 0, 0, 0, 0, 0);
      push = 1;
      @(posedge clk);
      while (!ready) @(posedge clk);
      @(negedge clk);
      push = 0;
      repeat ($urandom % 2) @(negedge clk);
    end
    repeat (200) @(negedge clk);
    for (int t = 0; t < 4; t++) chk(owed[t].size() == 0 && !pending[t], "drained");
    chk(overtakes > 100, "out-of-order issue across units happened");
    chk(full_seen > 10, "queue filled");
    $display("overtakes=%0d", overtakes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
