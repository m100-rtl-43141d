// icb_node_tb: one node of the instruction chain (cluster 5) between a
// random packet source and a sink, with random back-pressure on the
// outgoing link and on the instruction queue. Checks: every beat is
// forwarded unchanged and in order; an instruction is pushed to the local
// queue exactly for packets whose mask selects a local TPB, with that part
// of the mask and the full instruction; throughput is one beat per cycle
// when nothing stalls.
module icb_node_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  localparam int IDX = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  icb_beat_t in_beat = '0, out_beat;
  logic in_ready, out_ready, push, q_ready, busy;
  logic [TPB_PER_CLUSTER-1:0] push_mask;
  tpb_inst_t push_inst;
  icb_beat_t beats[$];
  tpb_inst_t exp_inst[$];
  logic [TPB_PER_CLUSTER-1:0] exp_mask[$];
  int pushes = 0, fwd = 0, stall_mode = 1, sent = 0;

  icb_node #(.IDX(IDX)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    out_ready = stall_mode ? ($urandom % 3) != 0 : 1'b1;
    q_ready   = stall_mode ? ($urandom % 3) != 0 : 1'b1;
  end

  always @(posedge clk) if (rst_n) begin
    if (in_beat.valid && in_ready) sent++;
    if (out_beat.valid && out_ready) begin
      icb_beat_t b;
      b = beats.pop_front();
      chk(out_beat == b, "forwarded beat");
      fwd++;
    end
    if (push) begin
      chk(q_ready, "push only when the queue has room");
      chk(push_inst == exp_inst.pop_front(), "instruction");
      chk(push_mask == exp_mask.pop_front(), "mask");
      pushes++;
    end
  end

  task automatic send(input logic [N_TPB-1:0] m, input tpb_inst_t i);
    logic [INST_BEATS*ICB_W-1:0] flat;
    flat = '0;
    flat[INST_W-1:0] = i;
    for (int k = 0; k <= INST_BEATS; k++) begin
      icb_beat_t b;
      b.valid = 1; b.last = (k == INST_BEATS);
      b.data  = (k == 0) ? ICB_W'(m) : flat[(k-1)*ICB_W +: ICB_W];
      in_beat = b;
      beats.push_back(b);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_beat = '0;
  endtask

  // one beat per cycle when nothing stalls
  int streak = 0, best = 0;
  always @(posedge clk) if (!stall_mode) begin
    if (in_beat.valid && in_ready) streak++; else streak = 0;
    if (streak > best) best = streak;
  end

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      logic [N_TPB-1:0] m;
      tpb_inst_t i;
      m = {$urandom, $urandom};
      if ($urandom % 3 == 0) m[IDX*4 +: 4] = '0;
      i = mk(fu_e'($urandom % N_FU), 4'($urandom), lin($urandom % 999, 7), lin(3, $urandom % 100),
             lin($urandom % 500, 9), $urandom, 1, $urandom, $urandom, 1, $urandom);
      if (m[IDX*4 +: 4] != '0) begin exp_inst.push_back(i); exp_mask.push_back(m[IDX*4 +: 4]); end
      send(m, i);
    end
    // no back-pressure: a packet of INST_BEATS+1 beats in INST_BEATS+1 cycles
    stall_mode = 0;
    repeat (5) @(negedge clk);
    t0 = sent;
    for (int n = 0; n < 4; n++) begin
      tpb_inst_t i;
      i = mk(FU_TCU, 0, lin(n, 1), '0, '0, 0, 0, 0, 0, 0, 0);
      exp_inst.push_back(i); exp_mask.push_back(4'b1010);
      fork send(56'hA << (IDX*4), i); join
    end
    chk(sent - t0 == 4 * (INST_BEATS + 1), "beats sent");
    repeat (20) @(negedge clk);
    chk(beats.size() == 0 && exp_inst.size() == 0, "everything delivered");
    chk(!busy, "idle at the end");
    chk(best >= INST_BEATS + 1, "full-rate streak");
    chk(pushes > 150, "local pushes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
