// cvm_tb: the cluster processor's interrupt and access mux. The four TPB
// sync units raise interrupts at random; the processor model takes the
// reported one, reads a register of the selected TPB, then clears it.
// Checks: the reported id is a raised interrupt and stays fixed until that
// interrupt drops; every raised interrupt is served (no starvation, round
// robin); requests, grants and read data go to and come from the selected
// TPB only.
module cvm_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [TPB_PER_CLUSTER-1:0] tpb_irq = '0;
  logic cpu_irq;
  logic [1:0] cpu_irq_id, cpu_sel = 0;
  cpu_req_t cpu_req = '0;
  cpu_rsp_t cpu_rsp;
  cpu_req_t [TPB_PER_CLUSTER-1:0] tpb_req;
  cpu_rsp_t [TPB_PER_CLUSTER-1:0] tpb_rsp;
  int served[4] = '{0, 0, 0, 0};
  logic [TPB_PER_CLUSTER-1:0] rd_q = '0;

  cvm dut (.*);

  // each TPB answers register reads one cycle later with its own index
  always_comb for (int t = 0; t < 4; t++) begin
    tpb_rsp[t].gnt    = tpb_req[t].valid && cpu_sel == 2'(t);
    tpb_rsp[t].rvalid = rd_q[t];
    tpb_rsp[t].rdata  = WORD_BITS'(t + 100);
  end
  always @(posedge clk) for (int t = 0; t < 4; t++) rd_q[t] <= tpb_rsp[t].gnt && !tpb_req[t].we;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) if (rst_n) for (int t = 0; t < 4; t++) if (!tpb_irq[t] && $urandom % 8 == 0) tpb_irq[t] = 1'b1;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      logic [1:0] id;
      int t;
      t = 0;
      while (!cpu_irq && t < 50) begin @(negedge clk); t++; end
      chk(cpu_irq, "interrupt raised");
      id = cpu_irq_id;
      chk(tpb_irq[id], "reported interrupt is pending");
      cpu_sel = id;
      cpu_req = '0; cpu_req.valid = 1; cpu_req.target = 1; cpu_req.addr = 0;
      #1 for (int k = 0; k < 4; k++) chk(tpb_req[k].valid == (k == int'(id)) && tpb_req[k].addr == cpu_req.addr, "request steered");
      chk(cpu_rsp.gnt, "grant from the selected TPB");
      @(negedge clk);
      cpu_req = '0;
      chk(cpu_irq_id == id, "id held");
      chk(cpu_rsp.rvalid && cpu_rsp.rdata == WORD_BITS'(id + 100), "read data from the selected TPB");
      @(negedge clk);
      tpb_irq[id] = 1'b0;
      served[id]++;
      @(negedge clk);
    end
    for (int k = 0; k < 4; k++) chk(served[k] > 150, $sformatf("TPB %0d served %0d", k, served[k]));
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
