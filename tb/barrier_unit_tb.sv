// barrier_unit_tb: each of the four engines raises barriers over random TPB
// masks while the TPBs go busy and idle at random and the instruction chain
// is sometimes busy. Checks: done never fires while a masked TPB is busy or
// the chain is busy; done fires in the first cycle all masked TPBs are idle
// and the chain is quiet; engines are independent.
module barrier_unit_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_ENGINES-1:0] bar_req = '0, bar_done;
  logic [N_ENGINES-1:0][N_TPB-1:0] bar_mask;
  logic [N_TPB-1:0] tpb_idle;
  logic icb_busy;
  logic [N_ENGINES-1:0] waiting = '0;
  logic [N_ENGINES-1:0][N_TPB-1:0] m_q;
  int dones = 0, held = 0;

  barrier_unit dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    tpb_idle = {$urandom, $urandom} | {$urandom, $urandom} | {$urandom, $urandom};
    icb_busy = ($urandom % 5) == 0;
    for (int e = 0; e < 4; e++) if (!waiting[e] && !bar_req[e] && $urandom % 4 == 0) begin
      bar_req[e]  = 1'b1;
      bar_mask[e] = 56'(1) << ($urandom % 56) | (($urandom % 2) ? 56'h3 << ($urandom % 50) : 56'h0);
    end
  end

  always @(posedge clk) if (rst_n)
    for (int e = 0; e < 4; e++) begin
      if (waiting[e]) begin
        logic ok;
        ok = !icb_busy && ((m_q[e] & ~tpb_idle) == '0);
        chk(bar_done[e] == ok, "done exactly when the masked TPBs are idle");
        if (!ok) held++;
        if (ok) begin waiting[e] <= 1'b0; dones++; end
      end else begin
        chk(!bar_done[e], "no done without a barrier");
        if (bar_req[e]) begin
          waiting[e] <= 1'b1; m_q[e] <= bar_mask[e];
          bar_req[e] <= 1'b0;
        end
      end
    end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (20000) @(negedge clk);
    chk(dones > 1000 && held > 1000, "barriers completed and waited");
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
