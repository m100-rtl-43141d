// ccb_sram_tb: the 32 MB central SRAM at its full size with three ports.
// Random reads and writes across the whole address range are compared with
// a sparse reference model. Three ports on three different banks are all
// granted in one cycle; two ports on one bank are served one per cycle,
// round-robin; read data arrives one cycle after the grant.
module ccb_sram_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mreq_t [2:0] req;
  mrsp_t [2:0] rsp;
  word_t refm [int];
  word_t exp_q [3][$];
  int conflicts = 0, parallel = 0;

  ccb_sram dut (.clk, .rst_n, .req, .rsp);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  function automatic int bank_of(input logic [31:0] a);
    return int'(a[8:7]);
  endfunction

  // sampled mid-cycle: grants seen here are the ones the next edge takes
  logic [2:0] rv_exp = '0;
  always @(negedge clk) if (rst_n) begin
    #2;
    for (int p = 0; p < 3; p++) begin
      chk(rsp[p].rvalid == rv_exp[p], "read data one cycle after grant");
      if (rsp[p].rvalid) chk(rsp[p].rdata == exp_q[p].pop_front(), "read data");
    end
    for (int p = 0; p < 3; p++) begin
      rv_exp[p] = rsp[p].gnt && !req[p].we;
      if (rsp[p].gnt) begin
        int a;
        a = int'(req[p].addr);
        if (req[p].we) refm[a] = req[p].wdata;
        else exp_q[p].push_back(refm.exists(a) ? refm[a] : 'x);
      end
    end
    if (rsp[0].gnt && rsp[1].gnt && rsp[2].gnt) parallel++;
    for (int b = 0; b < 4; b++) begin
      int nr, ng;
      nr = 0; ng = 0;
      for (int p = 0; p < 3; p++) if (req[p].valid && bank_of(req[p].addr) == b) begin
        nr++;
        if (rsp[p].gnt) ng++;
      end
      if (nr > 1) conflicts++;
      if (nr > 0) chk(ng == 1, "exactly one grant per requested bank");
    end
  end

  // each port: write a random word then read it back later, within a pool
  // of addresses spread over the whole 1M-word space
  logic [31:0] pool [64];
  task automatic port(input int p);
    for (int n = 0; n < 3000; n++) begin
      mreq_t r;
      int a;
      a = int'(pool[$urandom % 64]);
      r = '0; r.valid = 1;
      r.we = !refm.exists(a) || ($urandom % 2 == 0);
      r.addr = a; r.wdata = {8{$urandom}};
      req[p] = r;
      #1;
      while (!rsp[p].gnt) begin @(negedge clk); #1; end
      @(negedge clk);
      req[p] = '0;
    end
  endtask

  initial begin
    req = '0;
    for (int i = 0; i < 64; i++) pool[i] = 32'($urandom % (4 * 262144));
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork port(0); port(1); port(2); join
    repeat (3) @(negedge clk);
    chk(conflicts > 100 && parallel > 100, "both conflicts and parallel grants happened");
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
