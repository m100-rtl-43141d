// custom_engine_tb: the cluster processor's path into a TPB. A random mix of
// processor reads and writes to the shared memory and to the sync-unit
// registers runs while broadcast-ring writes arrive on the same memory port.
// Checks: ring writes always win the port, processor reads return the right
// data in order with only one read outstanding, register reads return the
// register file contents.
module custom_engine_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cpu_req_t cpu_req;
  cpu_rsp_t cpu_rsp;
  mreq_t drb_req = '0;
  logic drb_gnt, csu_valid, csu_we;
  logic [15:0] csu_addr;
  word_t csu_rdata;
  mreq_t [0:0] mem_req;
  mrsp_t [0:0] mem_rsp;
  word_t ref_mem [4096];
  word_t regs [4];
  int drb_writes = 0, cpu_reads = 0;

  custom_engine dut (.clk, .rst_n, .cpu_req, .cpu_rsp, .drb_req, .drb_gnt,
    .mem_req(mem_req[0]), .mem_rsp(mem_rsp[0]), .csu_valid, .csu_we, .csu_addr, .csu_rdata);
  tb_mem #(.NP(1), .WORDS(4096), .LAT(20), .STALL(1)) mem (.clk, .req(mem_req), .rsp(mem_rsp));

  assign csu_rdata = regs[csu_addr % 4];
  always @(posedge clk) if (csu_valid && csu_we) regs[csu_addr % 4] <= cpu_req.wdata;

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ring traffic: random writes to the upper half of memory
  always @(negedge clk) begin
    if (!rst_n) drb_req <= '0;
    else if (!drb_req.valid || drb_gnt) begin
      drb_req <= '0;
      if ($urandom % 3 == 0) begin
        drb_req.valid <= 1'b1; drb_req.we <= 1'b1;
        drb_req.addr  <= 2048 + $urandom % 2048;
        drb_req.wdata <= {8{$urandom}};
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (drb_req.valid) chk(mem_req[0] == drb_req, "ring request owns the port");
    if (drb_gnt) drb_writes++;
  end

  initial begin
    for (int a = 0; a < 4096; a++) begin
      mem.mem[a] = {8{$urandom}};
      ref_mem[a] = mem.mem[a];
    end
    for (int r = 0; r < 4; r++) regs[r] = {8{$urandom}};
    cpu_req = '0;
    repeat (30) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      cpu_req_t q;
      word_t exp;
      q = '0;
      q.valid = 1; q.we = $urandom % 2; q.target = ($urandom % 4) == 0;
      q.addr = q.target ? 16'($urandom % 4) : 16'($urandom % 2048);
      q.wdata = {8{$urandom}};
      exp = q.target ? regs[q.addr] : ref_mem[q.addr];
      cpu_req = q;
      #1;
      while (!cpu_rsp.gnt) begin @(negedge clk); #1; end
      @(negedge clk);
      cpu_req = '0;
      if (q.we) begin
        if (q.target) regs[q.addr] = q.wdata; else ref_mem[q.addr] = q.wdata;
      end else begin
        int t;
        t = 0;
        while (!cpu_rsp.rvalid && t < 100) begin @(negedge clk); t++; end
        chk(cpu_rsp.rvalid && cpu_rsp.rdata == exp, $sformatf("read %0d target %0d", q.addr, q.target));
        cpu_reads++;
        if (!q.target) chk(t >= 19, "memory read latency");
      end
    end
    repeat (30) @(negedge clk);
    for (int a = 0; a < 2048; a++) chk(mem.mem[a] == ref_mem[a], $sformatf("memory contents %0d", a));
    chk(drb_writes > 100 && cpu_reads > 100, "both traffic kinds happened");
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
