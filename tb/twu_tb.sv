// twu_tb: checks the tensor walker against nested software loops.
// Case 1 is the three-level example of the walker figure (outer 0..2000
// step 500, middle 0..400 step 20, inner 0..12 step 3; address = sum),
// 525 addresses at one per cycle. Case 2 is a two-level double-buffer walk
// (outer step = buffer offset). Case 3 stalls the consumer at random.
module twu_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, last, ready = 0;
  logic [1:0] levels;
  logic [2:0][15:0] init, step, fin;
  logic [15:0] addr;

  twu dut (.clk, .rst_n, .start, .levels, .init, .step, .fin, .busy, .addr, .last,
           .addr_ready(ready));

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic run(input int lv, input int i0, s0, f0, i1, s1, f1, i2, s2, f2, input bit rnd);
    int exp[$];
    int n, cyc;
    if (lv == 3) begin
      for (int a = i0; a <= f0; a += s0) for (int b = i1; b <= f1; b += s1)
        for (int c = i2; c <= f2; c += s2) exp.push_back((a + b + c) & 16'hffff);
    end else begin
      for (int a = i0; a <= f0; a += s0) for (int b = i1; b <= f1; b += s1)
        exp.push_back((a + b) & 16'hffff);
    end
    levels = 2'(lv);
    init = {16'(i2), 16'(i1), 16'(i0)};
    step = {16'(s2), 16'(s1), 16'(s0)};
    fin  = {16'(f2), 16'(f1), 16'(f0)};
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    n = 0; cyc = 0;
    while (busy) begin
      ready = rnd ? ($urandom % 3 != 0) : 1'b1;
      #1;
      if (ready) begin
        chk(addr == 16'(exp[n]), $sformatf("addr %0d: got %0d exp %0d", n, addr, exp[n]));
        chk(last == (n == exp.size() - 1), $sformatf("last at %0d", n));
        n++;
      end
      @(negedge clk);
      cyc++;
    end
    ready = 0;
    chk(n == exp.size(), $sformatf("count %0d exp %0d", n, exp.size()));
    if (!rnd) chk(cyc == exp.size(), $sformatf("one address per cycle: %0d cycles", cyc));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // figure example: 5 x 21 x 5 = 525 addresses
    run(3, 0, 500, 2000, 0, 20, 400, 0, 3, 12, 0);
    // double buffering: two 8-word buffers at 100 and 612
    run(2, 100, 512, 612, 0, 1, 7, 0, 0, 0, 0);
    // random back-pressure
    run(3, 7, 64, 199, 0, 8, 24, 0, 1, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
