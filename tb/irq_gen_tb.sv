// irq_gen_tb: random events and random register writes against a model of
// the status / enable / set registers. Checks: status collects events and
// set-register writes, write-1-to-clear works (an event in the same cycle
// wins), each interrupt line is the OR of status and its enable mask, and
// register reads return the model contents.
module irq_gen_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] events;
  logic reg_valid, reg_we, irq_host, irq_ccb;
  logic [1:0] reg_addr;
  logic [31:0] reg_wdata, reg_rdata;
  logic [15:0] st = '0, eh = '0, ec = '0;
  int host_irqs = 0;

  irq_gen dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      logic [15:0] clr, set;
      events = ($urandom % 4 == 0) ? 16'(1 << ($urandom % 16)) : '0;
      reg_valid = $urandom % 2; reg_we = $urandom % 2; reg_addr = 2'($urandom);
      reg_wdata = $urandom;
      #1;
      chk(irq_host == |(st & eh) && irq_ccb == |(st & ec), "interrupt lines");
      if (irq_host) host_irqs++;
      case (reg_addr)
        0: chk(reg_rdata == 32'(st), "status read");
        1: chk(reg_rdata == 32'(eh), "host enable read");
        2: chk(reg_rdata == 32'(ec), "ccb enable read");
        default: chk(reg_rdata == 0, "reserved read");
      endcase
      clr = (reg_valid && reg_we && reg_addr == 0) ? reg_wdata[15:0] : '0;
      set = events | ((reg_valid && reg_we && reg_addr == 3) ? reg_wdata[15:0] : '0);
      @(negedge clk);
      st = (st & ~clr) | set;
      if (reg_valid && reg_we && reg_addr == 1) eh = reg_wdata[15:0];
      if (reg_valid && reg_we && reg_addr == 2) ec = reg_wdata[15:0];
    end
    chk(host_irqs > 100, "interrupts raised");
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
