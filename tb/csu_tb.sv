// csu_tb: the custom sync unit handshake. Random instructions are issued;
// the unit must wait for its monitor when asked to, then raise the
// interrupt, expose the saved parameters in register 0, keep the interrupt
// up until the processor writes register 0, and only then emit the counter
// update (once, with the right id) and accept the next instruction.
module csu_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, ready, mon_ok = 0, irq, reg_valid = 0, reg_we = 0, upd_valid;
  tpb_inst_t inst;
  logic [SC_ID_W-1:0] mon_id, upd_id;
  logic [SC_W-1:0] mon_val;
  logic [15:0] reg_addr = 0;
  word_t reg_rdata;
  int upds = 0;
  logic [SC_ID_W-1:0] last_upd;

  csu dut (.*);

  always @(posedge clk) if (rst_n && upd_valid) begin upds++; last_upd = upd_id; end

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      tpb_inst_t i;
      int w, n_before;
      i = mk(FU_CSU, 4'($urandom), lin($urandom % 4096, 1 + $urandom % 64), lin($urandom % 4096, 8),
             lin($urandom % 4096, 4), $urandom, $urandom % 2, $urandom % 32, $urandom % 100,
             $urandom % 2, $urandom % 32);
      n_before = upds;
      chk(ready, "ready when idle");
      inst = i; inst_valid = 1;
      @(negedge clk);
      inst_valid = 0;
      w = $urandom % 8;
      for (int c = 0; c < w; c++) begin
        chk(!irq || !i.wait_en, "no interrupt n_before the monitor");
        chk(!i.wait_en || mon_id == i.wait_sc && mon_val == i.wait_val, "monitor request");
        @(negedge clk);
      end
      mon_ok = 1;
      @(negedge clk);
      mon_ok = 0;
      chk(irq, "interrupt raised");
      reg_valid = 1; reg_we = 0; reg_addr = 0;
      #1 chk(reg_rdata == WORD_BITS'({i.op, i.imm}), "operation and immediate in register 0");
      reg_addr = 2;
      #1 chk(reg_rdata == WORD_BITS'(i.twu_a), "walker a in register 2");
      reg_addr = 3;
      #1 chk(reg_rdata == WORD_BITS'(i.twu_b), "walker b in register 3");
      reg_addr = 4;
      #1 chk(reg_rdata == WORD_BITS'(i.twu_o), "walker o in register 4");
      reg_addr = 1;
      #1 chk(reg_rdata[0] == 1'b1, "status register");
      @(negedge clk);
      reg_valid = 0;
      repeat ($urandom % 5) begin chk(irq && !ready, "held until done"); @(negedge clk); end
      chk(upds == n_before, "no update before done");
      reg_valid = 1; reg_we = 1; reg_addr = 0;
      @(negedge clk);
      reg_valid = 0; reg_we = 0;
      chk(!irq && ready, "released");
      chk(upds == n_before + i.upd_en, "update after done");
      if (i.upd_en) chk(last_upd == i.upd_sc, "update id");
    end
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
