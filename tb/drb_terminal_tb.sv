// drb_terminal_tb: random data and sync-only flits are pushed into the ring
// terminal with random memory back-pressure. Every data flit must turn into
// exactly one memory write with its address, data and update flag, in
// arrival order; every sync-only flit must pulse one counter update.
module drb_terminal_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, mem_gnt, sc_upd_valid;
  drb_flit_t in_flit;
  mreq_t mem_req;
  logic [SC_ID_W-1:0] sc_upd_id;
  drb_flit_t q[$];
  int sent = 0, got = 0, stalls = 0;

  drb_terminal dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) mem_gnt = ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin q.push_back(in_flit); sent++; end
    if (in_valid && !in_ready) stalls++;
    if (mem_req.valid && mem_gnt) begin
      drb_flit_t f;
      f = q.pop_front();
      chk(!f.sync_only && mem_req.we && mem_req.addr == ADDR_W'(f.addr) && mem_req.wdata == f.data
          && mem_req.sc_upd == f.sc_upd && (!f.sc_upd || mem_req.sc_id == f.sc_id), "data flit write");
      got++;
    end
    if (sc_upd_valid) begin
      drb_flit_t f;
      f = q.pop_front();
      chk(f.sync_only && f.sc_upd && sc_upd_id == f.sc_id, "sync-only flit");
      got++;
    end
    chk(!(mem_req.valid && sc_upd_valid), "one flit at a time");
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      drb_flit_t f;
      f = '0;
      f.valid = 1; f.addr = 16'($urandom); f.data = {8{$urandom}};
      f.sync_only = ($urandom % 5) == 0;
      f.sc_upd = f.sync_only || ($urandom % 4) == 0;
      f.sc_id = SC_ID_W'($urandom);
      in_flit = f; in_valid = ($urandom % 4) != 0;
      @(posedge clk);
      while (!(in_valid && in_ready)) begin
        @(negedge clk); in_valid = 1; @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
    repeat (50) @(negedge clk);
    chk(got == sent && sent == 2000, "all flits delivered");
    chk(stalls > 0, "back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
