// hbsm_tb: HBSM with its default 32 banks, 8 ports and 20-cycle latency.
// Phase 1: 8 ports streaming to 8 different banks are all granted every
// cycle (full bandwidth). Phase 2: all 8 ports hammer one bank; grants must
// rotate (each port served once per 8 cycles). Phase 3: random reads and
// writes from every port to its own address region; read data is checked
// against a per-port model, latency is checked to be exactly RD_LAT and
// counter updates must appear exactly with granted requests that ask.
module hbsm_tb;
  import m100_pkg::*;
  localparam int NP = 8, LAT = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mreq_t [NP-1:0] req;
  mrsp_t [NP-1:0] rsp;
  logic [NP-1:0] sc_upd_valid;
  logic [NP-1:0][SC_ID_W-1:0] sc_upd_id;

  hbsm dut (.clk, .rst_n, .req, .rsp, .sc_upd_valid, .sc_upd_id);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  word_t model [NP][256];
  int    expq_d [NP][$];
  word_t expq_v [NP][$];
  int    cycle = 0;
  always @(posedge clk) cycle++;

  // response checker
  always @(negedge clk) if (rst_n)
    for (int p = 0; p < NP; p++) if (rsp[p].rvalid) begin
      chk(expq_d[p].size() > 0, "unexpected rvalid");
      if (expq_d[p].size() > 0) begin
        int due;
        word_t v;
        due = expq_d[p].pop_front();
        v   = expq_v[p].pop_front();
        chk(cycle == due, $sformatf("latency port %0d: cycle %0d due %0d", p, cycle, due));
        chk(rsp[p].rdata == v, $sformatf("data port %0d", p));
      end
    end

  int grants [NP];
  int upd_seen = 0, upd_exp = 0;

  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: distinct banks -> all granted every cycle
    for (int c = 0; c < 20; c++) begin
      for (int p = 0; p < NP; p++) begin
        req[p] = '0; req[p].valid = 1; req[p].we = 1;
        req[p].addr = ADDR_W'(c * 32 + p * 4);   // bank 4p
        req[p].wdata = word_t'(c);
      end
      #1;
      chk(&{rsp[0].gnt, rsp[1].gnt, rsp[2].gnt, rsp[3].gnt, rsp[4].gnt, rsp[5].gnt,
            rsp[6].gnt, rsp[7].gnt}, "parallel grant");
      @(negedge clk);
    end
    // phase 2: one bank, round-robin
    foreach (grants[p]) grants[p] = 0;
    for (int c = 0; c < 64; c++) begin
      for (int p = 0; p < NP; p++) begin
        req[p] = '0; req[p].valid = 1; req[p].we = 1; req[p].addr = ADDR_W'(p * 32 + 5);
      end
      #1;
      begin
        int n;
        n = 0;
        for (int p = 0; p < NP; p++) if (rsp[p].gnt) begin n++; grants[p]++; end
        chk(n == 1, "one grant per bank per cycle");
      end
      @(negedge clk);
    end
    for (int p = 0; p < NP; p++) chk(grants[p] == 8, $sformatf("fair share port %0d: %0d", p, grants[p]));
    // phase 3: random traffic, port p owns words [p*256, p*256+255]
    for (int p = 0; p < NP; p++) for (int a = 0; a < 256; a++) model[p][a] = '0;
    for (int p = 0; p < NP; p++) begin
      for (int a = 0; a < 256; a++) begin
        req = '0;
        req[p].valid = 1; req[p].we = 1; req[p].addr = ADDR_W'(p * 256 + a);
        @(negedge clk);
      end
    end
    req = '0;
    for (int c = 0; c < 3000; c++) begin
      for (int p = 0; p < NP; p++) if (!req[p].valid || rsp[p].gnt) begin
        // previous request consumed; make a new one (or idle)
        req[p] = '0;
        if ($urandom % 4 != 0) begin
          req[p].valid  = 1;
          req[p].we     = ($urandom % 2);
          req[p].addr   = ADDR_W'(p * 256 + ($urandom % 256));
          req[p].wdata  = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
          req[p].sc_upd = ($urandom % 5 == 0);
          req[p].sc_id  = SC_ID_W'(p);
        end
      end
      #1;
      for (int p = 0; p < NP; p++) begin
        if (req[p].valid && rsp[p].gnt) begin
          int a;
          a = int'(req[p].addr) - p * 256;
          if (req[p].we) model[p][a] = req[p].wdata;
          else begin
            expq_d[p].push_back(cycle + LAT);
            expq_v[p].push_back(model[p][a]);
          end
          if (req[p].sc_upd) upd_exp++;
        end
        chk(sc_upd_valid[p] == (req[p].valid && rsp[p].gnt && req[p].sc_upd), "sync on grant");
        if (sc_upd_valid[p]) begin
          upd_seen++;
          chk(sc_upd_id[p] == SC_ID_W'(p), "sync id");
        end
      end
      @(negedge clk);
      for (int p = 0; p < NP; p++) if (req[p].valid && rsp[p].gnt) ; // handled above
    end
    req = '0;
    repeat (LAT + 3) @(negedge clk);
    for (int p = 0; p < NP; p++) chk(expq_d[p].size() == 0, "all reads answered");
    chk(upd_seen == upd_exp && upd_exp > 0, "update count");
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
