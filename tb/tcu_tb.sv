// tcu_tb: one 32x32 by 32x64 int8 tile through the TCU, fed by a memory
// model with a 20-cycle read latency. Checks every output byte against a
// reference (ReLU, shift, int8 saturation), that the MAC phase takes
// exactly 32 cycles (8x64 MACs x 4-deep dot products, 32 B activation and
// 64 B weight per cycle), that the unit waits for its monitor request, that
// exactly the last write carries the counter update, and a second
// instruction that accumulates over K (keep accumulators) without ReLU.
module tcu_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inst_valid = 0, ready, mon_ok, mac_active;
  tpb_inst_t inst;
  logic [SC_ID_W-1:0] mon_id;
  logic [SC_W-1:0] mon_val;
  mreq_t [1:0] req;
  mrsp_t [1:0] rsp;

  tcu dut (.clk, .rst_n, .inst_valid, .inst, .ready, .mon_id, .mon_val, .mon_ok,
           .rd_req(req[0]), .rd_rsp(rsp[0]), .wr_req(req[1]), .wr_rsp(rsp[1]), .mac_active);
  tb_mem #(.NP(2), .WORDS(4096), .LAT(20)) mem (.clk, .req, .rsp);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  int A [32][32], W [32][64], C [32][64];
  int mac_cycles, first_mac, last_mac, upd_count, cyc;
  bit reads_during_wait;
  always @(posedge clk) begin
    cyc++;
    if (mac_active) begin
      mac_cycles++;
      if (first_mac < 0) first_mac = cyc;
      last_mac = cyc;
    end
    if (req[1].valid && rsp[1].gnt && req[1].sc_upd) begin
      upd_count++;
      chk(req[1].sc_id == 5'd9, "update id");
      chk(req[1].addr == 32'(256 + 63), "update rides on last write");
    end
    if (!mon_ok && req[0].valid) reads_during_wait = 1;
  end

  task automatic load(input int base_a, input int base_w);
    for (int t = 0; t < 32; t++) begin
      word_t w;
      int k, m;
      k = t / 4; m = t % 4;
      for (int r = 0; r < 8; r++) for (int e = 0; e < 4; e++)
        w[(r*4+e)*8 +: 8] = 8'(A[8*m+r][4*k+e]);
      mem.mem[base_a + t] = w;
    end
    for (int q = 0; q < 64; q++) begin
      word_t w;
      for (int j = 0; j < 32; j++) w[j*8 +: 8] = 8'(W[q/2][32*(q%2)+j]);
      mem.mem[base_w + q] = w;
    end
  endtask

  task automatic run(input tpb_inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    @(negedge clk);
    inst_valid = 0;
    while (!ready) @(negedge clk);
  endtask

  function automatic int sat8(input int v);
    return v > 127 ? 127 : (v < -128 ? -128 : v);
  endfunction

  initial begin
    mon_ok = 0; first_mac = -1; mac_cycles = 0; upd_count = 0; cyc = 0;
    reads_during_wait = 0;
    for (int i = 0; i < 32; i++) for (int k = 0; k < 32; k++) A[i][k] = int'($urandom % 256) - 128;
    for (int k = 0; k < 32; k++) for (int j = 0; j < 64; j++) W[k][j] = int'($urandom % 256) - 128;
    for (int i = 0; i < 32; i++) for (int j = 0; j < 64; j++) begin
      C[i][j] = 0;
      for (int k = 0; k < 32; k++) C[i][j] += A[i][k] * W[k][j];
    end
    load(0, 64);
    repeat (2) @(negedge clk);
    rst_n = 1;
    fork
      run(mk(FU_TCU, 4'd0, lin(0, 32), lin(64, 64), lin(256, 64), 32'h0000_010a,
             1, 3, 2, 1, 9));   // ReLU, shift 10; wait SC3 >= 2; update SC9
      begin
        repeat (30) @(negedge clk);
        chk(mac_cycles == 0 && mon_id == 5'd3 && mon_val == 16'd2, "waits for monitor");
        mon_ok = 1;
      end
    join
    chk(!reads_during_wait, "no reads before monitor answered");
    chk(mac_cycles == 32, $sformatf("MAC cycles %0d", mac_cycles));
    chk(last_mac - first_mac + 1 == 32, $sformatf("MAC span %0d", last_mac - first_mac + 1));
    chk(upd_count == 1, "one update");
    for (int q = 0; q < 64; q++) for (int j = 0; j < 32; j++) begin
      int v;
      v = C[q/2][32*(q%2)+j];
      if (v < 0) v = 0;
      v = sat8(v >>> 10);
      chk($signed(mem.mem[256+q][j*8 +: 8]) == v, $sformatf("C[%0d][%0d]", q/2, 32*(q%2)+j));
    end
    // K accumulation: second tile on the same A and W, no clear, no ReLU, shift 11
    run(mk(FU_TCU, 4'd0, lin(0, 32), lin(64, 64), lin(512, 64), 32'h0000_020b,
           0, 0, 0, 0, 0));
    for (int q = 0; q < 64; q++) for (int j = 0; j < 32; j++) begin
      int v;
      v = sat8((2 * C[q/2][32*(q%2)+j]) >>> 11);
      chk($signed(mem.mem[512+q][j*8 +: 8]) == v, "accumulated C");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
