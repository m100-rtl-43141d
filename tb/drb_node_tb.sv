// drb_node_tb: one stop of the broadcast ring (cluster 3). Random flits with
// random 56-bit destination masks arrive; the local TPBs and the next stop
// apply random back-pressure. Checks: each local TPB named in the mask gets
// the flit exactly once, TPBs not named get nothing, the forwarded copy has
// the local bits cleared, and a flit with no remaining destinations is not
// forwarded.
module drb_node_tb;
  import m100_pkg::*;
  localparam int IDX = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  drb_flit_t in_flit = '0, out_flit, tpb_flit;
  logic in_ready, out_ready;
  logic [TPB_PER_CLUSTER-1:0] tpb_valid, tpb_ready;
  drb_flit_t fq[$];
  drb_flit_t lq[TPB_PER_CLUSTER][$];
  int local_got = 0, fwd_got = 0, multi = 0;

  drb_node #(.IDX(IDX)) dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    out_ready = ($urandom % 3) != 0;
    tpb_ready = 4'($urandom) | 4'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_flit.valid && in_ready) begin
      drb_flit_t f;
      f = in_flit;
      for (int t = 0; t < 4; t++) if (f.dst[IDX*4 + t]) lq[t].push_back(f);
      f.dst[IDX*4 +: 4] = '0;
      if (f.dst != '0) fq.push_back(f);
    end
    for (int t = 0; t < 4; t++) begin
      if (tpb_valid[t]) begin
        chk(tpb_ready[t], "delivery only when ready");
        chk(lq[t].size() > 0 && tpb_flit == lq[t].pop_front(), "local delivery");
        local_got++;
      end
    end
    if ($countones(tpb_valid) > 1) multi++;
    if (out_flit.valid && out_ready) begin
      chk(fq.size() > 0 && out_flit == fq.pop_front(), "forwarded flit");
      fwd_got++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      drb_flit_t f;
      f = '0;
      f.valid = 1; f.addr = 16'($urandom); f.data = {8{$urandom}};
      case ($urandom % 3)
        0: f.dst = 56'(1) << ($urandom % 56);
        1: f.dst = 56'(4'($urandom)) << (IDX * 4);
        default: f.dst = {$urandom, $urandom};
      endcase
      if (f.dst == '0) f.dst[0] = 1'b1;
      in_flit = f;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
      in_flit = '0;
    end
    repeat (20) @(negedge clk);
    for (int t = 0; t < 4; t++) chk(lq[t].size() == 0, "all local deliveries done");
    chk(fq.size() == 0, "all forwards done");
    chk(multi > 100 && local_got > 1000 && fwd_got > 1000, "multicast happened");
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
