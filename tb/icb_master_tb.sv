// icb_master_tb: four engines offer random instructions with random masks;
// the sink takes beats with random back-pressure. Checks: each packet is a
// header beat carrying the mask followed by INST_BEATS payload beats that
// rebuild the instruction, the last beat is flagged, packets are never
// interleaved, each engine's packets keep their order, the engines are
// served round-robin, and a packet of INST_BEATS+1 beats leaves one beat
// per cycle after a one-cycle register when the link never stalls.
module icb_master_tb;
  import m100_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N_ENGINES-1:0] eng_valid = '0, eng_ready;
  logic [N_ENGINES-1:0][N_TPB-1:0] eng_mask;
  tpb_inst_t [N_ENGINES-1:0] eng_inst;
  icb_beat_t out_beat;
  logic out_ready, busy;
  int stall = 1;
  typedef struct { logic [N_TPB-1:0] m; tpb_inst_t i; } pkt_t;
  pkt_t sent[$];
  int beat_n = 0, got = 0;
  logic [INST_BEATS*ICB_W-1:0] flat;
  logic [N_TPB-1:0] hdr;

  icb_master dut (.*);

  task automatic chk(input bit c, input string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  always @(negedge clk) out_ready = stall ? ($urandom % 3) != 0 : 1'b1;

  always @(posedge clk) if (rst_n) begin
    for (int e = 0; e < 4; e++) if (eng_valid[e] && eng_ready[e]) begin
      pkt_t p;
      p.m = eng_mask[e]; p.i = eng_inst[e];
      sent.push_back(p);
    end
    if (out_beat.valid && out_ready) begin
      if (beat_n == 0) begin
        hdr = N_TPB'(out_beat.data);
        chk(!out_beat.last, "header not last");
      end else flat[(beat_n-1)*ICB_W +: ICB_W] = out_beat.data;
      chk(out_beat.last == (beat_n == INST_BEATS), "last flag");
      if (beat_n == INST_BEATS) begin
        pkt_t p;
        p = sent.pop_front();
        chk(hdr == p.m && flat[INST_W-1:0] == p.i, "packet contents in grant order");
        beat_n = 0;
        got++;
      end else beat_n++;
    end
  end

  int granted[4] = '{0, 0, 0, 0};
  task automatic engine(input int e);
    for (int n = 0; n < 100; n++) begin
      eng_mask[e] = {$urandom, $urandom};
      eng_inst[e] = mk(fu_e'($urandom % N_FU), 4'($urandom), lin($urandom % 4000, 1 + $urandom % 100), '0,
                       lin(n, 3), $urandom, $urandom % 2, e, n, 1, e);
      eng_valid[e] = 1;
      @(posedge clk);
      while (!eng_ready[e]) @(posedge clk);
      @(negedge clk);
      eng_valid[e] = 0;
      granted[e]++;
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      engine(0); engine(1); engine(2); engine(3);
      begin // round-robin: while all four wait, grants never differ by more than one
        repeat (1000) begin
          @(negedge clk);
          if (granted[0] < 90 && granted[3] < 90) begin
            int mx, mn;
            mx = 0; mn = 1000;
            for (int e = 0; e < 4; e++) begin if (granted[e] > mx) mx = granted[e]; if (granted[e] < mn) mn = granted[e]; end
            chk(mx - mn <= 1, "round-robin fairness");
          end
        end
      end
    join
    repeat (40) @(negedge clk);
    chk(got == 400 && sent.size() == 0, "all packets received");
    chk(!busy, "idle");
    // unstalled rate
    stall = 0;
    eng_inst[2] = mk(FU_CVU, 0, '0, '0, '0, 0, 0, 0, 0, 0, 0);
    eng_mask[2] = 1;
    eng_valid[2] = 1;
    @(posedge clk);
    while (!eng_ready[2]) @(posedge clk);
    t0 = $time;
    @(negedge clk);
    eng_valid[2] = 0;
    while (got != 401) @(posedge clk);
    chk(($time - t0) / 10 <= INST_BEATS + 2, $sformatf("packet in %0d cycles", ($time - t0) / 10));
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
