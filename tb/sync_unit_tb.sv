// sync_unit_tb: random updates (several per cycle, also to one counter),
// SET operations and monitor requests, checked against a counter model.
module sync_unit_tb;
  import m100_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [9:0] upd_valid;
  logic [9:0][SC_ID_W-1:0] upd_id;
  logic [3:0][SC_ID_W-1:0] mon_id;
  logic [3:0][SC_W-1:0] mon_val;
  logic [3:0] mon_ok;
  logic set_valid;
  logic [SC_ID_W-1:0] set_id;
  logic [SC_W-1:0] set_val;
  logic [NUM_SC-1:0][SC_W-1:0] counters;
  int model [NUM_SC];

  sync_unit #(.N_UPD(10), .N_MON(4)) dut (.*);

  initial begin
    upd_valid = '0; upd_id = '0; mon_id = '0; mon_val = '0; set_valid = 0; set_id = 0; set_val = 0;
    foreach (model[i]) model[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // check monitors against the model (state before this cycle's updates)
      for (int m = 0; m < 4; m++) begin
        mon_id[m]  = SC_ID_W'($urandom % 8);
        mon_val[m] = SC_W'(model[mon_id[m]] + int'($urandom % 3) - 1);
      end
      #1;
      for (int m = 0; m < 4; m++) begin
        checks++;
        if (mon_ok[m] != (model[mon_id[m]] >= int'(mon_val[m]))) begin
          failures++;
          $display("FAIL mon %0d id %0d val %0d cnt %0d", m, mon_id[m], mon_val[m], model[mon_id[m]]);
        end
      end
      for (int u = 0; u < 10; u++) begin
        upd_valid[u] = ($urandom % 3 == 0);
        upd_id[u]    = SC_ID_W'($urandom % 8);
      end
      set_valid = ($urandom % 50 == 0);
      set_id    = SC_ID_W'($urandom % 8);
      set_val   = SC_W'($urandom % 100);
      // model
      begin
        int nm [NUM_SC];
        foreach (nm[i]) nm[i] = model[i];
        if (set_valid) nm[set_id] = set_val;
        for (int u = 0; u < 10; u++) if (upd_valid[u]) nm[upd_id[u]] = nm[upd_id[u]] + 1;
        @(posedge clk); #1;
        foreach (nm[i]) model[i] = nm[i] & 16'hffff;
      end
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (int'(counters[i]) != model[i]) begin failures++; $display("FAIL cnt %0d", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
