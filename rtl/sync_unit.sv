// sync_unit: Synchronization Unit of a TPB.
//
// Holds NUM_SC synchronization counters. A functional unit that produces
// or consumes data signals progress by an update request, which increments
// one counter by one. A unit that depends on another issues a monitor
// request carrying a counter id and an expected value; the request is
// answered (mon_ok) only while the counter is at or above that value, and
// the unit waits until then. Updates arrive from the HBSM (tied to granted
// memory accesses), from the CSU, and from remote agents over the DRB.
// Several updates of the same counter in one cycle all count. A SU
// instruction sets a counter to a value (used to reset it between tasks).
//
// Counting up by one on update and answering when count >= expected
// follows the source; the number of counters, their width and the SET
// instruction are this design's choice. Counters wrap at 2^SC_W.
//
// Timing: an update is visible to monitors the cycle after it arrives.
module sync_unit
  import m100_pkg::*;
#(
  parameter int unsigned N_UPD = 10,
  parameter int unsigned N_MON = 4
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic [N_UPD-1:0]                upd_valid,
  input  logic [N_UPD-1:0][SC_ID_W-1:0]   upd_id,
  input  logic [N_MON-1:0][SC_ID_W-1:0]   mon_id,
  input  logic [N_MON-1:0][SC_W-1:0]      mon_val,
  output logic [N_MON-1:0]                mon_ok,
  input  logic                            set_valid,
  input  logic [SC_ID_W-1:0]              set_id,
  input  logic [SC_W-1:0]                 set_val,
  output logic [NUM_SC-1:0][SC_W-1:0]     counters
);
  logic [NUM_SC-1:0][SC_W-1:0] cnt_q;
  assign counters = cnt_q;

  always_comb
    for (int m = 0; m < int'(N_MON); m++)
      mon_ok[m] = (cnt_q[mon_id[m]] >= mon_val[m]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_q <= '0;
    else begin
      for (int c = 0; c < int'(NUM_SC); c++) begin
        logic [SC_W-1:0] inc;
        inc = '0;
        for (int u = 0; u < int'(N_UPD); u++)
          if (upd_valid[u] && upd_id[u] == SC_ID_W'(c)) inc = inc + 1'b1;
        if (set_valid && set_id == SC_ID_W'(c)) cnt_q[c] <= set_val + inc;
        else                                     cnt_q[c] <= cnt_q[c] + inc;
      end
    end
  end
endmodule
