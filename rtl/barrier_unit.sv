// barrier_unit: the CCB's barrier synchronization.
//
// Each custom engine can open a barrier over a group of TPBs (a 56-bit
// mask). The barrier is released ('done' pulse for that engine) once no
// instruction is still travelling on the instruction chain and every TPB
// in the group is idle: nothing queued for it in its cluster and no
// functional unit running. Engines use this for infrequent global
// synchronization points between phases of a task; fine-grained
// producer/consumer synchronization uses the TPBs' counters instead.
// The meaning of a barrier follows the source; the request interface and
// the idle condition are this design's choice.
module barrier_unit
  import m100_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [N_ENGINES-1:0]            bar_req,
  input  logic [N_ENGINES-1:0][N_TPB-1:0] bar_mask,
  output logic [N_ENGINES-1:0]            bar_done,
  input  logic [N_TPB-1:0]                tpb_idle,
  input  logic                            icb_busy
);
  logic [N_ENGINES-1:0]            wait_q;
  logic [N_ENGINES-1:0][N_TPB-1:0] mask_q;

  always_comb
    for (int e = 0; e < int'(N_ENGINES); e++)
      bar_done[e] = wait_q[e] && !icb_busy && ((mask_q[e] & ~tpb_idle) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= '0;
      mask_q <= '0;
    end else
      for (int e = 0; e < int'(N_ENGINES); e++) begin
        if (bar_done[e]) wait_q[e] <= 1'b0;
        else if (bar_req[e] && !wait_q[e]) begin
          wait_q[e] <= 1'b1;
          mask_q[e] <= bar_mask[e];
        end
      end
  end
endmodule
