// ciq: Cluster Instruction Queue.
//
// Buffers TPB instructions that the cluster's ICB node receives (each with
// the mask of this cluster's TPBs it is meant for) and hands them to the
// TPBs' functional units as soon as those units can take them. There is no
// global order: each cycle, for each TPB, the oldest instruction that is
// still pending for that TPB and whose functional unit is ready is
// dispatched, provided no older instruction for the same unit of the same
// TPB is still pending. Order is therefore kept only within one functional
// unit of one TPB. A multicast instruction is dispatched to each of its
// TPBs independently; its entry is freed when it has gone to all of them.
// Entries are freed from the head, one per cycle.
//
// Out-of-order dispatch with per-unit order follows the source; DEPTH (the
// source says only "a large buffer") and one dispatch per TPB per cycle
// are this design's choice.
//
// Lint lists the upper bits of a loop index as unused: only the low bits
// address the queue.
module ciq
  import m100_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push,
  input  logic [TPB_PER_CLUSTER-1:0] push_mask,
  input  tpb_inst_t  push_inst,
  output logic       ready,          // room for one more instruction
  input  logic [TPB_PER_CLUSTER-1:0][N_FU-1:0] fu_ready,
  output logic [TPB_PER_CLUSTER-1:0] inst_valid,
  output tpb_inst_t  [TPB_PER_CLUSTER-1:0] inst,
  output logic [TPB_PER_CLUSTER-1:0] pending   // TPB has queued work
);
  localparam int unsigned PW = $clog2(DEPTH);
  tpb_inst_t                   q_inst [DEPTH];
  logic [DEPTH-1:0][TPB_PER_CLUSTER-1:0] q_pend;
  logic [DEPTH-1:0]            q_val;
  logic [PW-1:0]               head_q, tail_q;
  logic [$clog2(DEPTH+1)-1:0]  cnt_q;
  logic [TPB_PER_CLUSTER-1:0][PW-1:0] sel;
  logic                        pop;

  assign ready = (cnt_q < ($clog2(DEPTH+1))'(DEPTH));
  assign pop   = q_val[head_q] && (q_pend[head_q] == '0);

  always_comb begin
    for (int t = 0; t < int'(TPB_PER_CLUSTER); t++) begin
      logic [N_FU-1:0] blocked;
      blocked       = '0;
      inst_valid[t] = 1'b0;
      sel[t]        = '0;
      pending[t]    = 1'b0;
      for (int i = 0; i < int'(DEPTH); i++) begin
        logic [PW-1:0] e;
        int unsigned   f;
        e = PW'(32'(head_q) + i);
        f = 32'(q_inst[e].fu) % N_FU;
        if (q_val[e] && q_pend[e][t]) begin
          pending[t] = 1'b1;
          if (!blocked[f] && fu_ready[t][f] && !inst_valid[t]) begin
            inst_valid[t] = 1'b1;
            sel[t]        = e;
          end
          blocked[f] = 1'b1;
        end
      end
      inst[t] = q_inst[sel[t]];
    end
  end

  always_ff @(posedge clk) if (push && ready) q_inst[tail_q] <= push_inst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_val  <= '0;
      q_pend <= '0;
      head_q <= '0;
      tail_q <= '0;
      cnt_q  <= '0;
    end else begin
      for (int t = 0; t < int'(TPB_PER_CLUSTER); t++)
        if (inst_valid[t]) q_pend[sel[t]][t] <= 1'b0;
      if (pop) begin
        q_val[head_q] <= 1'b0;
        head_q <= head_q + 1'b1;
      end
      if (push && ready) begin
        q_val[tail_q]  <= 1'b1;
        q_pend[tail_q] <= push_mask;
        tail_q <= tail_q + 1'b1;
      end
      cnt_q <= cnt_q + ($clog2(DEPTH+1))'(push && ready) - ($clog2(DEPTH+1))'(pop);
    end
  end
  initial assert (DEPTH == (1 << PW));
endmodule
