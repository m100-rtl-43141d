// icb_node: one node of the Instruction Chain Bus.
//
// The ICB is a daisy chain that carries TPB instructions from the CCB to
// the clusters at 64 bits per cycle. An instruction is one header beat
// holding a 56-bit TPB destination mask (bit 4c+t = TPB t of cluster c),
// followed by INST_BEATS payload beats, the first carrying the lowest
// instruction bits; 'last' marks the final payload beat. Every node
// registers each beat and passes it on to the next node; a node whose
// cluster has a bit set in the mask also assembles the payload and, with
// the last beat, pushes {local 4-bit mask, instruction} into its cluster's
// instruction queue. A beat is accepted only if the output register is free
// (or drains in the same cycle) and, for a last beat addressed here, the
// queue has room, so the chain stalls rather than losing an instruction.
//
// Daisy chaining, 64 bits per cycle and mask-based multicast follow the
// source; beat layout and flow control are this design's choice.
//
// Lint lists the low 64 bits of the assembly register as unused: they are
// shifted out before the register is read as an instruction.
module icb_node
  import m100_pkg::*;
#(
  parameter int unsigned IDX = 0   // cluster index on the chain
) (
  input  logic       clk,
  input  logic       rst_n,
  input  icb_beat_t  in_beat,
  output logic       in_ready,
  output icb_beat_t  out_beat,
  input  logic       out_ready,
  output logic       push,
  output logic [TPB_PER_CLUSTER-1:0] push_mask,
  output tpb_inst_t  push_inst,
  input  logic       q_ready,
  output logic       busy
);
  localparam int unsigned AW = INST_BEATS * ICB_W;
  icb_beat_t out_q;
  logic      hdr_q;                      // next beat is a header
  logic [TPB_PER_CLUSTER-1:0] mask_q, mask_cur;
  logic [AW-1:0] asm_q, asm_nxt;
  logic      take;

  assign mask_cur = hdr_q ? in_beat.data[IDX*TPB_PER_CLUSTER +: TPB_PER_CLUSTER] : mask_q;
  assign in_ready = (!out_q.valid || out_ready) &&
                    !(!hdr_q && in_beat.last && (mask_q != '0) && !q_ready);
  assign take     = in_beat.valid && in_ready;
  assign asm_nxt  = {in_beat.data, asm_q[AW-1:ICB_W]};
  assign out_beat = out_q;
  assign push      = take && !hdr_q && in_beat.last && (mask_q != '0);
  assign push_mask = mask_q;
  assign push_inst = tpb_inst_t'(asm_nxt[INST_W-1:0]);
  assign busy      = out_q.valid || !hdr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q  <= '0;
      hdr_q  <= 1'b1;
      mask_q <= '0;
      asm_q  <= '0;
    end else begin
      if (out_ready || !out_q.valid) out_q.valid <= 1'b0;
      if (take) begin
        out_q <= in_beat;
        if (hdr_q) begin
          mask_q <= mask_cur;
          hdr_q  <= 1'b0;
        end else begin
          asm_q <= asm_nxt;
          if (in_beat.last) hdr_q <= 1'b1;
        end
      end
    end
  end
endmodule
