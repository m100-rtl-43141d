// icb_master: the CCB's node on the Instruction Chain Bus.
//
// Each of the N_ENGINES custom engines hands over one complete TPB
// instruction with its 56-bit TPB destination mask (valid/ready). The
// master picks one engine round-robin, sends the header beat (the mask) and
// then the instruction as INST_BEATS 64-bit beats, lowest bits first, the
// last one flagged, and only then takes the next instruction, so beats of
// different instructions never interleave. 'busy' is high while an
// instruction is being sent.
//
// One master serving four engines, the daisy-chained 64-bit bus and the
// destination mask follow the source; the arbitration is this design's.
module icb_master
  import m100_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [N_ENGINES-1:0]            eng_valid,
  input  logic [N_ENGINES-1:0][N_TPB-1:0] eng_mask,
  input  tpb_inst_t  [N_ENGINES-1:0]      eng_inst,
  output logic [N_ENGINES-1:0]            eng_ready,
  output icb_beat_t  out_beat,
  input  logic       out_ready,
  output logic       busy
);
  localparam int unsigned AW = INST_BEATS * ICB_W;
  logic       act_q;
  logic [$clog2(INST_BEATS+1)-1:0] beat_q;
  logic [AW-1:0]    payload_q;
  logic [N_TPB-1:0] mask_q;
  logic [N_ENGINES-1:0] gnt;
  logic [1:0]       gidx;

  rr_arb #(.N(N_ENGINES)) u_arb (.clk, .rst_n, .req(eng_valid), .advance(!act_q),
    .gnt, .gnt_idx(gidx));

  assign eng_ready = act_q ? '0 : gnt;
  assign busy      = act_q;

  always_comb begin
    out_beat       = '0;
    out_beat.valid = act_q;
    if (beat_q == 0) out_beat.data = ICB_W'(mask_q);
    else             out_beat.data = payload_q[(32'(beat_q) - 1) * ICB_W +: ICB_W];
    out_beat.last  = (beat_q == ($clog2(INST_BEATS+1))'(INST_BEATS));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q     <= 1'b0;
      beat_q    <= '0;
      payload_q <= '0;
      mask_q    <= '0;
    end else if (!act_q) begin
      if (|gnt) begin
        act_q     <= 1'b1;
        beat_q    <= '0;
        payload_q <= AW'(eng_inst[gidx]);
        mask_q    <= eng_mask[gidx];
      end
    end else if (out_ready) begin
      beat_q <= beat_q + 1'b1;
      if (out_beat.last) act_q <= 1'b0;
    end
  end
endmodule
