// drb_node: one cluster node of the Data Ring Bus.
//
// The DRB is a ring that starts and ends at the CCB and visits every
// cluster in turn. It carries 32-byte flits, each with a 56-bit TPB
// destination mask, so one flit read from memory reaches any set of TPBs
// (broadcast / multicast). A node hands an incoming flit to each of its
// four TPBs whose mask bit is set, clears those bits, and forwards the flit
// through a register to the next node unless no destination remains. A
// flit is taken only if every local target can take it and the output
// register is free, so delivery is lossless and in order on every path.
//
// Ring topology and broadcast use follow the source (which gives 256 GB/s
// aggregate); flit layout, mask-clearing and flow control are this
// design's choice. Injection of data from a cluster into the ring is not
// built.
module drb_node
  import m100_pkg::*;
#(
  parameter int unsigned IDX = 0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  drb_flit_t  in_flit,
  output logic       in_ready,
  output drb_flit_t  out_flit,
  input  logic       out_ready,
  output logic [TPB_PER_CLUSTER-1:0] tpb_valid,
  output drb_flit_t  tpb_flit,
  input  logic [TPB_PER_CLUSTER-1:0] tpb_ready
);
  drb_flit_t out_q;
  logic [TPB_PER_CLUSTER-1:0] local_m;
  logic take;
  drb_flit_t fwd;

  assign local_m  = in_flit.dst[IDX*TPB_PER_CLUSTER +: TPB_PER_CLUSTER];
  assign in_ready = (!out_q.valid || out_ready) && ((local_m & ~tpb_ready) == '0);
  assign take     = in_flit.valid && in_ready;
  assign tpb_valid = (in_flit.valid && in_ready) ? local_m : '0;
  assign tpb_flit  = in_flit;
  assign out_flit  = out_q;

  always_comb begin
    fwd = in_flit;
    fwd.dst[IDX*TPB_PER_CLUSTER +: TPB_PER_CLUSTER] = '0;
    fwd.valid = (fwd.dst != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_q <= '0;
    else if (take)                      out_q <= fwd;
    else if (out_ready || !out_q.valid) out_q.valid <= 1'b0;
  end
endmodule
