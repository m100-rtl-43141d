// sync_fifo: synchronous first-in first-out buffer.
//
// DEPTH entries of W bits held in a register array. push writes din when
// not full; pop removes the head (dout) when not empty; both may happen in
// one cycle. count is the number of entries held. dout is the head entry
// combinationally (first-word fall-through).
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd_q, wr_q;

  assign empty = (count == 0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_q];

  always_ff @(posedge clk)
    if (push && !full) mem[wr_q] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      count <= '0;
    end else begin
      if (push && !full) begin
        wr_q <= (wr_q == PW'(DEPTH - 1)) ? '0 : wr_q + 1'b1;
      end
      if (pop && !empty)
        rd_q <= (rd_q == PW'(DEPTH - 1)) ? '0 : rd_q + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(push && !full))
                     - (($clog2(DEPTH+1))'(pop && !empty));
    end
  end
endmodule
