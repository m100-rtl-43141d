// rr_arb: round-robin arbiter.
//
// Grants one of N requesters per cycle, combinationally. The search starts
// one past the requester granted last, so every requester that keeps asking
// is served within N grants. The pointer moves only when 'advance' is high
// in a cycle with a grant, so a caller can hold a grant for several cycles.
//
// Lint lists the upper bits of a loop index as unused: only the low bits
// address the requesters.
module rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [(N>1?$clog2(N):1)-1:0] gnt_idx
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last_q;

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    for (int unsigned i = 1; i <= N; i++) begin
      int unsigned c;
      c = (32'(last_q) + i) % N;
      if (req[c] && gnt == '0) begin
        gnt[c]  = 1'b1;
        gnt_idx = IW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      last_q <= IW'(N - 1);
    else if (advance && (|gnt))      last_q <= gnt_idx;
  end
endmodule
