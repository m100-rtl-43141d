// tb_mem: behavioural multi-port word memory for unit testbenches.
// Each port follows the mreq_t/mrsp_t protocol: a request is granted in the
// cycle it is presented unless STALL is set, in which case grants are
// withheld at random (about one cycle in four). Read data returns LAT
// cycles after the grant, in order. Address is taken modulo WORDS.
module tb_mem
  import m100_pkg::*;
#(
  parameter int unsigned NP    = 1,
  parameter int unsigned WORDS = 4096,
  parameter int unsigned LAT   = 3,
  parameter bit          STALL = 0
) (
  input  logic          clk,
  input  mreq_t [NP-1:0] req,
  output mrsp_t [NP-1:0] rsp
);
  word_t mem [WORDS];
  logic  [NP-1:0] ok;
  logic  [NP-1:0] v_pipe [LAT];
  word_t d_pipe [LAT][NP];
  int unsigned grants = 0;

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NP); p++) ok[p] <= STALL ? (($urandom % 4) != 0) : 1'b1;
  end
  initial ok = '1;

  always_comb
    for (int p = 0; p < int'(NP); p++) begin
      rsp[p].gnt    = req[p].valid && ok[p];
      rsp[p].rvalid = v_pipe[LAT-1][p];
      rsp[p].rdata  = d_pipe[LAT-1][p];
    end

  always_ff @(posedge clk) begin
    for (int p = 0; p < int'(NP); p++) begin
      v_pipe[0][p] <= rsp[p].gnt && !req[p].we;
      d_pipe[0][p] <= mem[req[p].addr % WORDS];
      if (rsp[p].gnt && req[p].we) mem[req[p].addr % WORDS] <= req[p].wdata;
      if (rsp[p].gnt) grants++;
    end
    for (int s = 1; s < int'(LAT); s++) begin
      v_pipe[s] <= v_pipe[s-1];
      d_pipe[s] <= d_pipe[s-1];
    end
  end
  initial for (int s = 0; s < int'(LAT); s++) v_pipe[s] = '0;
endmodule
