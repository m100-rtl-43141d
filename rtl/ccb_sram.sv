// ccb_sram: the Central Control Block's shared on-chip SRAM.
//
// 32 MB in BANKS (4) banks of 8 MB, addressed in 32-byte words. Addresses
// interleave across banks in 4 KB chunks (INTLV_WORDS = 128 words): word
// address a goes to bank (a / 128) mod 4, at row {a / 512, a mod 128}, so
// a long sequential transfer walks all banks in turn and several masters
// can work in parallel on different banks. Each of NP ports presents one
// mreq_t at a time, held until gnt; masters that hit the same bank are
// served round-robin. Reads return data one cycle after gnt (rvalid).
//
// Capacity, bank count and 4 KB interleave follow the source; word width,
// port protocol, arbitration and latency are this design's choice.
//
// Lint lists unused bits of the bank_of/row_of arguments and of the
// selected request: each function reads only its own address field, and a
// bank uses only address, write enable and write data.
module ccb_sram
  import m100_pkg::*;
#(
  parameter int unsigned NP          = 3,
  parameter int unsigned BANKS       = 4,
  parameter int unsigned BANK_WORDS  = 262144,   // 8 MB of 32-byte words
  parameter int unsigned INTLV_WORDS = 128       // 4 KB
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mreq_t [NP-1:0]    req,
  output mrsp_t [NP-1:0]    rsp
);
  localparam int unsigned OW = $clog2(INTLV_WORDS);
  localparam int unsigned BW = $clog2(BANKS);
  localparam int unsigned RW = $clog2(BANK_WORDS);
  localparam int unsigned HW = RW - OW;           // chunk-index bits

  logic [BANKS-1:0][NP-1:0]          b_req, b_gnt;
  logic [BANKS-1:0][$clog2(NP)-1:0]  b_idx;
  logic [NP-1:0]                     p_gnt, rv_q;
  logic [NP-1:0][BW-1:0]             rb_q;
  word_t                             b_rdata [BANKS];

  function automatic logic [BW-1:0] bank_of(input logic [ADDR_W-1:0] a);
    return a[OW +: BW];
  endfunction
  function automatic logic [RW-1:0] row_of(input logic [ADDR_W-1:0] a);
    return {a[OW+BW +: HW], a[OW-1:0]};
  endfunction

  always_comb begin
    for (int b = 0; b < int'(BANKS); b++)
      for (int p = 0; p < int'(NP); p++)
        b_req[b][p] = req[p].valid && bank_of(req[p].addr) == BW'(b);
    p_gnt = '0;
    for (int b = 0; b < int'(BANKS); b++) p_gnt |= b_gnt[b];
    for (int p = 0; p < int'(NP); p++) begin
      rsp[p].gnt    = p_gnt[p];
      rsp[p].rvalid = rv_q[p];
      rsp[p].rdata  = b_rdata[rb_q[p]];
    end
  end

  for (genvar b = 0; b < int'(BANKS); b++) begin : g_bank
    word_t mem [BANK_WORDS];
    mreq_t sel;
    rr_arb #(.N(NP)) u_arb (.clk, .rst_n, .req(b_req[b]), .advance(1'b1),
      .gnt(b_gnt[b]), .gnt_idx(b_idx[b]));
    assign sel = req[b_idx[b]];
    always_ff @(posedge clk)
      if (|b_gnt[b]) begin
        if (sel.we) mem[row_of(sel.addr)] <= sel.wdata;
        else        b_rdata[b]           <= mem[row_of(sel.addr)];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rv_q <= '0;
      rb_q <= '0;
    end else
      for (int p = 0; p < int'(NP); p++) begin
        rv_q[p] <= p_gnt[p] && !req[p].we;
        rb_q[p] <= bank_of(req[p].addr);
      end
  end
endmodule
