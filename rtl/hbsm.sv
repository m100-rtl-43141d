// hbsm: High Bandwidth Shared Memory of a TPB.
//
// A 2 MB SRAM shared by all functional units of a TPB, built from NBANK
// banks of one 32-byte word each per cycle. Word addresses interleave
// across banks at word (32-byte) granularity: bank = addr mod NBANK,
// row = addr / NBANK. Each of NP requester ports presents one request at a
// time (mreq_t, held until gnt). Requests that target the same bank are
// arbitrated round-robin; requests to different banks proceed in the same
// cycle. Because a port's request is held until granted and read data
// returns after a fixed latency, accesses of one requester complete in
// order. When a request wins arbitration and asks for it (sc_upd), the
// HBSM emits an update for synchronization counter sc_id in that cycle:
// from then on the access is globally visible, since no later request can
// overtake it.
//
// Bank count, bank width, interleave, port count, round-robin arbitration,
// in-order service and sync-on-grant follow the source. The source gives
// the latency only as about 20 cycles; RD_LAT is the total latency from
// grant to rvalid, realised as a one-cycle bank read followed by a delay
// line. Writes are posted (no response).
//
// Lint lists unused bits of the selected request: a bank uses only the
// row part of the address and none of the counter-update fields, which
// are handled by the arbiter side.
module hbsm
  import m100_pkg::*;
#(
  parameter int unsigned NP         = 8,      // requester ports
  parameter int unsigned NBANK      = 32,     // banks
  parameter int unsigned BANK_WORDS = 2048,   // 32-byte words per bank (2 MB total)
  parameter int unsigned RD_LAT     = 20      // cycles from grant to rvalid
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  mreq_t [NP-1:0]             req,
  output mrsp_t [NP-1:0]             rsp,
  output logic  [NP-1:0]             sc_upd_valid,
  output logic  [NP-1:0][SC_ID_W-1:0] sc_upd_id
);
  localparam int unsigned BW = $clog2(NBANK);
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic [NBANK-1:0][NP-1:0]         bank_req, bank_gnt;
  logic [NBANK-1:0][$clog2(NP)-1:0] bank_idx;
  logic [NP-1:0]                    port_gnt;
  word_t                            bank_rdata [NBANK];

  always_comb begin
    for (int b = 0; b < int'(NBANK); b++)
      for (int p = 0; p < int'(NP); p++)
        bank_req[b][p] = req[p].valid && (req[p].addr[BW-1:0] == BW'(b));
    port_gnt = '0;
    for (int b = 0; b < int'(NBANK); b++) port_gnt |= bank_gnt[b];
  end

  for (genvar b = 0; b < int'(NBANK); b++) begin : g_bank
    word_t mem [BANK_WORDS];
    mreq_t sel;
    rr_arb #(.N(NP)) u_arb (
      .clk, .rst_n, .req(bank_req[b]), .advance(1'b1),
      .gnt(bank_gnt[b]), .gnt_idx(bank_idx[b]));
    assign sel = req[bank_idx[b]];
    always_ff @(posedge clk) begin
      if (|bank_gnt[b]) begin
        if (sel.we) mem[sel.addr[BW +: RW]] <= sel.wdata;
        else        bank_rdata[b]           <= mem[sel.addr[BW +: RW]];
      end
    end
  end

  // Per-port response path: remember which bank a granted read used,
  // pick up that bank's data one cycle later, then delay to RD_LAT.
  for (genvar p = 0; p < int'(NP); p++) begin : g_port
    logic          v1_q;
    logic [BW-1:0] b1_q;
    logic  [RD_LAT-1:1] dv_q;
    word_t         dd_q [RD_LAT];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v1_q <= 1'b0;
        b1_q <= '0;
        dv_q <= '0;
      end else begin
        v1_q <= port_gnt[p] && !req[p].we;
        b1_q <= req[p].addr[BW-1:0];
        if (RD_LAT > 1) begin
          dv_q[1] <= v1_q;
          for (int s = 2; s < int'(RD_LAT); s++) dv_q[s] <= dv_q[s-1];
        end
      end
    end
    always_ff @(posedge clk) begin
      if (RD_LAT > 1) begin
        dd_q[1] <= bank_rdata[b1_q];
        for (int s = 2; s < int'(RD_LAT); s++) dd_q[s] <= dd_q[s-1];
      end
    end
    assign dd_q[0] = '0;
    always_comb begin
      rsp[p].gnt = port_gnt[p];
      if (RD_LAT > 1) begin
        rsp[p].rvalid = dv_q[RD_LAT-1];
        rsp[p].rdata  = dd_q[RD_LAT-1];
      end else begin
        rsp[p].rvalid = v1_q;
        rsp[p].rdata  = bank_rdata[b1_q];
      end
      sc_upd_valid[p] = port_gnt[p] && req[p].sc_upd;
      sc_upd_id[p]    = req[p].sc_id;
    end
  end
endmodule
