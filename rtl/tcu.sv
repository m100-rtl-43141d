// tcu: Tensor Computing Unit.
//
// A dense array of ROWS x COLS multiply-accumulate units (8 x 64), each
// forming a 4-element int8 dot product per cycle. One instruction computes
// one output tile C[32x64] (+)= A[32x32] * W[32x64]:
//   1. wait for the instruction's synchronization counter (if wait_en);
//   2. read the weight tile W (64 words, walker twu_b) into the weight
//      buffer;
//   3. stream the activation tile A (32 words, walker twu_a); each word is
//      one 8-row x 4-deep slice of A, broadcast along the array rows, while
//      the matching 4 x 64 slice of the weight buffer is broadcast down the
//      columns; each word advances the accumulators of one 8-row block.
//      The 32 words are ordered k-slice outer, row-block inner, so every
//      weight slice is used 4 times: 32 B of activation and 64 B of weight
//      per cycle, 32 cycles per tile, as in the source;
//   4. pass the 32x64 int32 output buffer through the activation stage
//      (optional ReLU, arithmetic right shift by imm[4:0], saturation to
//      int8) and write the 64 result words along walker twu_o; the last
//      write carries the instruction's counter update.
// imm[8]=ReLU, imm[9]=keep accumulators (accumulate over K across
// instructions), imm[10]=skip the output phase (partial sums stay).
//
// Data layouts in HBSM (this design's choice): an A word holds
// A[8m+r][4k+e] at byte 4r+e for A word index 4k+m; a W word holds
// W[k][32h+j] at byte j for W word index 2k+h; a C word holds C[i][32h+j]
// at byte j for C word index 2i+h. The array size, dot-product depth,
// reuse pattern, output buffer and activation stage follow the source; the
// tile size per instruction, layouts, int8/int32 types, the ReLU+shift
// activation and the absence of weight double buffering are this design's.
//
// Lint lists unused bits of the stored instruction: fields belonging to
// other units are not read here.
module tcu
  import m100_pkg::*;
#(
  parameter int unsigned ROWS = 8,
  parameter int unsigned COLS = 64,
  parameter int unsigned DOT  = 4,
  parameter int unsigned MT   = 32,   // output rows per tile
  parameter int unsigned KT   = 32    // reduction depth per tile
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  input  tpb_inst_t   inst,
  output logic        ready,          // idle, can take an instruction
  output logic [SC_ID_W-1:0] mon_id,
  output logic [SC_W-1:0]    mon_val,
  input  logic        mon_ok,
  output mreq_t       rd_req,
  input  mrsp_t       rd_rsp,
  output mreq_t       wr_req,
  input  mrsp_t       wr_rsp,
  output logic        mac_active      // a MAC-array cycle (for counting)
);
  localparam int unsigned MB   = MT / ROWS;            // row blocks
  localparam int unsigned WPR  = COLS / WORD_BYTES;    // words per W/C row
  localparam int unsigned NW_W = KT * WPR;             // weight words
  localparam int unsigned NW_A = MT * KT / WORD_BYTES; // activation words
  localparam int unsigned NW_C = MT * WPR;             // output words

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_LOADW, S_MAC, S_OUT} st_e;
  st_e st_q;
  tpb_inst_t inst_q;

  logic signed [7:0]  wbuf [KT][COLS];
  logic signed [31:0] acc  [MT][COLS];

  logic     rs_start, rs_busy, rs_valid, rs_last;
  word_t    rs_data;
  twu_cfg_t rs_cfg;
  logic     ws_start, ws_busy, ws_done, ws_ready;
  word_t    c_word;
  logic [31:0] cnt_q;

  assign ready   = (st_q == S_IDLE);
  assign mon_id  = inst_q.wait_sc;
  assign mon_val = inst_q.wait_val;

  rd_stream u_rd (
    .clk, .rst_n, .start(rs_start), .cfg(rs_cfg), .busy(rs_busy),
    .req(rd_req), .rsp(rd_rsp), .out_data(rs_data), .out_valid(rs_valid),
    .out_last(rs_last), .out_ready(1'b1));

  wr_stream u_wr (
    .clk, .rst_n, .start(ws_start), .cfg(inst_q.twu_o),
    .upd_en(inst_q.upd_en), .upd_sc(inst_q.upd_sc), .busy(ws_busy),
    .done(ws_done), .req(wr_req), .rsp(wr_rsp),
    .in_data(c_word), .in_valid(st_q == S_OUT), .in_ready(ws_ready));

  // weights are walked first (started in S_WAIT), activations next (started
  // from S_LOADW as the last weight word arrives)
  assign rs_cfg     = (st_q == S_LOADW) ? inst_q.twu_a : inst_q.twu_b;
  assign mac_active = (st_q == S_MAC) && rs_valid;

  // Non-linear activation stage on the output word being written.
  always_comb begin
    int unsigned row, h;
    row = cnt_q / WPR;
    h   = cnt_q % WPR;
    for (int j = 0; j < int'(WORD_BYTES); j++) begin
      logic signed [31:0] v;
      v = acc[row % MT][(h * WORD_BYTES + j) % COLS];
      if (inst_q.imm[8] && v < 0) v = 0;
      v = v >>> inst_q.imm[4:0];
      if (v > 127)       c_word[j*8 +: 8] = 8'sd127;
      else if (v < -128) c_word[j*8 +: 8] = -8'sd128;
      else               c_word[j*8 +: 8] = v[7:0];
    end
  end

  always_comb begin
    rs_start = 1'b0;
    ws_start = 1'b0;
    if (st_q == S_WAIT && (!inst_q.wait_en || mon_ok)) rs_start = 1'b1;
    if (st_q == S_LOADW && rs_valid && rs_last)        rs_start = 1'b1;
    if (st_q == S_MAC && rs_valid && rs_last && !inst_q.imm[10]) ws_start = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      inst_q <= '0;
      cnt_q  <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (inst_valid) begin
          inst_q <= inst;
          st_q   <= S_WAIT;
        end
        S_WAIT: if (rs_start) begin
          st_q  <= S_LOADW;
          cnt_q <= '0;
        end
        S_LOADW: if (rs_valid) begin
          cnt_q <= cnt_q + 1;
          if (rs_last) begin
            st_q  <= S_MAC;
            cnt_q <= '0;
          end
        end
        S_MAC: if (rs_valid) begin
          cnt_q <= cnt_q + 1;
          if (rs_last) begin
            cnt_q <= '0;
            st_q  <= inst_q.imm[10] ? S_IDLE : S_OUT;
          end
        end
        S_OUT: if (ws_ready) begin
          cnt_q <= cnt_q + 1;
          if (ws_done) st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // Weight buffer fill and MAC array.
  always_ff @(posedge clk) begin
    if (st_q == S_LOADW && rs_valid) begin
      for (int j = 0; j < int'(WORD_BYTES); j++)
        wbuf[(cnt_q / WPR) % KT][((cnt_q % WPR) * WORD_BYTES + j) % COLS]
          <= rs_data[j*8 +: 8];
    end
    if (st_q == S_WAIT && rs_start && !inst_q.imm[9]) begin
      for (int i = 0; i < int'(MT); i++)
        for (int c = 0; c < int'(COLS); c++) acc[i][c] <= '0;
    end
    if (st_q == S_MAC && rs_valid) begin
      int unsigned k, m;
      k = cnt_q / MB;
      m = cnt_q % MB;
      for (int r = 0; r < int'(ROWS); r++)
        for (int c = 0; c < int'(COLS); c++) begin
          logic signed [31:0] dp;
          dp = 0;
          for (int e = 0; e < int'(DOT); e++)
            dp = dp + 32'(signed'(rs_data[(r*DOT+e)*8 +: 8])) *
                      32'(wbuf[(k*DOT + e) % KT][c]);
          acc[(m*ROWS + r) % MT][c] <= acc[(m*ROWS + r) % MT][c] + dp;
        end
    end
  end

  initial assert (ROWS * DOT == WORD_BYTES && MT % ROWS == 0 && KT % DOT == 0);
  // unused: counts are implied by the walkers
  logic unused;
  assign unused = ^{rs_busy, ws_busy, NW_W, NW_A, NW_C};
endmodule
