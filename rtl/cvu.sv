// cvu: Configurable Vector Unit (operator subset).
//
// Vector operators that take one or two input vector streams from HBSM and
// produce one output stream back to HBSM. A word is LANES signed 16-bit
// elements. Operators, chosen by the instruction's op field:
//   CVU_ADD   element-wise adder:      out = sat16(a + b)
//   CVU_MUL   element-wise multiplier: out = sat16((a * b) >>> imm[4:0])
//   CVU_RMAX  reduction comparator:    one word, every lane = max of all a
//   CVU_RSUM  reduction adder:         one word, every lane = sat16(sum a)
// Input a streams along walker twu_a, b along twu_b (element-wise only),
// results are written along twu_o; the last write carries the
// instruction's counter update. Like the other units it first waits for
// its monitor request (wait_en) to be answered.
//
// From the source: single-function operators with one or two input
// streams and one output stream, element-wise adder and multiplier,
// reduction adder/comparator. This design's own choices: int16 lanes with
// saturation, the reduction result broadcast to all lanes, and one
// operator per instruction. Not built: chaining several operators through
// FIFOs into one pipeline, spline / reciprocal / square-root / exponential
// units (so softmax is not possible in one instruction).
//
// Lint lists unused bits of the stored instruction: fields belonging to
// other units are not read here.
module cvu
  import m100_pkg::*;
#(
  parameter int unsigned LANES = WORD_BITS / 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  input  tpb_inst_t   inst,
  output logic        ready,
  output logic [SC_ID_W-1:0] mon_id,
  output logic [SC_W-1:0]    mon_val,
  input  logic        mon_ok,
  output mreq_t       rda_req,
  input  mrsp_t       rda_rsp,
  output mreq_t       rdb_req,
  input  mrsp_t       rdb_rsp,
  output mreq_t       wr_req,
  input  mrsp_t       wr_rsp
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN, S_RED} st_e;
  st_e       st_q;
  tpb_inst_t inst_q;

  logic  a_busy, a_valid, a_last, a_ready, b_busy, b_valid, b_last, b_ready;
  word_t a_data, b_data, res;
  logic  go, red_op, o_valid, o_ready, ws_busy, ws_done;
  logic signed [31:0] racc_q;
  logic               red_done_q;

  assign red_op  = (inst_q.op == CVU_RMAX) || (inst_q.op == CVU_RSUM);
  assign ready   = (st_q == S_IDLE);
  assign mon_id  = inst_q.wait_sc;
  assign mon_val = inst_q.wait_val;
  assign go      = (st_q == S_WAIT) && (!inst_q.wait_en || mon_ok);

  rd_stream u_ra (.clk, .rst_n, .start(go), .cfg(inst_q.twu_a), .busy(a_busy),
    .req(rda_req), .rsp(rda_rsp), .out_data(a_data), .out_valid(a_valid),
    .out_last(a_last), .out_ready(a_ready));
  rd_stream u_rb (.clk, .rst_n, .start(go && !red_op), .cfg(inst_q.twu_b), .busy(b_busy),
    .req(rdb_req), .rsp(rdb_rsp), .out_data(b_data), .out_valid(b_valid),
    .out_last(b_last), .out_ready(b_ready));
  wr_stream u_wr (.clk, .rst_n, .start(go), .cfg(inst_q.twu_o),
    .upd_en(inst_q.upd_en), .upd_sc(inst_q.upd_sc), .busy(ws_busy), .done(ws_done),
    .req(wr_req), .rsp(wr_rsp), .in_data(res), .in_valid(o_valid), .in_ready(o_ready));

  function automatic logic [15:0] sat16(input logic signed [31:0] v);
    if (v > 32767)       return 16'sd32767;
    else if (v < -32768) return -16'sd32768;
    else                 return v[15:0];
  endfunction

  // reduction of one input word combined with the running value
  logic signed [31:0] rnext;
  always_comb begin
    rnext = racc_q;
    for (int l = 0; l < int'(LANES); l++) begin
      logic signed [31:0] x;
      x = 32'(signed'(a_data[l*16 +: 16]));
      if (inst_q.op == CVU_RMAX) rnext = (x > rnext) ? x : rnext;
      else                       rnext = rnext + x;
    end
  end

  always_comb begin
    logic signed [31:0] x, y;
    x = '0;
    y = '0;
    res = '0;
    if (st_q == S_RED) begin
      for (int l = 0; l < int'(LANES); l++) res[l*16 +: 16] = sat16(racc_q);
    end else begin
      for (int l = 0; l < int'(LANES); l++) begin
        x = 32'(signed'(a_data[l*16 +: 16]));
        y = 32'(signed'(b_data[l*16 +: 16]));
        if (inst_q.op == CVU_MUL) res[l*16 +: 16] = sat16((x * y) >>> inst_q.imm[4:0]);
        else                      res[l*16 +: 16] = sat16(x + y);
      end
    end
    // element-wise: join a and b, hand to the writer
    o_valid = (st_q == S_RUN && !red_op && a_valid && b_valid) ||
              (st_q == S_RED && !red_done_q);
    a_ready = (st_q == S_RUN) && (red_op ? 1'b1 : (b_valid && o_ready));
    b_ready = (st_q == S_RUN) && !red_op && a_valid && o_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      inst_q     <= '0;
      racc_q     <= '0;
      red_done_q <= 1'b0;
    end else begin
      case (st_q)
        S_IDLE: if (inst_valid) begin
          inst_q <= inst;
          st_q   <= S_WAIT;
        end
        S_WAIT: if (go) begin
          st_q       <= S_RUN;
          racc_q     <= (inst_q.op == CVU_RMAX) ? -32'sd32768 : 32'sd0;
          red_done_q <= 1'b0;
        end
        S_RUN: begin
          if (red_op && a_valid) begin
            racc_q <= rnext;
            if (a_last) st_q <= S_RED;
          end
          if (ws_done) st_q <= S_IDLE;
        end
        S_RED: if (ws_done) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end
  logic unused;
  assign unused = ^{a_busy, b_busy, b_last, ws_busy, red_done_q};
endmodule
