// dtdu: Data Transformation DMA Unit.
//
// Executes TPB instructions that move data inside the HBSM:
//   DT_COPY   read along walker twu_a, write the same words along twu_o;
//             the walkers' patterns give strided gathers, re-tiling and
//             layout changes at 32-byte word granularity;
//   DT_FILL   write the 32-bit imm, repeated across the word, at every
//             address of twu_o (memory initialisation);
//   DT_TRANS  read a 32 x 32-byte block (32 words, twu_a), write it
//             transposed (output word j byte i = input word i byte j)
//             along twu_o: byte-granular matrix transposition.
// As every unit, it first waits for its monitor request and ties its
// counter update to its last write.
//
// The three functions (move within HBSM, transposition, fill) are from the
// source; how they are encoded and the 32x32 transposition block (larger
// matrices take one instruction per block) are this design's choice.
// Broadcast to other TPBs is done here through the ring bus by the CCB
// DMA, not by this unit.
//
// Lint lists unused bits of the stored instruction: fields belonging to
// other units are not read here.
module dtdu
  import m100_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  input  tpb_inst_t   inst,
  output logic        ready,
  output logic [SC_ID_W-1:0] mon_id,
  output logic [SC_W-1:0]    mon_val,
  input  logic        mon_ok,
  output mreq_t       rd_req,
  input  mrsp_t       rd_rsp,
  output mreq_t       wr_req,
  input  mrsp_t       wr_rsp
);
  localparam int unsigned TB = WORD_BYTES;  // transpose block edge
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_RUN, S_TLOAD, S_TOUT} st_e;
  st_e       st_q;
  tpb_inst_t inst_q;

  logic  go, r_busy, r_valid, r_last, r_ready, o_valid, o_ready, w_busy, w_done;
  word_t r_data, o_data;
  logic [7:0] tbuf [TB][TB];
  logic [$clog2(TB+1)-1:0] tcnt_q;

  assign ready   = (st_q == S_IDLE);
  assign mon_id  = inst_q.wait_sc;
  assign mon_val = inst_q.wait_val;
  assign go      = (st_q == S_WAIT) && (!inst_q.wait_en || mon_ok);

  rd_stream u_rd (.clk, .rst_n, .start(go && inst_q.op != DT_FILL), .cfg(inst_q.twu_a),
    .busy(r_busy), .req(rd_req), .rsp(rd_rsp), .out_data(r_data),
    .out_valid(r_valid), .out_last(r_last), .out_ready(r_ready));
  wr_stream u_wr (.clk, .rst_n, .start(go), .cfg(inst_q.twu_o),
    .upd_en(inst_q.upd_en), .upd_sc(inst_q.upd_sc), .busy(w_busy), .done(w_done),
    .req(wr_req), .rsp(wr_rsp), .in_data(o_data), .in_valid(o_valid), .in_ready(o_ready));

  always_comb begin
    o_data  = r_data;
    o_valid = 1'b0;
    r_ready = 1'b0;
    case (st_q)
      S_RUN: begin
        if (inst_q.op == DT_FILL) begin
          o_data  = {(WORD_BITS/32){inst_q.imm}};
          o_valid = 1'b1;
        end else begin
          o_valid = r_valid;
          r_ready = o_ready;
        end
      end
      S_TLOAD: r_ready = 1'b1;
      S_TOUT: begin
        o_valid = 1'b1;
        for (int i = 0; i < int'(TB); i++) o_data[i*8 +: 8] = tbuf[i][tcnt_q[$clog2(TB)-1:0]];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk)
    if (st_q == S_TLOAD && r_valid)
      for (int j = 0; j < int'(TB); j++) tbuf[tcnt_q[$clog2(TB)-1:0]][j] <= r_data[j*8 +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      inst_q <= '0;
      tcnt_q <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (inst_valid) begin
          inst_q <= inst;
          st_q   <= S_WAIT;
        end
        S_WAIT: if (go) begin
          tcnt_q <= '0;
          st_q   <= (inst_q.op == DT_TRANS) ? S_TLOAD : S_RUN;
        end
        S_RUN: if (w_done) st_q <= S_IDLE;
        S_TLOAD: if (r_valid) begin
          tcnt_q <= tcnt_q + 1'b1;
          if (r_last || tcnt_q == ($clog2(TB+1))'(TB - 1)) begin
            st_q   <= S_TOUT;
            tcnt_q <= '0;
          end
        end
        S_TOUT: if (o_ready) begin
          tcnt_q <= tcnt_q + 1'b1;
          if (w_done) st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end
  logic unused;
  assign unused = ^{r_busy, w_busy};
endmodule
