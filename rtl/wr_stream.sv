// wr_stream: writes a stream of words to an HBSM port along a walker.
//
// On 'start' a TWU is loaded with cfg. Each input word (valid/ready) is
// written at the walker's next address; a word is taken in the cycle its
// write is granted. The write at the walker's last address carries the
// synchronization update (upd_en, upd_sc) of the instruction, so the
// consumer's counter moves exactly when the last result becomes visible.
// 'done' pulses in that cycle. Helper of the functional units.
//
// Lint lists the write response as unused: writes are posted and their
// completion is tracked by grant, not by response.
module wr_stream
  import m100_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  twu_cfg_t           cfg,
  input  logic               upd_en,
  input  logic [SC_ID_W-1:0] upd_sc,
  output logic               busy,
  output logic               done,
  output mreq_t              req,
  input  mrsp_t              rsp,
  input  word_t              in_data,
  input  logic               in_valid,
  output logic               in_ready
);
  logic             tw_busy, tw_last;
  logic [TWU_W-1:0] tw_addr;
  logic             upd_en_q;
  logic [SC_ID_W-1:0] upd_sc_q;

  twu u_twu (
    .clk, .rst_n, .start(start && !tw_busy),
    .levels(cfg.levels), .init(cfg.init), .step(cfg.step), .fin(cfg.fin),
    .busy(tw_busy), .addr(tw_addr), .last(tw_last), .addr_ready(in_ready));

  always_comb begin
    req        = '0;
    req.valid  = tw_busy && in_valid;
    req.we     = 1'b1;
    req.addr   = ADDR_W'(tw_addr);
    req.wdata  = in_data;
    req.sc_upd = tw_last && upd_en_q;
    req.sc_id  = upd_sc_q;
    in_ready   = req.valid && rsp.gnt;
    done       = in_ready && tw_last;
  end
  assign busy = tw_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_en_q <= 1'b0;
      upd_sc_q <= '0;
    end else if (start && !tw_busy) begin
      upd_en_q <= upd_en;
      upd_sc_q <= upd_sc;
    end
  end
endmodule
