// rd_stream: reads a tensor from an HBSM port along a tensor walker.
//
// On 'start' a TWU is loaded with cfg and walked; every address becomes a
// read request on the port. Read data is collected in a FIFO and handed out
// as a valid/ready stream; out_last marks the word read at the walker's
// last address. Requests are issued only while the FIFO has room for their
// data (outstanding + held < FD), so the memory never has to be stalled on
// the response side. With FD larger than the memory latency the stream
// runs at one word per cycle. busy stays high until the last word has been
// taken. This is a helper of the functional units; the source only says
// that each unit has input walkers streaming from HBSM.
//
// Lint reports rst_n as used both as asynchronous reset and in the
// assertions' 'disable iff': that is the usual way to switch assertions off
// during reset, and the flops are reset only asynchronously.
module rd_stream
  import m100_pkg::*;
#(
  parameter int unsigned FD = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  twu_cfg_t cfg,
  output logic     busy,
  output mreq_t    req,
  input  mrsp_t    rsp,
  output word_t    out_data,
  output logic     out_valid,
  output logic     out_last,
  input  logic     out_ready
);
  localparam int unsigned CW = $clog2(FD + 1);
  logic             tw_busy, tw_last, issue;
  logic [TWU_W-1:0] tw_addr;
  logic [CW-1:0]    outstanding_q, fcount;
  logic             fempty, ffull, pop;
  logic             last_issued_q, active_q, go;
  logic [31:0]      issued_q, popped_q;

  twu u_twu (
    .clk, .rst_n, .start(go),
    .levels(cfg.levels), .init(cfg.init), .step(cfg.step), .fin(cfg.fin),
    .busy(tw_busy), .addr(tw_addr), .last(tw_last), .addr_ready(issue));

  always_comb begin
    req        = '0;
    req.valid  = tw_busy && (32'(outstanding_q) + 32'(fcount) < FD);
    req.addr   = ADDR_W'(tw_addr);
    issue      = req.valid && rsp.gnt;
  end

  sync_fifo #(.W(WORD_BITS), .DEPTH(FD)) u_fifo (
    .clk, .rst_n, .push(rsp.rvalid), .din(rsp.rdata), .pop,
    .dout(out_data), .empty(fempty), .full(ffull), .count(fcount));

  assign out_valid = !fempty;
  assign pop       = out_valid && out_ready;
  assign out_last  = last_issued_q && (popped_q + 1 == issued_q);
  assign busy      = active_q;
  // a new walk may start in the cycle the previous one hands out its last word
  assign go        = start && (!active_q || (pop && out_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      outstanding_q <= '0;
      last_issued_q <= 1'b0;
      active_q      <= 1'b0;
      issued_q      <= '0;
      popped_q      <= '0;
    end else begin
      outstanding_q <= outstanding_q + CW'(issue) - CW'(rsp.rvalid);
      if (go) begin
        active_q      <= 1'b1;
        last_issued_q <= 1'b0;
        issued_q      <= '0;
        popped_q      <= '0;
      end else begin
        if (issue) begin
          issued_q <= issued_q + 1;
          if (tw_last) last_issued_q <= 1'b1;
        end
        if (pop) begin
          popped_q <= popped_q + 1;
          if (out_last) active_q <= 1'b0;
        end
      end
    end
  end

  // the FIFO can never overflow thanks to the credit check
  assert property (@(posedge clk) disable iff (!rst_n) !(rsp.rvalid && ffull));
endmodule
