// drb_terminal: a TPB's Data Ring Bus terminal.
//
// Accepts flits that the cluster's ring node delivers to this TPB and
// applies them in arrival order: a data flit becomes a write of its 32-byte
// word into the HBSM (through the custom engine's memory port), carrying
// the flit's counter update with it; a sync-only flit increments a local
// synchronization counter directly (remote synchronization). A DEPTH-entry
// FIFO absorbs short HBSM stalls; when it is full the ring is held.
// The source names the terminal and says the DRB carries broadcast data
// and remote synchronization; FIFO depth and ordering rule are this
// design's choice.
module drb_terminal
  import m100_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  drb_flit_t in_flit,
  output logic      in_ready,
  output mreq_t     mem_req,
  input  logic      mem_gnt,
  output logic      sc_upd_valid,
  output logic [SC_ID_W-1:0] sc_upd_id
);
  drb_flit_t head;
  logic      empty, full, pop;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  sync_fifo #(.W($bits(drb_flit_t)), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .push(in_valid && !full), .din(in_flit), .pop,
    .dout(head), .empty, .full, .count(cnt));

  assign in_ready = !full;

  always_comb begin
    mem_req        = '0;
    mem_req.valid  = !empty && !head.sync_only;
    mem_req.we     = 1'b1;
    mem_req.addr   = ADDR_W'(head.addr);
    mem_req.wdata  = head.data;
    mem_req.sc_upd = head.sc_upd;
    mem_req.sc_id  = head.sc_id;
    sc_upd_valid   = !empty && head.sync_only && head.sc_upd;
    sc_upd_id      = head.sc_id;
    pop            = !empty && (head.sync_only || mem_gnt);
  end
  logic unused;
  assign unused = ^{cnt, head.valid, head.dst};
endmodule
