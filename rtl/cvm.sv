// cvm: Cluster VCIX Multiplexer.
//
// Connects the cluster's one CPU to its four TPBs. Service requests (CSU
// interrupts) from the TPBs are arbitrated round-robin; the CPU sees one
// interrupt line and the index of the TPB it is serving, and that choice
// is held until the served TPB's request goes away, so requests are
// handled one after another. CPU accesses are routed to the TPB named by
// cpu_sel; read data comes back from whichever TPB returns it (the CPU has
// at most one read outstanding).
//
// Sequential arbitration of up to four concurrent requests follows the
// source; round-robin order and the select-based routing are this design's.
module cvm
  import m100_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic [TPB_PER_CLUSTER-1:0] tpb_irq,
  output logic     cpu_irq,
  output logic [1:0] cpu_irq_id,
  input  logic [1:0] cpu_sel,
  input  cpu_req_t cpu_req,
  output cpu_rsp_t cpu_rsp,
  output cpu_req_t [TPB_PER_CLUSTER-1:0] tpb_req,
  input  cpu_rsp_t [TPB_PER_CLUSTER-1:0] tpb_rsp
);
  logic       lock_q;
  logic [1:0] cur_q, gidx;
  logic [TPB_PER_CLUSTER-1:0] gnt;

  rr_arb #(.N(TPB_PER_CLUSTER)) u_arb (.clk, .rst_n, .req(tpb_irq),
    .advance(!lock_q), .gnt, .gnt_idx(gidx));

  assign cpu_irq    = lock_q;
  assign cpu_irq_id = cur_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_q <= 1'b0;
      cur_q  <= '0;
    end else if (!lock_q) begin
      if (|gnt) begin
        lock_q <= 1'b1;
        cur_q  <= gidx;
      end
    end else if (!tpb_irq[cur_q]) lock_q <= 1'b0;
  end

  always_comb begin
    cpu_rsp = '0;
    for (int t = 0; t < int'(TPB_PER_CLUSTER); t++) begin
      tpb_req[t]       = cpu_req;
      tpb_req[t].valid = cpu_req.valid && (cpu_sel == 2'(t));
      if (cpu_sel == 2'(t)) cpu_rsp.gnt = tpb_rsp[t].gnt;
      if (tpb_rsp[t].rvalid) begin
        cpu_rsp.rvalid = 1'b1;
        cpu_rsp.rdata  = tpb_rsp[t].rdata;
      end
    end
  end
endmodule
