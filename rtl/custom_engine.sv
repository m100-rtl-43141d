// custom_engine: a TPB's custom engine, the cluster CPU's way into the TPB.
//
// Executes accesses that the cluster CPU issues over its coprocessor
// (VCIX-style) port on this TPB: 32-byte reads and writes of the HBSM
// (target 0) and accesses to the CSU registers (target 1). It owns the
// TPB's eighth HBSM port, which it shares with the DRB terminal; ring
// writes take priority so the ring is held as briefly as possible. One CPU
// read may be outstanding at a time: gnt is withheld for new CPU requests
// until the previous read has returned. HBSM reads return after the HBSM
// latency, CSU register reads one cycle after gnt.
//
// The source says the custom engine performs control-register and memory
// accesses for the CPU over VCIX; the request format and the arbitration
// are this design's choice.
module custom_engine
  import m100_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  cpu_req_t  cpu_req,
  output cpu_rsp_t  cpu_rsp,
  input  mreq_t     drb_req,
  output logic      drb_gnt,
  output mreq_t     mem_req,
  input  mrsp_t     mem_rsp,
  output logic      csu_valid,
  output logic      csu_we,
  output logic [15:0] csu_addr,
  input  word_t     csu_rdata
);
  logic  rd_pend_q, csu_rv_q, cpu_go;
  word_t csu_rd_q;

  always_comb begin
    mem_req   = '0;
    drb_gnt   = 1'b0;
    cpu_go    = 1'b0;
    csu_valid = 1'b0;
    csu_we    = cpu_req.we;
    csu_addr  = cpu_req.addr;
    if (drb_req.valid) begin
      mem_req = drb_req;
      drb_gnt = mem_rsp.gnt;
    end else if (cpu_req.valid && !cpu_req.target && !rd_pend_q) begin
      mem_req.valid = 1'b1;
      mem_req.we    = cpu_req.we;
      mem_req.addr  = ADDR_W'(cpu_req.addr);
      mem_req.wdata = cpu_req.wdata;
      cpu_go        = mem_rsp.gnt;
    end
    if (cpu_req.valid && cpu_req.target && !rd_pend_q) begin
      csu_valid = 1'b1;
      cpu_go    = 1'b1;
    end
    cpu_rsp.gnt    = cpu_go;
    cpu_rsp.rvalid = mem_rsp.rvalid || csu_rv_q;
    cpu_rsp.rdata  = csu_rv_q ? csu_rd_q : mem_rsp.rdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend_q <= 1'b0;
      csu_rv_q  <= 1'b0;
      csu_rd_q  <= '0;
    end else begin
      csu_rv_q <= csu_valid && !cpu_req.we;
      csu_rd_q <= csu_rdata;
      if (cpu_go && !cpu_req.we)       rd_pend_q <= 1'b1;
      else if (cpu_rsp.rvalid)         rd_pend_q <= 1'b0;
    end
  end
endmodule
