// irq_gen: the CCB's miscellaneous-control and interrupt generator.
//
// A small register block. Hardware events (barrier releases, DMA
// completions) and software writes set bits in STATUS; each bit can be
// routed to the host CPU interrupt and/or the CCB CPU interrupt through
// two enable registers. Registers (32-bit, word address):
//   0 STATUS   read; write 1 to clear a bit
//   1 EN_HOST  bits that raise irq_host
//   2 EN_CCB   bits that raise irq_ccb
//   3 SET      write 1 to set a STATUS bit (software interrupt)
// Reads return data in the same cycle. An event and a clear of the same
// bit in one cycle leave the bit set.
// That interrupts to CCB or host CPUs are raised through control
// registers follows the source; the register map is this design's.
module irq_gen #(
  parameter int unsigned NEV = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NEV-1:0] events,
  input  logic           reg_valid,
  input  logic           reg_we,
  input  logic [1:0]     reg_addr,
  input  logic [31:0]    reg_wdata,
  output logic [31:0]    reg_rdata,
  output logic           irq_host,
  output logic           irq_ccb
);
  logic [NEV-1:0] status_q, en_host_q, en_ccb_q, clr, set;

  always_comb begin
    clr = '0;
    set = events;
    if (reg_valid && reg_we && reg_addr == 2'd0) clr = reg_wdata[NEV-1:0];
    if (reg_valid && reg_we && reg_addr == 2'd3) set = set | reg_wdata[NEV-1:0];
    case (reg_addr)
      2'd0:    reg_rdata = 32'(status_q);
      2'd1:    reg_rdata = 32'(en_host_q);
      2'd2:    reg_rdata = 32'(en_ccb_q);
      default: reg_rdata = '0;
    endcase
  end
  assign irq_host = |(status_q & en_host_q);
  assign irq_ccb  = |(status_q & en_ccb_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status_q  <= '0;
      en_host_q <= '0;
      en_ccb_q  <= '0;
    end else begin
      status_q <= (status_q & ~clr) | set;
      if (reg_valid && reg_we && reg_addr == 2'd1) en_host_q <= reg_wdata[NEV-1:0];
      if (reg_valid && reg_we && reg_addr == 2'd2) en_ccb_q  <= reg_wdata[NEV-1:0];
    end
  end
  logic unused;
  assign unused = ^reg_wdata;
endmodule
