// csu: CPU Starter Unit.
//
// Executes TPB instructions that need the cluster's general-purpose CPU.
// After its monitor request is answered, the CSU saves the instruction's
// parameters in registers and raises its interrupt to the cluster CPU. The
// CPU's service routine reads the parameters over its register port,
// performs the task (scalar/vector work, or data movement through the
// custom engine), and writes the done register. The CSU then drops the
// interrupt, increments the instruction's update counter (upd_en/upd_sc)
// and is ready for its next instruction, so a CPU task completes like any
// other TPB instruction.
//
// Register map (CPU side, one 256-bit word per address; this design's
// choice):  0 read: {op, imm}
//           1 read: status (bit 0 = request pending)
//           2/3/4 read: walker configurations a, b and o
//           0 write: done.
// The flow (store parameters, interrupt, CPU routine, done, mark complete)
// follows the source.
//
// Lint lists unused bits of the stored instruction: the CSU forwards only
// the fields the CPU routine reads.
module csu
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
  output logic        irq,
  input  logic        reg_valid,
  input  logic        reg_we,
  input  logic [15:0] reg_addr,
  output word_t       reg_rdata,
  output logic        upd_valid,
  output logic [SC_ID_W-1:0] upd_id
);
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_IRQ} st_e;
  st_e       st_q;
  tpb_inst_t inst_q;
  logic      done;

  assign ready   = (st_q == S_IDLE);
  assign mon_id  = inst_q.wait_sc;
  assign mon_val = inst_q.wait_val;
  assign irq     = (st_q == S_IRQ);
  assign done    = (st_q == S_IRQ) && reg_valid && reg_we && reg_addr == 16'd0;
  assign upd_valid = done && inst_q.upd_en;
  assign upd_id    = inst_q.upd_sc;

  always_comb begin
    reg_rdata = '0;
    case (reg_addr)
      16'd0: reg_rdata = WORD_BITS'({inst_q.op, inst_q.imm});
      16'd1: reg_rdata[0] = irq;
      16'd2: reg_rdata = WORD_BITS'(inst_q.twu_a);
      16'd3: reg_rdata = WORD_BITS'(inst_q.twu_b);
      16'd4: reg_rdata = WORD_BITS'(inst_q.twu_o);
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      inst_q <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (inst_valid) begin
          inst_q <= inst;
          st_q   <= S_WAIT;
        end
        S_WAIT: if (!inst_q.wait_en || mon_ok) st_q <= S_IRQ;
        S_IRQ:  if (done) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end
endmodule
