// twu: Tensor Walker Unit, a nested-loop address generator.
//
// Every level holds a Value counter with its own Initial, Step and Final.
// Each produced address is the sum of the Value counters of the active
// levels. After each address the innermost Value advances by its Step; a
// level that is at its Final restarts from Initial when it is next advanced
// and, in the same cycle, lets the next outer level advance. The walk ends
// after the address at which every active level sits at its Final. A Step
// that adds a buffer offset at an outer level gives double buffering.
//
// This follows the source's three-level walker figure: adder per level, an
// equality compare with Final, a 2:1 mux choosing Initial, and the compare
// output enabling the next level. The compare is an equality test as in the
// figure, so Final must be reachable from Initial in whole Steps. The number
// of levels, widths and the valid/ready output handshake are this design's
// choice.
//
// Interface: 'start' loads cfg and starts a walk (ignored while busy). While
// busy, addr/last are valid; an address is consumed on a cycle with
// addr_ready, one per cycle at most. 'last' marks the final address.
module twu
  import m100_pkg::*;
#(
  parameter int unsigned LEVELS = TWU_LEVELS,
  parameter int unsigned W      = TWU_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [1:0]    levels,           // active levels, 1..LEVELS
  input  logic [LEVELS-1:0][W-1:0] init,
  input  logic [LEVELS-1:0][W-1:0] step,
  input  logic [LEVELS-1:0][W-1:0] fin,
  output logic          busy,
  output logic [W-1:0]  addr,
  output logic          last,
  input  logic          addr_ready
);
  logic [LEVELS-1:0][W-1:0] val_q;
  logic [LEVELS-1:0][W-1:0] init_q, step_q, fin_q;
  logic [1:0]               lv_q;
  logic [LEVELS-1:0]        act, at_fin, en;

  always_comb begin
    addr = '0;
    for (int l = 0; l < int'(LEVELS); l++) begin
      act[l]    = (l < int'(lv_q));
      at_fin[l] = (val_q[l] == fin_q[l]);
      if (act[l]) addr = addr + val_q[l];
    end
    // enable chain: innermost active level always advances
    en = '0;
    for (int l = int'(LEVELS) - 1; l >= 0; l--) begin
      if (l == int'(lv_q) - 1)     en[l] = 1'b1;
      else if (l < int'(lv_q) - 1) en[l] = en[l+1] && at_fin[l+1];
    end
    last = &(at_fin | ~act);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      val_q  <= '0;
      init_q <= '0;
      step_q <= '0;
      fin_q  <= '0;
      lv_q   <= 2'd1;
    end else if (!busy) begin
      if (start) begin
        busy   <= 1'b1;
        val_q  <= init;
        init_q <= init;
        step_q <= step;
        fin_q  <= fin;
        lv_q   <= (levels == 2'd0) ? 2'd1 : levels;
      end
    end else if (addr_ready) begin
      if (last) busy <= 1'b0;
      else begin
        for (int l = 0; l < int'(LEVELS); l++)
          if (en[l]) val_q[l] <= at_fin[l] ? init_q[l] : val_q[l] + step_q[l];
      end
    end
  end
endmodule
