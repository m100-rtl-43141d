// tb_util_pkg: helpers shared by the testbenches: walker configurations
// and a TPB instruction builder.
package tb_util_pkg;
  import m100_pkg::*;

  // linear walk of n words from base
  function automatic twu_cfg_t lin(input int base, input int n);
    twu_cfg_t c;
    c = '0;
    c.levels  = 2'd1;
    c.init[0] = TWU_W'(base);
    c.step[0] = 1;
    c.fin[0]  = TWU_W'(base + n - 1);
    return c;
  endfunction

  function automatic tpb_inst_t mk(input fu_e fu, input logic [3:0] op,
                                   input twu_cfg_t a, input twu_cfg_t b, input twu_cfg_t o,
                                   input logic [31:0] imm,
                                   input bit wen, input int wsc, input int wval,
                                   input bit uen, input int usc);
    tpb_inst_t i;
    i = '0;
    i.fu = fu; i.op = op; i.twu_a = a; i.twu_b = b; i.twu_o = o; i.imm = imm;
    i.wait_en = wen; i.wait_sc = SC_ID_W'(wsc); i.wait_val = SC_W'(wval);
    i.upd_en = uen; i.upd_sc = SC_ID_W'(usc);
    return i;
  endfunction
endpackage
