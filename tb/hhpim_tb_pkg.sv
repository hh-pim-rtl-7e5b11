// hhpim_tb_pkg: instruction builders shared by the HH-PIM testbenches.
// Each function fills the fields of one 128-bit pim_instr_t (layout in
// hhpim_pkg) from plain arguments, so testbenches can write programs as
// mk_mac(...), mk_move(...), mk_host_wr(...), mk_host_rd(...), mk_sync().
// Interface: functions only, no timing. The instruction encoding they build
// is this design's own; the operations (MAC over MRAM/SRAM operands, data
// placement between banks and clusters) follow the HH-PIM architecture.
package hhpim_tb_pkg;
  import hhpim_pkg::*;

  // MAC over cm MRAM weights at am and cs SRAM weights at as, inputs at ai,
  // result (if st) at ao, in the modules of mask sel of cluster cl.
  function automatic pim_instr_t mk_mac(bit cl, logic [7:0] sel, int cm, int cs, int am, int as,
                                        int ai, int ao, bit clr = 1'b1, bit st = 1'b1);
    pim_instr_t i = '0;
    i.cat = CAT_COMPUTE; i.op = {1'b0, st, clr}; i.cluster = cl; i.mod_sel = sel;
    i.cnt_m = 8'(cm); i.cnt_s = 8'(cs);
    i.addr_a = 16'(am); i.addr_b = 16'(as); i.addr_c = 16'(ai); i.addr_d = 16'(ao);
    return i;
  endfunction

  // Move len bytes from bank src_sram at src of the modules in sel of cluster
  // cl to bank dst_sram at dst of module (lane+off) mod N, in the other
  // cluster when to_other.
  function automatic pim_instr_t mk_move(bit cl, logic [7:0] sel, bit src_sram, bit dst_sram,
                                         bit to_other, int src, int dst, int len, int off);
    pim_instr_t i = '0;
    i.cat = CAT_MOVE; i.op = {to_other, dst_sram, src_sram}; i.cluster = cl; i.mod_sel = sel;
    {i.cnt_m, i.cnt_s} = 16'(len);
    i.addr_a = 16'(src); i.addr_b = 16'(dst); i.imm = 34'(off);
    return i;
  endfunction

  function automatic pim_instr_t mk_host_wr(bit cl, logic [7:0] sel, bit sram, int a, logic [31:0] d);
    pim_instr_t i = '0;
    i.cat = CAT_HOST; i.op = {1'b0, sram, 1'b0}; i.cluster = cl; i.mod_sel = sel;
    i.addr_a = 16'(a); i.imm = {2'b00, d};
    return i;
  endfunction

  function automatic pim_instr_t mk_host_rd(bit cl, logic [7:0] sel, bit sram, int a);
    pim_instr_t i = '0;
    i.cat = CAT_HOST; i.op = {1'b0, sram, 1'b1}; i.cluster = cl; i.mod_sel = sel;
    i.addr_a = 16'(a);
    return i;
  endfunction

  function automatic pim_instr_t mk_sync();
    pim_instr_t i = '0;
    i.cat = CAT_SYNC;
    return i;
  endfunction
endpackage
