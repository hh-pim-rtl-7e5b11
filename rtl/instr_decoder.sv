// instr_decoder: the controller's Instruction Decoder. Splits a fetched
// 128-bit PIM instruction into the three parts the paper names: the
// instruction type (Category), the Instruction Field (opcode, counts and
// addresses) and the Module Select Signal, here cut down to the cluster's
// N_MODULES modules. It also flags instructions the cluster cannot run:
// a compute with more operands than VLEN, a host read that selects no module,
// an instruction with no module selected, or a SYNC (which the instruction
// queue resolves and should never reach a controller).
// Purely combinational. The field layout is this design's own (see hhpim_pkg).
module instr_decoder
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  parameter int unsigned VLEN      = VLEN_DEF
) (
  input  pim_instr_t             instr,
  output category_e              category,
  output instr_field_t           field,
  output logic [N_MODULES-1:0]   mod_sel,
  output logic                   illegal
);
  always_comb begin
    category     = instr.cat;
    field.op     = instr.op;
    field.cnt_m  = instr.cnt_m;
    field.cnt_s  = instr.cnt_s;
    field.addr_a = instr.addr_a;
    field.addr_b = instr.addr_b;
    field.addr_c = instr.addr_c;
    field.addr_d = instr.addr_d;
    field.imm    = instr.imm;
    mod_sel      = instr.mod_sel[N_MODULES-1:0];
    illegal      = 1'b0;
    unique case (instr.cat)
      CAT_COMPUTE: illegal = (int'(instr.cnt_m) + int'(instr.cnt_s) > int'(VLEN)) || (mod_sel == '0);
      CAT_MOVE:    illegal = (mod_sel == '0);
      CAT_HOST:    illegal = (mod_sel == '0);
      CAT_SYNC:    illegal = 1'b1;
      default:     illegal = 1'b1;
    endcase
  end
endmodule
