// cmd_encoder: the controller's Command Encoder. From the State Machine's
// phase and enable (cmd_issue) and the decoded Instruction Field it builds the
// PIM command that the CMD Interface Logic sends to the modules:
//   LOAD  : operand counts and the MRAM weight, SRAM weight and input addresses
//   EXEC  : operand counts and the clear-accumulator flag (op[0])
//   STORE : the SRAM result address
// Purely combinational; the command is valid only in the cycle of cmd_issue.
// The encoding (pim_cmd_t) is this design's own.
module cmd_encoder
  import hhpim_pkg::*;
(
  input  ctrl_state_e  state,
  input  logic         cmd_issue,
  input  instr_field_t field,
  output pim_cmd_t     cmd
);
  always_comb begin
    cmd          = '0;
    cmd.cnt_m    = field.cnt_m;
    cmd.cnt_s    = field.cnt_s;
    cmd.addr_m   = field.addr_a;
    cmd.addr_s   = field.addr_b;
    cmd.addr_in  = field.addr_c;
    cmd.addr_out = field.addr_d;
    cmd.acc_clr  = field.op[0];
    unique case (state)
      S_LOAD:  cmd.op = PCMD_LOAD;
      S_EXEC:  cmd.op = PCMD_EXEC;
      S_STORE: cmd.op = PCMD_STORE;
      default: cmd.op = PCMD_NOP;
    endcase
    cmd.valid = cmd_issue && (cmd.op != PCMD_NOP);
  end
endmodule
