// tb_cmd_encoder: self-checking test of cmd_encoder. For every phase and
// random instruction fields, checks the command's opcode, that it is valid
// only with cmd_issue in a command phase, and that counts, addresses and the
// clear flag are copied from the right fields.
//
// Interface: none, this is a top-level testbench.
// Timing: the block is combinational; each vector is checked 1 time unit
// after it is applied. A 10-time-unit clock only drives the watchdog.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_cmd_encoder;
  import hhpim_pkg::*;
  ctrl_state_e  state;
  logic         cmd_issue;
  instr_field_t field;
  pim_cmd_t     cmd;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  cmd_encoder dut (.state, .cmd_issue, .field, .cmd);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      pim_op_e exp_op;
      state     = ctrl_state_e'($urandom_range(6));
      cmd_issue = 1'($urandom);
      field     = instr_field_t'({$urandom, $urandom, $urandom, $urandom});
      #1;
      case (state)
        S_LOAD:  exp_op = PCMD_LOAD;
        S_EXEC:  exp_op = PCMD_EXEC;
        S_STORE: exp_op = PCMD_STORE;
        default: exp_op = PCMD_NOP;
      endcase
      check(cmd.op == exp_op, $sformatf("op in state %0d", state));
      check(cmd.valid == (cmd_issue && exp_op != PCMD_NOP), "valid");
      check(cmd.cnt_m == field.cnt_m && cmd.cnt_s == field.cnt_s, "counts");
      check(cmd.addr_m == field.addr_a && cmd.addr_s == field.addr_b &&
            cmd.addr_in == field.addr_c && cmd.addr_out == field.addr_d, "addresses");
      check(cmd.acc_clr == field.op[0], "acc_clr");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
