// tb_instr_decoder: self-checking test of instr_decoder. Random instructions
// are decoded and each output is compared with fields taken independently
// from the raw 128-bit word by bit position; the illegal flag is compared
// with the rules (operand count above VLEN, no module selected, SYNC).
//
// Interface: none, this is a top-level testbench.
// Timing: the block is combinational; each vector is checked 1 time unit
// after it is applied. A 10-time-unit clock only drives the watchdog.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_instr_decoder;
  import hhpim_pkg::*;
  localparam int unsigned N = 4, V = 16;
  logic [127:0] raw;
  pim_instr_t   instr;
  category_e    category;
  instr_field_t field;
  logic [N-1:0] mod_sel;
  logic         illegal;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  assign instr = pim_instr_t'(raw);
  instr_decoder #(.N_MODULES(N), .VLEN(V)) dut (.instr, .category, .field, .mod_sel, .illegal);

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
    for (int n = 0; n < 500; n++) begin
      int cm, cs;
      bit exp_ill;
      raw = {$urandom, $urandom, $urandom, $urandom};
      if (n % 3 == 0) begin raw[113:106] = 8'($urandom_range(8)); raw[105:98] = 8'($urandom_range(8)); end
      if (n % 5 == 0) begin
        // operand count at the VLEN boundary
        raw[113:106] = 8'($urandom_range(V));
        raw[105:98]  = 8'(int'(V) - int'(raw[113:106]) + $urandom_range(1));
      end
      if (n % 7 == 0) raw[117:114] = 4'h0;
      #1;
      cm = int'(raw[113:106]); cs = int'(raw[105:98]);
      case (raw[127:126])
        2'd0: exp_ill = (cm + cs > int'(V)) || (raw[117:114] == 0);
        2'd3: exp_ill = 1'b1;
        default: exp_ill = (raw[117:114] == 0);
      endcase
      check(category == category_e'(raw[127:126]), "category");
      check(field.op == raw[125:123], "op");
      check(mod_sel == raw[117:114], "module select");
      check(field.cnt_m == raw[113:106] && field.cnt_s == raw[105:98], "counts");
      check(field.addr_a == raw[97:82] && field.addr_b == raw[81:66], "addr a/b");
      check(field.addr_c == raw[65:50] && field.addr_d == raw[49:34], "addr c/d");
      check(field.imm == raw[33:0], "imm");
      check(illegal == exp_ill, $sformatf("illegal %0b for cat %0d cnt %0d+%0d", illegal, raw[127:126], cm, cs));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
