// tb_cmd_if: self-checking test of cmd_if with four modules. Random module
// masks; each selected module answers done after its own random delay. Checks
// that only selected modules see a valid command, and that all_done comes
// exactly one cycle after the last selected module's done, never earlier.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_cmd_if;
  import hhpim_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  pim_cmd_t cmd, cmd_o [N];
  logic [N-1:0] mod_sel, done_i;
  logic all_done;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  cmd_if #(.N_MODULES(N)) dut (.clk, .rst_n, .cmd, .mod_sel, .cmd_o, .done_i, .all_done);

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
    cmd = '0; mod_sel = '0; done_i = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      int delay [N];
      int last, t;
      automatic logic [N-1:0] sel = N'($urandom_range(1, (1 << N) - 1));
      automatic pim_cmd_t c = pim_cmd_t'({$urandom, $urandom, $urandom});
      c.valid = 1'b1;
      last = 0;
      for (int m = 0; m < int'(N); m++) begin
        delay[m] = $urandom_range(1, 12);
        if (sel[m] && delay[m] > last) last = delay[m];
      end
      @(negedge clk);
      cmd = c; mod_sel = sel;
      @(posedge clk);
      for (int m = 0; m < int'(N); m++)
        check(cmd_o[m].valid == sel[m] && cmd_o[m].addr_in == c.addr_in, "command routed to selected modules");
      t = 0;
      while (1) begin
        automatic logic [N-1:0] d = '0;
        t++;
        for (int m = 0; m < int'(N); m++) if (sel[m] && delay[m] == t) d[m] = 1'b1;
        @(negedge clk);
        cmd = '0;
        done_i = d;
        @(posedge clk);
        if (t <= last) check(!all_done, $sformatf("no early all_done t=%0d last=%0d", t, last));
        if (t == last + 1) begin
          check(all_done, "all_done one cycle after the last done");
          break;
        end
      end
      @(negedge clk);
      done_i = '0;
      @(posedge clk);
      check(!all_done, "all_done is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
