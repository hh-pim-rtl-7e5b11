// tb_addr_gen: self-checking test of addr_gen. Loads random bases and module
// offsets, steps the source and destination addresses at random, and checks
// them and the destination module map (lane + offset) mod N against a model.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_addr_gen;
  import hhpim_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0, load = 0, step_src = 0, step_dst = 0;
  logic [15:0] src_base, dst_base, src_addr, dst_addr;
  logic [2:0]  mod_off;
  logic [1:0]  dst_mod [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  addr_gen #(.N_MODULES(N)) dut (.clk, .rst_n, .load, .src_base, .dst_base, .mod_off,
                                 .step_src, .step_dst, .src_addr, .dst_addr, .dst_mod);

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
    logic [15:0] es, ed;
    int off;
    src_base = 0; dst_base = 0; mod_off = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < 20; r++) begin
      es = 16'($urandom); ed = 16'($urandom); off = $urandom_range(7);
      src_base <= es; dst_base <= ed; mod_off <= 3'(off); load <= 1;
      @(posedge clk);
      load <= 0;
      for (int k = 0; k < 40; k++) begin
        automatic bit ss = 1'($urandom), sd = 1'($urandom);
        step_src <= ss; step_dst <= sd;
        @(posedge clk);
        step_src <= 0; step_dst <= 0;
        #1;
        es = es + 16'(ss); ed = ed + 16'(sd);
        check(src_addr == es && dst_addr == ed, $sformatf("addresses %h %h vs %h %h", src_addr, dst_addr, es, ed));
        for (int l = 0; l < int'(N); l++)
          check(int'(dst_mod[l]) == (l + off) % int'(N), "destination module");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
