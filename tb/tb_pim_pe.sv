// tb_pim_pe: self-checking test of pim_pe at the LP PE latency. Runs random
// signed INT8 MAC sequences with clears against a reference accumulator and
// checks that done comes PE_LAT cycles after each start.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 200000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// latencies are the published HP/LP access times in cycles, the rest of
// the expected behaviour is this design's own protocol.
module tb_pim_pe;
  import hhpim_pkg::*;
  localparam int unsigned L = LP_PE_LAT;
  logic clk = 0, rst_n = 0, start = 0, clr = 0, busy, done;
  logic signed [7:0] a, b;
  logic signed [31:0] acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  pim_pe #(.PE_LAT(L)) dut (.clk, .rst_n, .start, .clr, .a, .b, .busy, .done, .acc);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ref_acc, lat;
    a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    ref_acc = 0;
    for (int n = 0; n < 200; n++) begin
      if (n % 17 == 0) begin
        clr <= 1; @(posedge clk); clr <= 0; ref_acc = 0;
        @(posedge clk);
        check(acc == 0, "clear");
      end
      a <= 8'($urandom); b <= 8'($urandom);
      if (n == 5) begin a <= -8'sd128; b <= -8'sd128; end
      if (n == 6) begin a <= -8'sd128; b <= 8'sd127; end
      start <= 1;
      @(posedge clk);
      start <= 0;
      ref_acc += int'(a) * int'(b);
      lat = 0;
      do begin @(posedge clk); lat++; end while (!done);
      check(lat == int'(L), $sformatf("latency %0d", lat));
      @(posedge clk);
      check(acc == ref_acc, $sformatf("acc %0d vs %0d", acc, ref_acc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
