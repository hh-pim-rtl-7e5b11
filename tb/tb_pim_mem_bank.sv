// tb_pim_mem_bank: self-checking test of pim_mem_bank with the LP-MRAM
// latencies (12-cycle read, 59-cycle write) and a small array. Writes and
// reads random bytes against a reference array, checks that ack comes exactly
// RD_LAT / WR_LAT cycles after the accept cycle, and checks that a
// power-gated bank reads zero and drops writes.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 200000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// latencies are the published HP/LP access times in cycles, the rest of
// the expected behaviour is this design's own protocol.
module tb_pim_mem_bank;
  import hhpim_pkg::*;
  localparam int unsigned DEPTH = 256;
  localparam int unsigned RDL = LP_MRAM_RD, WRL = LP_MRAM_WR;
  logic clk = 0, rst_n = 0, power_on = 1;
  mem_req_t req;
  mem_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [7:0] ref_mem [DEPTH];
  always #5 clk = ~clk;

  pim_mem_bank #(.DEPTH(DEPTH), .RD_LAT(RDL), .WR_LAT(WRL)) dut (.clk, .rst_n, .power_on, .req, .rsp);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Issue one access; returns read data and the number of cycles from the
  // accept cycle to the ack cycle.
  task automatic access(input bit we, input logic [15:0] a, input logic [7:0] d,
                        output logic [7:0] q, output int lat);
    @(negedge clk);
    req = '{valid: 1'b1, we: we, sram: 1'b0, addr: a, wdata: d};
    lat = 0;
    do begin @(posedge clk); lat++; end while (!rsp.ack);
    q = rsp.rdata;
    @(negedge clk);
    req = '0;
    lat = lat - 1;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] q;
    int lat;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < int'(DEPTH); i++) begin
      ref_mem[i] = 8'($urandom);
      access(1'b1, 16'(i), ref_mem[i], q, lat);
      if (i < 4) check(lat == int'(WRL), $sformatf("write latency %0d", lat));
    end
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      if ($urandom_range(1) == 1) begin
        ref_mem[a] = 8'($urandom);
        access(1'b1, 16'(a), ref_mem[a], q, lat);
        check(lat == int'(WRL), "write latency");
      end else begin
        access(1'b0, 16'(a), 8'h00, q, lat);
        check(q == ref_mem[a], $sformatf("read %0d: %h vs %h", a, q, ref_mem[a]));
        check(lat == int'(RDL), $sformatf("read latency %0d", lat));
      end
    end
    // power gate: writes dropped, reads zero
    @(negedge clk); power_on = 0;
    access(1'b1, 16'd7, ~ref_mem[7], q, lat);
    access(1'b0, 16'd7, 8'h00, q, lat);
    check(q == 8'h00, "gated bank reads zero");
    @(negedge clk); power_on = 1;
    access(1'b0, 16'd7, 8'h00, q, lat);
    check(q == ref_mem[7], "gated write was dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
