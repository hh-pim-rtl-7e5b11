// tb_rearrange_buf: self-checking test of rearrange_buf. Each round fills the
// lanes of a random subset with random bytes tagged with a random
// permutation of destination modules, then reads every entry by destination
// and checks the byte came from the lane tagged with that destination; lanes
// not written must not show up, and clear must empty the buffer.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_rearrange_buf;
  import hhpim_pkg::*;
  localparam int unsigned N = 4, D = 16;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [N-1:0] wr_en = '0, rd_valid;
  logic [3:0] wr_idx = '0, rd_idx = '0;
  logic [7:0] wr_data [N], rd_data [N];
  logic [1:0] wr_tag [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  rearrange_buf #(.N_MODULES(N), .DEPTH(D)) dut (.clk, .rst_n, .clear, .wr_en, .wr_idx, .wr_data,
                                                 .wr_tag, .rd_idx, .rd_valid, .rd_data);

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
    logic [7:0] model [N][D];
    int perm [N];
    for (int l = 0; l < int'(N); l++) begin wr_data[l] = '0; wr_tag[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int r = 0; r < 40; r++) begin
      automatic logic [N-1:0] lanes = N'($urandom_range(1, (1 << N) - 1));
      for (int l = 0; l < int'(N); l++) perm[l] = l;
      perm.shuffle();
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      check(rd_valid == '0, "empty after clear");
      for (int k = 0; k < int'(D); k++) begin
        for (int l = 0; l < int'(N); l++) begin
          model[l][k] = 8'($urandom);
          wr_data[l] = model[l][k];
          wr_tag[l]  = 2'(perm[l]);
        end
        wr_en = lanes; wr_idx = 4'(k);
        @(negedge clk);
      end
      wr_en = '0;
      for (int k = 0; k < int'(D); k++) begin
        rd_idx = 4'(k);
        #1;
        for (int l = 0; l < int'(N); l++) begin
          automatic int d = perm[l];
          check(rd_valid[d] == lanes[l], "valid by destination");
          if (lanes[l]) check(rd_data[d] == model[l][k], $sformatf("data lane %0d -> module %0d", l, d));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
