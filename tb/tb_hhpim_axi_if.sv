// tb_hhpim_axi_if: self-checking test of the AXI4-Lite HH-PIM Interface.
// An AXI master task set drives single writes and reads with random
// BREADY/RREADY delays. Checked: instruction assembly from INSTR0..3 with
// byte strobes and the push on the INSTR3 write; a full queue holding the
// INSTR3 write off (no AWREADY, no push) until there is room; STATUS fields,
// PWR reset value and writes, ILLEGAL counts; the host read-data FIFO (HP
// p0 LP when both offer, back-pressure when 4 words are held, in-order
// pops through RDATA, 0 when empty); BVALID/RVALID held until accepted.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 200000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_hhpim_axi_if;
  import hhpim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 0, pwr;
  logic [1:0] s_bresp, s_rresp;
  logic q_push, q_ready = 1, hp_busy = 0, lp_busy = 0;
  pim_instr_t q_instr;
  logic [4:0] q_count = 0;
  logic [15:0] hp_illegal = 0, lp_illegal = 0;
  logic hp_rd_valid = 0, lp_rd_valid = 0, hp_rd_ready, lp_rd_ready;
  logic [31:0] hp_rd_data = 0, lp_rd_data = 0;
  int checks = 0, failures = 0, pushes = 0, held = 0;
  pim_instr_t pushed [$];
  always #5 clk = ~clk;

  hhpim_axi_if dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n && q_push) begin pushes++; pushed.push_back(q_instr); end
  always @(posedge clk) if (rst_n && s_awvalid && !s_awready) held++;

  task automatic axi_wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] st = 4'hF);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wstrb = st; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    check(s_wready, "WREADY with AWREADY");
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    check(s_bvalid && s_bresp == 2'b00, "BVALID OKAY after write");
    repeat ($urandom_range(3)) begin @(negedge clk); check(s_bvalid, "BVALID held"); end
    s_bready = 1;
    @(negedge clk);
    s_bready = 0;
    check(!s_bvalid, "BVALID cleared");
  endtask

  task automatic axi_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    check(s_rvalid && s_rresp == 2'b00, "RVALID OKAY after read");
    d = s_rdata;
    repeat ($urandom_range(3)) begin @(negedge clk); check(s_rvalid && s_rdata == d, "RVALID/RDATA held"); end
    s_rready = 1;
    @(negedge clk);
    s_rready = 0;
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_rd(8'h18, d); check(d[3:0] == 4'hF, "PWR reset value");
    // instruction assembly with strobes
    for (int r = 0; r < 200; r++) begin
      automatic logic [31:0] w [4];
      automatic logic [127:0] exp;
      for (int k = 0; k < 4; k++) w[k] = $urandom;
      for (int k = 0; k < 3; k++) begin
        axi_wr(8'(4 * k), w[k]);
        if (r % 5 == 0) begin
          // rewrite one byte lane only
          automatic logic [31:0] nw = $urandom;
          automatic int b = $urandom_range(3);
          axi_wr(8'(4 * k), nw, 4'(1 << b));
          w[k][8*b +: 8] = nw[8*b +: 8];
        end
        axi_rd(8'(4 * k), d); check(d == w[k], "INSTR word read back");
      end
      exp = {w[3], w[2], w[1], w[0]};
      if (r % 4 == 1) begin
        // queue full: the INSTR3 write waits until room appears
        automatic int p0 = pushes, h0 = held;
        q_ready = 0;
        fork
          axi_wr(8'h0C, w[3]);
          begin repeat ($urandom_range(3, 10)) @(negedge clk); check(pushes == p0, "no push while full"); q_ready = 1; end
        join
        check(held > h0, "write held while queue full");
      end else axi_wr(8'h0C, w[3]);
      @(posedge clk);
      check(pushed.size() == 1 && pushed[0] == exp, $sformatf("pushed instruction %0d", r));
      pushed.delete();
    end
    // status, power, illegal counts
    for (int r = 0; r < 50; r++) begin
      automatic logic [3:0] p = 4'($urandom);
      q_count = 5'($urandom_range(16)); hp_busy = 1'($urandom); lp_busy = 1'($urandom);
      hp_illegal = 16'($urandom); lp_illegal = 16'($urandom);
      axi_rd(8'h10, d);
      check(d[5:0] == 6'(q_count) && d[8] == hp_busy && d[9] == lp_busy && d[16] == (q_count == 0), "STATUS");
      axi_wr(8'h18, {28'd0, p});
      check(pwr == p, "PWR output");
      axi_rd(8'h18, d); check(d[3:0] == p, "PWR read back");
      axi_rd(8'h1C, d); check(d == {lp_illegal, hp_illegal}, "ILLEGAL");
    end
    // host read FIFO
    axi_rd(8'h14, d); check(d == 0, "RDATA empty reads 0");
    for (int r = 0; r < 30; r++) begin
      automatic logic [31:0] exp [$];
      automatic int n = $urandom_range(1, 6);
      // offer n words, HP and LP sometimes together
      for (int k = 0; k < n; k++) begin
        automatic bit both = ($urandom_range(2) == 0);
        automatic logic [31:0] hv = $urandom, lv = $urandom;
        @(negedge clk);
        hp_rd_valid = 1; hp_rd_data = hv;
        lp_rd_valid = both; lp_rd_data = lv;
        if (exp.size() >= 4) begin
          @(posedge clk);
          check(!hp_rd_ready && !lp_rd_ready, "FIFO full back-pressure");
          @(negedge clk);
          hp_rd_valid = 0; lp_rd_valid = 0;
          break;
        end
        @(posedge clk);
        check(hp_rd_ready && !lp_rd_ready, "HP served p0 LP");
        exp.push_back(hv);
        if (both && exp.size() < 4) begin
          @(negedge clk); hp_rd_valid = 0;
          @(posedge clk);
          check(lp_rd_ready, "LP served after HP");
          exp.push_back(lv);
        end
        @(negedge clk);
        hp_rd_valid = 0; lp_rd_valid = 0;
      end
      axi_rd(8'h10, d); check(d[14:12] == 3'(exp.size()), "read FIFO count");
      while (exp.size() > 0) begin
        axi_rd(8'h14, d);
        check(d == exp.pop_front(), "RDATA order");
      end
    end
    check(pushes >= 200, "instructions pushed");
    check(held > 0, "full-queue hold happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
