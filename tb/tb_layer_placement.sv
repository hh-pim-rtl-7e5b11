// tb_layer_placement: one fully-connected layer slice (8 outputs x 64 INT8
// inputs, 512 weights) run on the full-size HH-PIM block through AXI, first
// with a peak-performance placement and then, after a run-time re-placement,
// with a low-power placement. Partial sums are read back and added by the
// host, and every output is compared with a reference dot product.
//
//   peak placement: output j's 64 weights are split over all 8 modules,
//     10 per HP module and 6 per LP module, all in SRAM (HP:LP = 40:24, so the
//     slower LP modules finish at about the same time as the HP modules).
//     HP and LP MAC instructions are interleaved so both clusters compute at
//     once.
//   re-placement: per output, an HP-SRAM -> LP-MRAM cross-cluster move of the
//     HP weights and an LP-SRAM -> LP-MRAM move inside the LP modules, a
//     SYNC, then PWR gates HP-MRAM and HP-SRAM off.
//   low-power placement: every weight in LP-MRAM, 16 per LP module, one MAC
//     instruction per output.
// Checked: all outputs in both placements, the gated HP-SRAM reading zero,
// and the peak pass finishing in fewer cycles than the low-power pass.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 3000000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// latencies are the published HP/LP access times in cycles, the rest of
// the expected behaviour is this design's own protocol.
module tb_layer_placement;
  import hhpim_pkg::*;
  import hhpim_tb_pkg::*;
  localparam int OUTS = 8, INS = 64, HPW = 10, LPW = 6;
  localparam int WB = 1024, XB = 2048, RB = 3072, MB = 4096, XL = 2304;
  logic clk = 0, rst_n = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 1, s_arvalid = 0, s_rready = 1;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 4'hF, pwr_o;
  logic [1:0] s_bresp, s_rresp;
  logic hp_busy, lp_busy;
  ctrl_state_e hp_state, lp_state;
  logic [3:0] hp_mod_busy, lp_mod_busy, hp_in_wait, lp_in_wait;
  logic [15:0] sync_cnt;
  int checks = 0, failures = 0, both = 0;
  always #5 clk = ~clk;

  hhpim_top dut (.*);

  logic signed [7:0] w [OUTS][INS], x [INS];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (hp_busy && lp_busy) both++;

  task automatic axi_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1;
    do @(posedge clk); while (!s_awready);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
  endtask

  task automatic axi_rd(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    d = s_rdata;
  endtask

  task automatic push(input pim_instr_t i);
    for (int k = 0; k < 4; k++) axi_wr(8'(4 * k), i[32*k +: 32]);
  endtask

  task automatic host_rd(input bit c, input int m, input bit b, input int a, output logic [31:0] d);
    logic [31:0] st;
    push(mk_host_rd(c, 8'(1 << m), b, a));
    do axi_rd(8'h10, st); while (st[14:12] == 0);
    axi_rd(8'h14, d);
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do axi_rd(8'h10, st); while (!st[16] || st[8] || st[9]);
  endtask

  // write n bytes (n a multiple of 4) into a module's bank
  task automatic put(input bit c, input int m, input bit b, input int a, input logic [7:0] by [16], input int n);
    for (int k = 0; k < n; k += 4) push(mk_host_wr(c, 8'(1 << m), b, a + k, {by[k+3], by[k+2], by[k+1], by[k]}));
  endtask

  function automatic logic signed [31:0] ref_out(input int j);
    logic signed [31:0] s = 0;
    for (int i = 0; i < INS; i++) s += 32'(w[j][i] * x[i]);
    return s;
  endfunction

  // read and add the partial sums of output j from the given clusters
  task automatic check_outputs(input bit use_hp, input string what);
    for (int j = 0; j < OUTS; j++) begin
      logic signed [31:0] sum = 0;
      logic [31:0] d;
      for (int m = 0; m < 4; m++) begin
        if (use_hp) begin host_rd(1'b0, m, 1'b1, RB + 4 * j, d); sum += d; end
        host_rd(1'b1, m, 1'b1, RB + 4 * j, d); sum += d;
      end
      check(sum == ref_out(j), $sformatf("%s output %0d: %0d expected %0d", what, j, sum, ref_out(j)));
    end
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t_peak, t_low, t0;
    logic [7:0] by [16];
    logic [31:0] d;
    for (int i = 0; i < INS; i++) x[i] = 8'($urandom);
    for (int j = 0; j < OUTS; j++) for (int i = 0; i < INS; i++) w[j][i] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- peak placement: weights and inputs in SRAM of all 8 modules
    for (int m = 0; m < 4; m++) begin
      for (int k = 0; k < 16; k++) by[k] = (k < HPW) ? x[m * HPW + k] : 8'd0;
      put(1'b0, m, 1'b1, XB, by, 12);
      for (int k = 0; k < 16; k++) by[k] = (k < LPW) ? x[4 * HPW + m * LPW + k] : 8'd0;
      put(1'b1, m, 1'b1, XB, by, 8);
      // low-power input order of LP module m: HP part of module m, then its own part
      for (int k = 0; k < 16; k++) by[k] = (k < HPW) ? x[m * HPW + k] : x[4 * HPW + m * LPW + k - HPW];
      put(1'b1, m, 1'b1, XL, by, 16);
      for (int j = 0; j < OUTS; j++) begin
        for (int k = 0; k < 16; k++) by[k] = (k < HPW) ? w[j][m * HPW + k] : 8'd0;
        put(1'b0, m, 1'b1, WB + 16 * j, by, 12);
        // LP weights sit at offset HPW so the re-placement can slide them in
        for (int k = 0; k < 16; k++) by[k] = 8'd0;
        for (int k = 0; k < LPW; k++) by[HPW - 8 + k] = w[j][4 * HPW + m * LPW + k];
        put(1'b1, m, 1'b1, WB + 16 * j + 8, by, 8);
      end
    end
    wait_idle();
    t0 = $time / 10;
    for (int j = 0; j < OUTS; j++) begin
      push(mk_mac(1'b0, 8'hF, 0, HPW, 0, WB + 16 * j, XB, RB + 4 * j));
      push(mk_mac(1'b1, 8'hF, 0, LPW, 0, WB + 16 * j + HPW, XB, RB + 4 * j));
    end
    wait_idle();
    t_peak = $time / 10 - t0;
    check(both > 0, "HP and LP clusters computed at the same time");
    check_outputs(1'b1, "peak placement");

    // ---- re-placement into LP-MRAM, then power down the HP memories
    for (int j = 0; j < OUTS; j++) begin
      push(mk_move(1'b0, 8'hF, 1'b1, 1'b0, 1'b1, WB + 16 * j, MB + 16 * j, HPW, 0));
      push(mk_move(1'b1, 8'hF, 1'b1, 1'b0, 1'b0, WB + 16 * j + HPW, MB + 16 * j + HPW, LPW, 0));
    end
    push(mk_sync());
    wait_idle();
    axi_wr(8'h18, 32'hC);
    check(pwr_o == 4'hC, "HP memories gated");
    host_rd(1'b0, 0, 1'b1, WB, d);
    check(d == 0, "gated HP-SRAM reads zero");

    // ---- low-power placement: 16 MRAM weights per LP module
    t0 = $time / 10;
    for (int j = 0; j < OUTS; j++) push(mk_mac(1'b1, 8'hF, 16, 0, MB + 16 * j, 0, XL, RB + 4 * j));
    wait_idle();
    t_low = $time / 10 - t0;
    check_outputs(1'b0, "low-power placement");
    check(t_peak < t_low, $sformatf("peak placement faster (%0d vs %0d cycles)", t_peak, t_low));
    $display("layer cycles: peak %0d, low-power %0d", t_peak, t_low);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
