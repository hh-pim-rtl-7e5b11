// tb_pim_module_if: self-checking test of pim_module_if, wired to two
// pim_mem_bank models and a pim_pe with the LP latencies and 1 kB banks. Weights are written into MRAM and SRAM and
// inputs into SRAM through the MEM port; then LOAD / EXEC / STORE commands
// compute dot products over random mixes of MRAM and SRAM weights. Checked:
// the stored 32-bit result against a reference dot product, accumulation
// across EXECs without clear, the cycle count of every command against the
// latency model (LOAD 3 + sum of (latency+1) per access, EXEC 3 or 4 +
// count*(PE_LAT+1), STORE 3 + 4*(SRAM write+1)), that a MEM access arriving
// during a command is held until the command is done, and power gating.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 400000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// latencies are the published HP/LP access times in cycles, the rest of
// the expected behaviour is this design's own protocol.
module tb_pim_module_if;
  import hhpim_pkg::*;
  localparam int unsigned MR = LP_MRAM_RD, MW = LP_MRAM_WR, SR = LP_SRAM_RD, SW = LP_SRAM_WR, PL = LP_PE_LAT;
  logic clk = 0, rst_n = 0, pwr_mram = 1, pwr_sram = 1;
  pim_cmd_t cmd;
  logic done, busy;
  mem_req_t preq;
  mem_rsp_t prsp;
  int checks = 0, failures = 0;
  logic [7:0] mref [256], sref [1024];
  always #5 clk = ~clk;

  mem_req_t mreq, sreq;
  mem_rsp_t mrsp, srsp;
  logic pe_start, pe_clr, pe_done, pe_busy;
  logic [7:0] pe_a, pe_b;
  logic [31:0] pe_acc;

  pim_module_if #(.VLEN(16)) dut (.clk, .rst_n, .cmd, .done, .busy, .preq, .prsp, .mreq, .mrsp,
    .sreq, .srsp, .pe_start, .pe_clr, .pe_a, .pe_b, .pe_done, .pe_acc);
  pim_mem_bank #(.DEPTH(1024), .RD_LAT(MR), .WR_LAT(MW)) u_mram (.clk, .rst_n, .power_on(pwr_mram), .req(mreq), .rsp(mrsp));
  pim_mem_bank #(.DEPTH(1024), .RD_LAT(SR), .WR_LAT(SW)) u_sram (.clk, .rst_n, .power_on(pwr_sram), .req(sreq), .rsp(srsp));
  pim_pe #(.PE_LAT(PL)) u_pe (.clk, .rst_n, .start(pe_start), .clr(pe_clr), .a(pe_a), .b(pe_b),
    .busy(pe_busy), .done(pe_done), .acc(pe_acc));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic port(input bit we, input bit sram, input int a, input logic [7:0] d, output logic [7:0] q);
    @(negedge clk);
    preq = '{valid: 1'b1, we: we, sram: sram, addr: 16'(a), wdata: d};
    do @(posedge clk); while (!prsp.ack);
    q = prsp.rdata;
    @(negedge clk);
    preq = '0;
  endtask

  task automatic command(input pim_op_e op, input bit clr, input int cm, input int cs,
                         input int am, input int as, input int ai, input int ao, output int n);
    @(negedge clk);
    cmd = '0;
    cmd.valid = 1'b1; cmd.op = op; cmd.acc_clr = clr;
    cmd.cnt_m = 8'(cm); cmd.cnt_s = 8'(cs);
    cmd.addr_m = 16'(am); cmd.addr_s = 16'(as); cmd.addr_in = 16'(ai); cmd.addr_out = 16'(ao);
    @(posedge clk);
    @(negedge clk);
    cmd = '0;
    n = 0;
    do begin @(posedge clk); n++; end while (!done);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] q;
    int n, acc, got;
    cmd = '0; preq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      mref[i] = 8'($urandom); port(1'b1, 1'b0, i, mref[i], q);
      sref[i] = 8'($urandom); port(1'b1, 1'b1, i, sref[i], q);
    end
    for (int i = 256; i < 272; i++) begin
      sref[i] = 8'($urandom); port(1'b1, 1'b1, i, sref[i], q);
    end
    for (int r = 0; r < 12; r++) begin
      int cm, cs, am, as, k;
      case (r)
        0: begin cm = 16; cs = 0; end
        1: begin cm = 0; cs = 16; end
        2: begin cm = 0; cs = 0; end
        default: begin cm = $urandom_range(16); cs = $urandom_range(16 - cm); end
      endcase
      k = cm + cs;
      am = $urandom_range(64 - cm); as = $urandom_range(64 - cs);
      acc = 0;
      for (int i = 0; i < cm; i++) acc += int'($signed(mref[am + i])) * int'($signed(sref[256 + i]));
      for (int i = 0; i < cs; i++) acc += int'($signed(sref[as + i])) * int'($signed(sref[256 + cm + i]));
      command(PCMD_LOAD, 1'b0, cm, cs, am, as, 256, 512, n);
      check(n == 3 + cm * (MR + 1) + cs * (SR + 1) + k * (SR + 1), $sformatf("LOAD cycles %0d (m%0d s%0d)", n, cm, cs));
      command(PCMD_EXEC, 1'b1, cm, cs, am, as, 256, 512, n);
      check(n == ((k == 0) ? 4 : 4 + k * (PL + 1)), $sformatf("EXEC cycles %0d k=%0d", n, k));
      command(PCMD_STORE, 1'b0, cm, cs, am, as, 256, 512, n);
      check(n == 3 + 4 * (SW + 1), $sformatf("STORE cycles %0d", n));
      got = 0;
      for (int b = 0; b < 4; b++) begin port(1'b0, 1'b1, 512 + b, 8'h0, q); got[8*b +: 8] = q; end
      check(got == acc, $sformatf("dot product %0d vs %0d (m%0d s%0d)", got, acc, cm, cs));
      // accumulate without clear
      command(PCMD_EXEC, 1'b0, cm, cs, am, as, 256, 512, n);
      check(n == ((k == 0) ? 3 : 3 + k * (PL + 1)), $sformatf("EXEC (acc) cycles %0d", n));
      command(PCMD_STORE, 1'b0, cm, cs, am, as, 256, 520, n);
      got = 0;
      for (int b = 0; b < 4; b++) begin port(1'b0, 1'b1, 520 + b, 8'h0, q); got[8*b +: 8] = q; end
      check(got == 2 * acc, "accumulated dot product");
    end
    // MEM access during a command is held off until done
    begin
      int done_at = -1, ack_at = -1, t = 0;
      fork
        command(PCMD_LOAD, 1'b0, 8, 8, 0, 0, 256, 512, n);
        begin
          repeat (5) @(posedge clk);
          port(1'b0, 1'b1, 3, 8'h0, q);
          ack_at = t;
        end
        begin
          while (ack_at < 0) begin @(posedge clk); t++; if (done && done_at < 0) done_at = t; end
        end
      join
      check(done_at > 0 && ack_at >= done_at, $sformatf("MEM access waits for the command (%0d %0d)", done_at, ack_at));
      check(q == sref[3], "held MEM access reads correctly");
    end
    // power gating
    @(negedge clk); pwr_sram = 0;
    port(1'b0, 1'b1, 5, 8'h0, q);
    check(q == 8'h00, "gated SRAM reads zero");
    @(negedge clk); pwr_sram = 1;
    port(1'b0, 1'b1, 5, 8'h0, q);
    check(q == sref[5], "SRAM readable again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
