// tb_hhpim_top: end-to-end test of the full-size HH-PIM block (default
// parameters: 4 HP + 4 LP modules, 64 kB MRAM + 64 kB SRAM each, 16-entry
// queue). Everything goes through the AXI4-Lite slave, as the core would do
// it. A reference model of both clusters' memories and accumulators is
// updated as each instruction is pushed; host reads through RDATA are
// compared with it.
// Scenario: host-write operands into both clusters; MACs on HP and LP at the
// same time; an HP->LP cross-cluster weight move while the LP cluster is
// computing (the move must wait on LP's lanes); SYNC, then LP MACs on the
// moved weights; an LP->HP move with module rotation; an in-module MRAM->SRAM move and the same MAC from each
// bank (SRAM must be faster) and on each cluster (HP must be faster); power
// gating of LP-SRAM (writes dropped, reads zero); an illegal instruction;
// filling the queue until the AXI write is held off; final read-back.
// Every mechanism is counted; one that never happened is a failure.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 4000000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// latencies are the published HP/LP access times in cycles, the rest of
// the expected behaviour is this design's own protocol.
module tb_hhpim_top;
  import hhpim_pkg::*;
  import hhpim_tb_pkg::*;
  localparam int unsigned N = N_MODULES_DEF;
  localparam int MR = 1024;   // modelled part of every bank
  logic clk = 0, rst_n = 0;
  logic [7:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 1, s_arvalid = 0, s_rready = 1;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [31:0] s_wdata = 0, s_rdata;
  logic [3:0] s_wstrb = 4'hF, pwr_o;
  logic [1:0] s_bresp, s_rresp;
  logic hp_busy, lp_busy;
  ctrl_state_e hp_state, lp_state;
  logic [N-1:0] hp_mod_busy, lp_mod_busy, hp_in_wait, lp_in_wait;
  logic [15:0] sync_cnt;
  int checks = 0, failures = 0;
  // mechanism counters
  int n_both = 0, n_lp_wait = 0, n_axi_hold = 0, n_par = 0, n_sync = 0, n_gate = 0, n_illegal = 0,
      n_faster_sram = 0, n_faster_hp = 0, n_reads = 0, n_cross = 0, n_intra = 0;
  always #5 clk = ~clk;

  hhpim_top dut (.*);

  // reference model: [cluster][module][bank 0=MRAM 1=SRAM][address]
  logic [7:0] mem [2][N][2][MR];
  bit         mv  [2][N][2][MR];
  logic [31:0] acc [2][N];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (hp_busy && lp_busy) n_both++;
    if (lp_in_wait != 0) n_lp_wait++;
    if (s_awvalid && !s_awready) n_axi_hold++;
    if ($countones(hp_mod_busy) > 1 || $countones(lp_mod_busy) > 1) n_par++;
  end

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

  function automatic int lowest(input logic [7:0] sel);
    for (int l = 0; l < int'(N); l++) if (sel[l]) return l;
    return 0;
  endfunction

  // apply an instruction to the model (host reads are handled by host_rd)
  task automatic model(input pim_instr_t i);
    automatic int c = i.cluster;
    automatic logic [N-1:0] sel = i.mod_sel[N-1:0];
    case (i.cat)
      CAT_COMPUTE: for (int l = 0; l < int'(N); l++) if (sel[l]) begin
        if (i.op[0]) acc[c][l] = 0;
        for (int j = 0; j < i.cnt_m + i.cnt_s; j++) begin
          automatic logic signed [7:0] w = (j < i.cnt_m) ? mem[c][l][0][i.addr_a + j]
                                                          : mem[c][l][1][i.addr_b + j - i.cnt_m];
          automatic logic signed [7:0] x = mem[c][l][1][i.addr_c + j];
          acc[c][l] = acc[c][l] + 32'(w * x);
        end
        if (i.op[1]) for (int b = 0; b < 4; b++) begin
          mem[c][l][1][i.addr_d + b] = acc[c][l][8*b +: 8];
          mv[c][l][1][i.addr_d + b] = 1'b1;
        end
      end
      CAT_MOVE: for (int l = 0; l < int'(N); l++) if (sel[l])
        for (int j = 0; j < int'({i.cnt_m, i.cnt_s}); j++) begin
          automatic int d = (l + int'(i.imm[2:0])) % int'(N);
          automatic int dc = i.op[2] ? 1 - c : c;
          mem[dc][d][i.op[1]][i.addr_b + j] = mem[c][l][i.op[0]][i.addr_a + j];
          mv[dc][d][i.op[1]][i.addr_b + j] = mv[c][l][i.op[0]][i.addr_a + j];
        end
      CAT_HOST: if (!i.op[0])
        for (int l = 0; l < int'(N); l++) if (sel[l])
          for (int b = 0; b < 4; b++) begin
            mem[c][l][i.op[1]][i.addr_a + b] = i.imm[8*b +: 8];
            mv[c][l][i.op[1]][i.addr_a + b] = 1'b1;
          end
      default: ;
    endcase
  endtask

  task automatic issue(input pim_instr_t i);
    model(i);
    push(i);
  endtask

  // host read through the queue, the read FIFO and RDATA
  task automatic host_rd(input bit c, input int l, input bit b, input int a, output logic [31:0] d);
    logic [31:0] st;
    push(mk_host_rd(c, 8'(1 << l), b, a));
    do axi_rd(8'h10, st); while (st[14:12] == 0);
    axi_rd(8'h14, d);
    n_reads++;
  endtask

  task automatic check_word(input bit c, input int l, input bit b, input int a, input string what);
    logic [31:0] d, e;
    bit v = 1;
    for (int k = 0; k < 4; k++) begin e[8*k +: 8] = mem[c][l][b][a + k]; v &= mv[c][l][b][a + k]; end
    if (!v) return;
    host_rd(c, l, b, a, d);
    check(d == e, $sformatf("%s: cluster %0d module %0d bank %0d addr %0d read %h expected %h",
                            what, c, l, b, a, d, e));
  endtask

  task automatic wait_idle();
    logic [31:0] st;
    do axi_rd(8'h10, st); while (!st[16] || st[8] || st[9]);
  endtask

  // cycles that a single instruction keeps a cluster busy
  task automatic timed(input pim_instr_t i, output int n);
    wait_idle();
    issue(i);
    n = 0;
    if (i.cluster) wait (lp_busy); else wait (hp_busy);
    while (i.cluster ? lp_busy : hp_busy) begin @(posedge clk); n++; end
  endtask

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    int t_m, t_s, t_hp, t_lp;
    for (int c = 0; c < 2; c++) for (int l = 0; l < int'(N); l++) begin
      acc[c][l] = 0;
      for (int b = 0; b < 2; b++) for (int a = 0; a < MR; a++) mv[c][l][b][a] = 1'b0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. operands: MRAM and SRAM 0..127 of every module of both clusters
    for (int c = 0; c < 2; c++) for (int l = 0; l < int'(N); l++)
      for (int a = 0; a < 128; a += 4) begin
        issue(mk_host_wr(1'(c), 8'(1 << l), 1'b0, a, $urandom));
        issue(mk_host_wr(1'(c), 8'(1 << l), 1'b1, a, $urandom));
      end
    wait_idle();
    for (int c = 0; c < 2; c++) issue(mk_mac(1'(c), 8'hF, 0, 0, 0, 0, 0, 256, 1'b1, 1'b0));

    // 2. HP and LP compute at the same time (independent queue dispatch)
    for (int r = 0; r < 12; r++) begin
      automatic int cm = $urandom_range(16), cs;
      cs = $urandom_range(16 - cm);
      issue(mk_mac(1'(r % 2), 8'($urandom_range(1, 15)), cm, cs, $urandom_range(100), $urandom_range(100),
                   $urandom_range(100), 256 + 4 * (r / 2), 1'($urandom_range(3) != 0), 1'b1));
    end

    // 3. long LP compute, then an HP->LP weight move into LP SRAM 512.. that
    //    has to share LP's lanes with it
    wait_idle();
    issue(mk_mac(1'b1, 8'hF, 8, 8, 0, 0, 0, 300));
    issue(mk_move(1'b0, 8'hF, 1'b0, 1'b1, 1'b1, 0, 512, 64, 1));
    n_cross++;
    // 4. SYNC: the LP MAC below uses the moved weights, so it must not start
    //    before the HP move has finished
    begin
      automatic logic [15:0] s0 = sync_cnt;
      issue(mk_sync());
      issue(mk_mac(1'b1, 8'hF, 0, 16, 0, 512, 32, 304));
      issue(mk_mac(1'b1, 8'hF, 0, 16, 0, 528, 48, 308));
      wait_idle();
      check(sync_cnt == s0 + 1, "SYNC passed once");
      n_sync = sync_cnt - s0;
    end
    for (int l = 0; l < int'(N); l++) begin
      check_word(1'b1, l, 1'b1, 300, "LP MAC during move");
      check_word(1'b1, l, 1'b1, 304, "LP MAC on moved weights");
      check_word(1'b1, l, 1'b1, 308, "LP MAC on moved weights");
      for (int a = 512; a < 576; a += 4) check_word(1'b1, l, 1'b1, a, "cross-cluster move");
    end

    // 4b. the other direction: LP SRAM -> HP SRAM with module rotation
    issue(mk_move(1'b1, 8'hF, 1'b1, 1'b1, 1'b1, 0, 704, 32, 2));
    n_cross++;
    wait_idle();
    for (int l = 0; l < int'(N); l++)
      for (int a = 704; a < 736; a += 4) check_word(1'b0, l, 1'b1, a, "LP->HP move");

    // 5. in-module MRAM->SRAM move, then the same MAC from each bank
    issue(mk_move(1'b0, 8'hF, 1'b0, 1'b1, 1'b0, 0, 640, 16, 0));
    n_intra++;
    timed(mk_mac(1'b0, 8'hF, 16, 0, 0, 0, 64, 320), t_m);
    timed(mk_mac(1'b0, 8'hF, 0, 16, 0, 640, 64, 324), t_s);
    for (int l = 0; l < int'(N); l++) begin
      check_word(1'b0, l, 1'b1, 320, "MAC from MRAM");
      check_word(1'b0, l, 1'b1, 324, "MAC from SRAM");
    end
    check(t_s < t_m, $sformatf("SRAM weights faster than MRAM (%0d vs %0d cycles)", t_s, t_m));
    if (t_s < t_m) n_faster_sram++;

    // 6. same MAC on each cluster
    timed(mk_mac(1'b0, 8'h1, 8, 8, 0, 0, 0, 328), t_hp);
    timed(mk_mac(1'b1, 8'h1, 8, 8, 0, 0, 0, 328), t_lp);
    check(t_hp < t_lp, $sformatf("HP faster than LP (%0d vs %0d cycles)", t_hp, t_lp));
    if (t_hp < t_lp) n_faster_hp++;
    check_word(1'b0, 0, 1'b1, 328, "HP MAC");
    check_word(1'b1, 0, 1'b1, 328, "LP MAC");

    // 7. power gating of LP-SRAM
    axi_wr(8'h18, 32'h7);
    check(pwr_o == 4'h7, "pwr_o follows PWR");
    push(mk_host_wr(1'b1, 8'h1, 1'b1, 0, 32'hDEADBEEF));   // dropped: not modelled
    host_rd(1'b1, 0, 1'b1, 0, d);
    check(d == 0, "gated SRAM reads zero");
    axi_wr(8'h18, 32'hF);
    check_word(1'b1, 0, 1'b1, 0, "gated write was dropped");
    n_gate++;

    // 8. illegal instruction
    begin
      logic [31:0] ill0, ill1;
      axi_rd(8'h1C, ill0);
      push(mk_mac(1'b0, 8'h1, 16, 16, 0, 0, 0, 400));
      wait_idle();
      axi_rd(8'h1C, ill1);
      check(ill1[15:0] == ill0[15:0] + 1 && ill1[31:16] == ill0[31:16], "illegal instruction counted");
      n_illegal = ill1[15:0] - ill0[15:0];
    end

    // 9. fill the queue with slow LP MRAM writes until AXI holds the write
    begin
      automatic int h0 = n_axi_hold;
      for (int k = 0; k < 24; k++) issue(mk_host_wr(1'b1, 8'hF, 1'b0, 800 + 4 * (k % 8), $urandom));
      check(n_axi_hold > h0, "queue full held the AXI write");
      wait_idle();
    end

    // 10. read back everything that is modelled
    for (int c = 0; c < 2; c++) for (int l = 0; l < int'(N); l++) begin
      for (int a = 0; a < 128; a += 4) begin
        check_word(1'(c), l, 1'b0, a, "final MRAM");
        check_word(1'(c), l, 1'b1, a, "final SRAM");
      end
      for (int a = 256; a < 336; a += 4) check_word(1'(c), l, 1'b1, a, "final results");
      for (int a = 800; a < 832; a += 4) check_word(1'(c), l, 1'b0, a, "final queued writes");
    end

    // every mechanism must have happened
    check(n_both > 0, "HP and LP busy together");
    check(n_par > 0, "modules of a cluster in parallel");
    check(n_lp_wait > 0, "cross-cluster move stalled on busy LP lane");
    check(n_axi_hold > 0, "AXI write held by full queue");
    check(n_sync > 0, "SYNC");
    check(n_gate > 0, "power gating");
    check(n_illegal > 0, "illegal instruction");
    check(n_faster_sram > 0, "SRAM faster than MRAM");
    check(n_faster_hp > 0, "HP faster than LP");
    check(n_cross > 1 && n_intra > 0, "moves in both directions and inside modules");
    check(n_reads > 0, "host reads");
    $display("both=%0d par=%0d lp_wait=%0d axi_hold=%0d sync=%0d gate=%0d illegal=%0d mram/sram=%0d/%0d hp/lp=%0d/%0d reads=%0d",
             n_both, n_par, n_lp_wait, n_axi_hold, n_sync, n_gate, n_illegal, t_m, t_s, t_hp, t_lp, n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
