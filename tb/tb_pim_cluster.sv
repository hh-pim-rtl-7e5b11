// tb_pim_cluster: self-checking test of one cluster (controller + 4 PIM
// modules) with the LP latencies and 1 kB banks. Instructions go in through
// instr_valid/instr_ready; a reference model of every module's MRAM, SRAM
// and accumulator, and of the opposite cluster's memory, is updated as each
// instruction is sent. The test host-writes the operand regions, then runs a
// random mix of MAC instructions (random MRAM/SRAM weight counts, lane masks,
// clear and store flags), in-cluster moves, cross-cluster moves with module
// rotation, host reads and illegal instructions. Meanwhile a second process
// writes into the cluster from the "other cluster" side (in_req) at random
// times, which must wait while the cluster's own controller uses a lane.
// Finally every byte of the used regions is host-read and compared.
// Counted mechanisms: modules computing in parallel, cross-cluster writes
// held by in_wait, illegal instructions, buffered remote stalls.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 3000000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_pim_cluster;
  import hhpim_pkg::*;
  import hhpim_tb_pkg::*;
  localparam int unsigned N = 4;
  localparam int MB = 1024;
  logic clk = 0, rst_n = 0, instr_valid = 0, instr_ready, busy, rd_valid, rd_ready = 0;
  pim_instr_t instr = '0;
  ctrl_state_e state;
  logic [15:0] illegal_cnt;
  logic [N-1:0] mod_busy, in_wait;
  mem_req_t rmt_req [N], in_req [N];
  mem_rsp_t rmt_rsp [N], in_rsp [N];
  logic [31:0] rd_data;
  int checks = 0, failures = 0, par_cycles = 0, wait_cycles = 0, rmt_stall = 0, n_illegal = 0;
  always #5 clk = ~clk;

  // ---- DUT ----
  pim_cluster #(.N_MODULES(N), .MEM_BYTES(MB), .MRAM_RD(LP_MRAM_RD), .MRAM_WR(LP_MRAM_WR),
                .SRAM_RD(LP_SRAM_RD), .SRAM_WR(LP_SRAM_WR), .PE_LAT(LP_PE_LAT)) dut (
    .clk, .rst_n, .pwr_mram(1'b1), .pwr_sram(1'b1), .instr_valid, .instr, .instr_ready, .busy,
    .state, .illegal_cnt, .mod_busy, .rmt_req, .rmt_rsp, .in_req, .in_rsp, .in_wait, .rd_valid,
    .rd_data, .rd_ready);
  // ---- end DUT ----

  // reference model
  logic [7:0] mm [N][MB], sm [N][MB];   // own MRAM / SRAM
  logic [31:0] acc [N];
  logic [7:0] rmem [N][2][MB];          // opposite cluster (tb memory)
  logic [7:0] rref [N][2][MB];
  logic [7:0] inshadow [N][2][128];     // bytes written through in_req at 896..1023
  bit inwr [N][2][128];                 // ... and whether they were written
  logic [31:0] rd_exp [$];
  bit in_run = 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // opposite-cluster lanes: random latency, sometimes very slow
  for (genvar l = 0; l < N; l++) begin : g_rmt
    int c = -1;
    logic [7:0] q;
    always @(posedge clk) begin
      rmt_rsp[l].ack <= 1'b0;
      if (!rst_n) c <= -1;
      else if (c < 0 && rmt_req[l].valid && !rmt_rsp[l].ack) begin
        c <= ($urandom_range(5) == 0) ? $urandom_range(30, 80) : $urandom_range(3);
        q <= rmem[l][rmt_req[l].sram][rmt_req[l].addr[9:0]];
        if (rmt_req[l].we) rmem[l][rmt_req[l].sram][rmt_req[l].addr[9:0]] <= rmt_req[l].wdata;
      end else if (c == 0) begin
        rmt_rsp[l].ack <= 1'b1; rmt_rsp[l].rdata <= q; c <= -1;
      end else if (c > 0) c <= c - 1;
      if (c > 20) rmt_stall++;
    end

    // writes from the opposite cluster into this cluster's region 896..1023
    initial begin
      in_req[l] = '0;
      wait (rst_n);
      while (in_run) begin
        automatic int a = $urandom_range(127);
        automatic bit b = 1'($urandom);
        automatic logic [7:0] d = 8'($urandom);
        repeat ($urandom_range(100, 600)) @(negedge clk);
        if (!in_run) break;
        in_req[l] = '{valid: 1'b1, we: 1'b1, sram: b, addr: 16'(896 + a), wdata: d};
        do @(posedge clk); while (!in_rsp[l].ack);
        inshadow[l][b][a] = d; inwr[l][b][a] = 1'b1;
        @(negedge clk);
        in_req[l] = '0;
      end
    end
  end

  always @(posedge clk) begin
    if ($countones(mod_busy) > 1) par_cycles++;
    if ((in_wait & {in_req[3].valid, in_req[2].valid, in_req[1].valid, in_req[0].valid}) != 0) wait_cycles++;
  end

  // host read FIFO drain
  always @(negedge clk) rd_ready = rd_valid;
  always @(posedge clk) if (rd_valid && rd_ready) begin
    if (rd_exp.size() == 0) check(1'b0, "unexpected read data");
    else begin
      automatic logic [31:0] e = rd_exp.pop_front();
      check(rd_data === e, $sformatf("host read %h expected %h", rd_data, e));
    end
  end

  task automatic send(input pim_instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    do @(posedge clk); while (!instr_ready);
    @(negedge clk);
    instr_valid = 0;
  endtask

  function automatic int lowest(input logic [7:0] sel);
    for (int l = 0; l < int'(N); l++) if (sel[l]) return l;
    return 0;
  endfunction

  // apply one instruction to the model
  task automatic model(input pim_instr_t i);
    automatic logic [N-1:0] sel = i.mod_sel[N-1:0];
    case (i.cat)
      CAT_COMPUTE: for (int l = 0; l < int'(N); l++) if (sel[l]) begin
        automatic int k = i.cnt_m + i.cnt_s;
        if (i.op[0]) acc[l] = 0;
        for (int j = 0; j < k; j++) begin
          automatic logic signed [7:0] w = (j < i.cnt_m) ? mm[l][i.addr_a + j] : sm[l][i.addr_b + j - i.cnt_m];
          automatic logic signed [7:0] x = sm[l][i.addr_c + j];
          acc[l] = acc[l] + 32'(w * x);
        end
        if (i.op[1]) for (int b = 0; b < 4; b++) sm[l][i.addr_d + b] = acc[l][8*b +: 8];
      end
      CAT_MOVE: begin
        automatic int len = {i.cnt_m, i.cnt_s};
        for (int l = 0; l < int'(N); l++) if (sel[l])
          for (int j = 0; j < len; j++) begin
            automatic int d = (l + int'(i.imm[2:0])) % int'(N);
            automatic logic [7:0] v = i.op[0] ? sm[l][i.addr_a + j] : mm[l][i.addr_a + j];
            if (i.op[2]) rref[d][i.op[1]][i.addr_b + j] = v;
            else if (i.op[1]) sm[d][i.addr_b + j] = v;
            else mm[d][i.addr_b + j] = v;
          end
      end
      CAT_HOST: if (!i.op[0]) begin
        for (int l = 0; l < int'(N); l++) if (sel[l])
          for (int b = 0; b < 4; b++)
            if (i.op[1]) sm[l][i.addr_a + b] = i.imm[8*b +: 8];
            else mm[l][i.addr_a + b] = i.imm[8*b +: 8];
      end else begin
        automatic int l = lowest(i.mod_sel);
        automatic logic [31:0] e;
        for (int b = 0; b < 4; b++) e[8*b +: 8] = i.op[1] ? sm[l][i.addr_a + b] : mm[l][i.addr_a + b];
        rd_exp.push_back(e);
      end
      default: ;
    endcase
  endtask

  task automatic issue(input pim_instr_t i);
    model(i);
    send(i);
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < int'(N); l++) begin
      rmt_rsp[l] = '0; acc[l] = 0;
      for (int b = 0; b < 2; b++) for (int a = 0; a < 128; a++) inwr[l][b][a] = 1'b0;
      for (int b = 0; b < 2; b++) for (int a = 0; a < MB; a++) begin
        rmem[l][b][a] = 8'($urandom); rref[l][b][a] = rmem[l][b][a];
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // operand and result regions: MRAM and SRAM 0..319 of every module
    for (int l = 0; l < int'(N); l++)
      for (int a = 0; a < 320; a += 4) begin
        issue(mk_host_wr(1'b0, 8'(1 << l), 1'b0, a, $urandom));
        issue(mk_host_wr(1'b0, 8'(1 << l), 1'b1, a, $urandom));
      end
    // accumulators start at zero once a cleared MAC has run on every lane
    issue(mk_mac(1'b0, 8'hF, 0, 0, 0, 0, 0, 256, 1'b1, 1'b0));
    for (int r = 0; r < 120; r++) begin
      automatic int kind = $urandom_range(9);
      automatic logic [7:0] sel = 8'($urandom_range(1, 15));
      if (kind <= 4) begin
        automatic int cm = $urandom_range(16), cs;
        cs = $urandom_range(16 - cm);
        issue(mk_mac(1'b0, sel, cm, cs, $urandom_range(200), $urandom_range(200), $urandom_range(200),
                     256 + 4 * $urandom_range(15), 1'($urandom_range(3) != 0), 1'($urandom_range(3) != 0)));
      end else if (kind == 5) begin
        automatic int len = $urandom_range(1, 40);
        issue(mk_move(1'b0, sel, 1'($urandom), 1'($urandom), 1'b0, $urandom_range(127 - len),
                      128 + $urandom_range(127 - len), len, $urandom_range(7)));
      end else if (kind == 6) begin
        automatic int len = $urandom_range(1, 40);
        issue(mk_move(1'b0, sel, 1'($urandom), 1'($urandom), 1'b1, $urandom_range(255 - len),
                      $urandom_range(800), len, $urandom_range(7)));
      end else if (kind == 7) begin
        issue(mk_host_rd(1'b0, sel, 1'($urandom), 4 * $urandom_range(79)));
      end else if (kind == 8) begin
        // illegal: operand count above VLEN, or no module selected
        automatic pim_instr_t bad = ($urandom_range(1) == 0) ? mk_mac(1'b0, sel, 10, 10, 0, 0, 0, 256)
                                                            : mk_move(1'b0, 8'h0, 0, 0, 0, 0, 128, 4, 0);
        automatic logic [15:0] ill_prev = illegal_cnt;
        send(bad);
        wait (!busy);
        @(posedge clk);
        check(illegal_cnt == ill_prev + 1, "illegal instruction counted");
        n_illegal++;
      end else begin
        // MAC on MRAM weights that an in-cluster move has just staged in SRAM
        issue(mk_move(1'b0, sel, 1'b0, 1'b1, 1'b0, 0, 128, 16, 0));
        issue(mk_mac(1'b0, sel, 0, 16, 0, 128, 16, 256 + 4 * $urandom_range(15)));
      end
    end
    in_run = 0;
    repeat (700) @(negedge clk);
    // read back every used byte
    for (int l = 0; l < int'(N); l++) begin
      for (int a = 0; a < 320; a += 4) begin
        issue(mk_host_rd(1'b0, 8'(1 << l), 1'b0, a));
        issue(mk_host_rd(1'b0, 8'(1 << l), 1'b1, a));
      end
      for (int b = 0; b < 2; b++)
        for (int a = 0; a < 128; a += 4) begin
          for (int j = 0; j < 4; j++) begin
            if (b == 1) sm[l][896 + a + j] = inshadow[l][b][a + j];
            else mm[l][896 + a + j] = inshadow[l][b][a + j];
          end
          if (inwr[l][b][a] && inwr[l][b][a+1] && inwr[l][b][a+2] && inwr[l][b][a+3])
            issue(mk_host_rd(1'b0, 8'(1 << l), 1'(b), 896 + a));
        end
    end
    wait (!busy && rd_exp.size() == 0);
    repeat (5) @(posedge clk);
    for (int l = 0; l < int'(N); l++)
      for (int b = 0; b < 2; b++)
        for (int a = 0; a < MB; a++) check(rmem[l][b][a] == rref[l][b][a], "opposite cluster byte");
    check(par_cycles > 0, "modules computed in parallel");
    check(wait_cycles > 0, "cross-cluster write held while lane in use");
    check(rmt_stall > 0, "slow opposite cluster stalled a move");
    check(n_illegal > 0, "illegal instructions issued");
    $display("parallel=%0d in_wait=%0d rmt_stall=%0d illegal=%0d", par_cycles, wait_cycles, rmt_stall, n_illegal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
