// tb_instr_queue: self-checking test of instr_queue (depth 16). Pushes a
// random mix of HP, LP and SYNC instructions while two model controllers take
// them with random busy times. Checks that each cluster receives exactly its
// own instructions in program order, that no instruction after a SYNC is
// dispatched before both controllers have gone idle, that a full queue
// refuses pushes, and counts SYNCs resolved.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_instr_queue;
  import hhpim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push_valid = 0, push_ready, hp_valid, hp_ready, hp_busy, lp_valid, lp_ready, lp_busy;
  pim_instr_t push_instr, hp_instr, lp_instr;
  logic [4:0] count;
  logic [15:0] sync_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  instr_queue #(.DEPTH(16)) dut (.clk, .rst_n, .push_valid, .push_instr, .push_ready,
    .hp_valid, .hp_instr, .hp_ready, .hp_busy, .lp_valid, .lp_instr, .lp_ready, .lp_busy,
    .count, .sync_cnt);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // model controllers: ready when idle, then busy for a random time
  int hp_left = 0, lp_left = 0;
  assign hp_ready = (hp_left == 0);
  assign lp_ready = (lp_left == 0);
  assign hp_busy  = (hp_left != 0);
  assign lp_busy  = (lp_left != 0);
  pim_instr_t exp_hp [$], exp_lp [$];
  int seq_no = 0, last_sync_seq = -1, n_sync = 0, got = 0;
  // sequence number of the last dispatched SYNC, stored in addr_d
  always @(posedge clk) if (rst_n) begin
    if (hp_left > 0) hp_left <= hp_left - 1;
    if (lp_left > 0) lp_left <= lp_left - 1;
    if (hp_valid && hp_ready) begin
      check(exp_hp.size() > 0 && hp_instr == exp_hp[0], "HP order");
      if (exp_hp.size() > 0) void'(exp_hp.pop_front());
      hp_left <= $urandom_range(1, 20);
      got++;
    end
    if (lp_valid && lp_ready) begin
      check(exp_lp.size() > 0 && lp_instr == exp_lp[0], "LP order");
      if (exp_lp.size() > 0) void'(exp_lp.pop_front());
      lp_left <= $urandom_range(1, 20);
      got++;
    end
  end

  // barrier check: an instruction tagged with a SYNC epoch (imm) may only be
  // dispatched when the controllers were idle at the time the SYNC left
  int epoch_seen = 0;
  always @(posedge clk) if (rst_n) begin
    if ((hp_valid && hp_ready) || (lp_valid && lp_ready)) begin
      automatic int e = int'(hp_valid ? hp_instr.imm[15:0] : lp_instr.imm[15:0]);
      check(e <= int'(sync_cnt), "no dispatch past an unresolved SYNC");
    end
  end

  // a SYNC may only leave the queue when both controllers are idle
  logic [15:0] sync_prev = 0;
  logic busy_prev = 0;
  int n_sync_idle = 0;
  always @(posedge clk) if (rst_n) begin
    if (sync_cnt != sync_prev) begin
      check(!busy_prev, "SYNC left while a controller was busy");
      n_sync_idle++;
    end
    sync_prev <= sync_cnt;
    busy_prev <= hp_busy || lp_busy;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int epoch = 0, sent = 0;
    push_instr = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      automatic pim_instr_t ins = pim_instr_t'({$urandom, $urandom, $urandom, $urandom});
      if ($urandom_range(9) == 0) begin
        ins.cat = CAT_SYNC;
        epoch++;
      end else begin
        ins.cat = category_e'($urandom_range(2));
        ins.imm[15:0] = 16'(epoch);
        if (ins.cluster) exp_lp.push_back(ins); else exp_hp.push_back(ins);
        sent++;
      end
      @(negedge clk);
      push_instr = ins; push_valid = 1;
      do @(posedge clk); while (!push_ready);
      @(negedge clk);
      push_valid = 0;
      if ($urandom_range(3) == 0) repeat ($urandom_range(10)) @(posedge clk);
    end
    // fill test: freeze the controllers and overfill
    wait (exp_hp.size() == 0 && exp_lp.size() == 0);
    check(got == sent, "all instructions dispatched");
    check(int'(sync_cnt) == epoch, $sformatf("SYNCs resolved %0d vs %0d", sync_cnt, epoch));
    hp_left = 1000000; lp_left = 1000000;
    for (int n = 0; n < 16; n++) begin
      automatic pim_instr_t ins = '0;
      ins.cat = CAT_COMPUTE;
      @(negedge clk);
      push_instr = ins; push_valid = 1;
      @(posedge clk);
    end
    @(negedge clk);
    push_valid = 0;
    @(posedge clk);
    check(count == 5'd16 && !push_ready, "full queue refuses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
