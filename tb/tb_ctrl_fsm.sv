// tb_ctrl_fsm: self-checking test of ctrl_fsm. Drives compute instructions
// with and without STORE, a data-placement instruction and an illegal one,
// answers cmd_issue / alloc_start after a random delay, and checks the state
// sequence FETCH, DECODE, LOAD, EXEC, [STORE], IDLE (or ALLOC), that each
// command is issued exactly once per phase, and the illegal counter.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 20000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_ctrl_fsm;
  import hhpim_pkg::*;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, fetch_en, illegal = 0, store_en = 0;
  category_e category = CAT_COMPUTE;
  ctrl_state_e state;
  logic cmd_issue, cmd_done = 0, alloc_start, alloc_done = 0, busy;
  logic [15:0] illegal_cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  ctrl_fsm dut (.clk, .rst_n, .instr_valid, .instr_ready, .fetch_en, .category, .illegal,
                .store_en, .state, .cmd_issue, .cmd_done, .alloc_start, .alloc_done, .busy, .illegal_cnt);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Responder: answer every command / allocator start after 1..6 cycles.
  int issues = 0, starts = 0;
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && (cmd_issue || alloc_start)) begin
        automatic bit is_cmd = cmd_issue;
        if (is_cmd) issues++; else starts++;
        repeat ($urandom_range(5)) @(posedge clk);
        @(negedge clk);
        if (is_cmd) cmd_done = 1; else alloc_done = 1;
        @(posedge clk);
        @(negedge clk);
        cmd_done = 0; alloc_done = 0;
      end
    end
  end

  // Run one instruction and record the visited states.
  task automatic run(input category_e c, input bit st_en, input bit ill, output ctrl_state_e seq[$]);
    seq = {};
    @(negedge clk);
    category = c; store_en = st_en; illegal = ill;
    instr_valid = 1;
    @(posedge clk);
    check(fetch_en, "fetch_en in IDLE with valid");
    @(negedge clk);
    instr_valid = 0;
    do begin
      @(posedge clk);
      if (seq.size() == 0 || seq[$] != state) seq.push_back(state);
    end while (state != S_IDLE);
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ctrl_state_e seq[$];
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(instr_ready && !busy, "idle after reset");
    for (int r = 0; r < 10; r++) begin
      automatic int i0 = issues;
      run(CAT_COMPUTE, 1'b1, 1'b0, seq);
      check(seq.size() == 6 && seq[0] == S_FETCH && seq[1] == S_DECODE && seq[2] == S_LOAD &&
            seq[3] == S_EXEC && seq[4] == S_STORE && seq[5] == S_IDLE, "compute+store sequence");
      check(issues - i0 == 3, $sformatf("three commands issued, got %0d", issues - i0));
      i0 = issues;
      run(CAT_COMPUTE, 1'b0, 1'b0, seq);
      check(seq.size() == 5 && seq[3] == S_EXEC && seq[4] == S_IDLE, "compute without store");
      check(issues - i0 == 2, "two commands issued");
      i0 = starts;
      run(CAT_MOVE, 1'b0, 1'b0, seq);
      check(seq.size() == 4 && seq[2] == S_ALLOC && seq[3] == S_IDLE, "move sequence");
      check(starts - i0 == 1, "one allocator start");
      run(CAT_HOST, 1'b1, 1'b1, seq);
      check(seq.size() == 3 && seq[1] == S_DECODE && seq[2] == S_IDLE, "illegal dropped");
    end
    check(illegal_cnt == 16'd10, "illegal count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
