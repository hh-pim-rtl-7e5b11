// tb_data_allocator: self-checking test of data_allocator (4 lanes, 16-byte
// buffer). Behind every own lane and every remote lane sits a two-bank
// memory model with a random response time; remote lanes are also made busy
// for long stretches so that bytes must wait in the rearrange buffer. Runs
// cross-cluster and in-cluster moves of random length (also longer than the
// buffer) with random lane masks and module offsets, host broadcast writes
// and host reads, and compares every destination byte with the source.
// Counts cycles in which several lanes transferred at once.
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 400000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_data_allocator;
  import hhpim_pkg::*;
  import hhpim_tb_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0, start = 0, done, rd_valid, rd_ready = 0;
  category_e category = CAT_MOVE;
  instr_field_t field;
  logic [N-1:0] mod_sel;
  mem_req_t own_req [N], rmt_req [N];
  mem_rsp_t own_rsp [N], rmt_rsp [N];
  logic [31:0] rd_data;
  int checks = 0, failures = 0, parallel = 0, rmt_busy_cycles = 0;
  logic [7:0] omem [N][2][512], rmem [N][2][512];
  always #5 clk = ~clk;

  data_allocator #(.N_MODULES(N), .BUF_DEPTH(16)) dut (.clk, .rst_n, .start, .category, .field,
    .mod_sel, .done, .own_req, .own_rsp, .rmt_req, .rmt_rsp, .rd_valid, .rd_data, .rd_ready);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  for (genvar l = 0; l < N; l++) begin : g_lane
    int oc = -1, rc = -1;
    logic [7:0] oq, rq;
    always @(posedge clk) begin
      own_rsp[l].ack <= 1'b0;
      if (oc < 0 && own_req[l].valid && !own_rsp[l].ack) begin
        oc <= $urandom_range(4);
        oq <= omem[l][own_req[l].sram][own_req[l].addr[8:0]];
        if (own_req[l].we) omem[l][own_req[l].sram][own_req[l].addr[8:0]] <= own_req[l].wdata;
      end else if (oc == 0) begin
        own_rsp[l].ack <= 1'b1; own_rsp[l].rdata <= oq; oc <= -1;
      end else if (oc > 0) oc <= oc - 1;
      rmt_rsp[l].ack <= 1'b0;
      if (rc < 0 && rmt_req[l].valid && !rmt_rsp[l].ack) begin
        rc <= ($urandom_range(7) == 0) ? $urandom_range(20, 60) : $urandom_range(4);
        rq <= rmem[l][rmt_req[l].sram][rmt_req[l].addr[8:0]];
        if (rmt_req[l].we) rmem[l][rmt_req[l].sram][rmt_req[l].addr[8:0]] <= rmt_req[l].wdata;
      end else if (rc == 0) begin
        rmt_rsp[l].ack <= 1'b1; rmt_rsp[l].rdata <= rq; rc <= -1;
      end else if (rc > 0) rc <= rc - 1;
    end
  end

  always @(posedge clk) begin
    if ($countones({own_req[0].valid, own_req[1].valid, own_req[2].valid, own_req[3].valid}) > 1 ||
        $countones({rmt_req[0].valid, rmt_req[1].valid, rmt_req[2].valid, rmt_req[3].valid}) > 1)
      parallel++;
  end

  task automatic run(input pim_instr_t ins);
    @(negedge clk);
    category = ins.cat;
    field = '{op: ins.op, cnt_m: ins.cnt_m, cnt_s: ins.cnt_s, addr_a: ins.addr_a, addr_b: ins.addr_b,
              addr_c: ins.addr_c, addr_d: ins.addr_d, imm: ins.imm};
    mod_sel = ins.mod_sel[N-1:0];
    start = 1;
    @(negedge clk);
    start = 0;
    do @(posedge clk); while (!done);
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] osnap [N][2][512];
    for (int l = 0; l < int'(N); l++) begin
      own_rsp[l] = '0; rmt_rsp[l] = '0;
      for (int b = 0; b < 2; b++) for (int a = 0; a < 512; a++) begin
        omem[l][b][a] = 8'($urandom); rmem[l][b][a] = 8'($urandom);
      end
    end
    field = '0; mod_sel = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 24; r++) begin
      automatic logic [7:0] sel = 8'($urandom_range(1, 15));
      automatic int len = (r == 0) ? 0 : (r == 1) ? 16 : (r == 2) ? 37 : $urandom_range(1, 40);
      automatic int src = $urandom_range(200), dst = $urandom_range(200), off = $urandom_range(7);
      automatic bit ss = 1'($urandom), ds = 1'($urandom), other = (r % 3 != 0);
      osnap = omem;
      run(mk_move(1'b0, sel, ss, ds, other, src, dst, len, off));
      for (int l = 0; l < int'(N); l++) if (sel[l])
        for (int i = 0; i < len; i++) begin
          automatic int d = (l + off) % int'(N);
          automatic logic [7:0] got = other ? rmem[d][ds][dst + i] : omem[d][ds][dst + i];
          check(got == osnap[l][ss][src + i], $sformatf("move r%0d lane %0d byte %0d", r, l, i));
        end
    end
    // host broadcast write and host read
    for (int r = 0; r < 10; r++) begin
      automatic logic [7:0] sel = 8'($urandom_range(1, 15));
      automatic logic [31:0] w = $urandom;
      automatic int a = $urandom_range(300);
      automatic bit b = 1'($urandom);
      run(mk_host_wr(1'b0, sel, b, a, w));
      for (int l = 0; l < int'(N); l++) if (sel[l])
        check({omem[l][b][a + 3], omem[l][b][a + 2], omem[l][b][a + 1], omem[l][b][a]} == w, "host write");
      fork
        run(mk_host_rd(1'b0, sel, b, a));
        begin
          wait (rd_valid);
          check(rd_data == w, $sformatf("host read %h vs %h", rd_data, w));
          @(negedge clk); rd_ready = 1;
          @(negedge clk); rd_ready = 0;
        end
      join
    end
    check(parallel > 0, "lanes transferred in parallel");
    $display("parallel cycles %0d", parallel);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
