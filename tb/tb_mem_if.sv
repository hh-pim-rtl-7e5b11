// tb_mem_if: self-checking test of mem_if with four lanes. Behind each lane
// sits a small memory model with a random response delay. The own side and
// the incoming (other-cluster) side issue random reads and writes to the same
// lanes at the same time; checks that every access completes with the right
// data, that the own side is served first when both wait on an idle lane,
// that the remote-side ports pass straight through, and counts cycles in
// which an incoming request had to wait (must happen).
//
// Interface: none, this is a top-level testbench.
// Timing: 10-time-unit clock; stimulus changes on the falling edge and is
// sampled on the rising edge; reset is released after 3 cycles.
// A watchdog fails the run after 100000 cycles.
// Ends with a TB_RESULT line giving the number of checks and failures.
// Expected values are computed here, independently of the design; the
// protocol checked is this design's own.
module tb_mem_if;
  import hhpim_pkg::*;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  mem_req_t a_req [N], a_rmt_req [N], rmt_req [N], in_req [N], mod_req [N];
  mem_rsp_t a_rsp [N], a_rmt_rsp [N], rmt_rsp [N], in_rsp [N], mod_rsp [N];
  logic [N-1:0] in_wait;
  int checks = 0, failures = 0, waits = 0, own_first = 0;
  logic [7:0] mem [N][256];
  always #5 clk = ~clk;

  mem_if #(.N_MODULES(N)) dut (.clk, .rst_n, .a_req, .a_rsp, .a_rmt_req, .a_rmt_rsp, .rmt_req,
                               .rmt_rsp, .in_req, .in_rsp, .mod_req, .mod_rsp, .in_wait);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // memory model per lane: accept, wait 1..4 cycles, ack
  for (genvar l = 0; l < N; l++) begin : g_mem
    int cnt = -1;
    logic [7:0] rq;
    always @(posedge clk) begin
      mod_rsp[l].ack <= 1'b0;
      if (cnt < 0 && mod_req[l].valid && !mod_rsp[l].ack) begin
        cnt <= $urandom_range(3);
        rq  <= mem[l][mod_req[l].addr[7:0]];
        if (mod_req[l].we) mem[l][mod_req[l].addr[7:0]] <= mod_req[l].wdata;
      end else if (cnt == 0) begin
        mod_rsp[l].ack   <= 1'b1;
        mod_rsp[l].rdata <= rq;
        cnt <= -1;
      end else if (cnt > 0) cnt <= cnt - 1;
    end
  end

  always @(posedge clk) if (rst_n) for (int l = 0; l < int'(N); l++) begin
    if (in_wait[l]) waits++;
    // in_wait: an incoming request is present and not acknowledged this cycle
    if (in_req[l].valid) check(in_wait[l] == !in_rsp[l].ack, "in_wait while an incoming request waits");
    else check(!in_wait[l], "no in_wait without an incoming request");
  end

  // one requester (own = 0 / incoming = 1) on one lane; address ranges kept apart
  task automatic requester(input int side, input int l);
    logic [7:0] shadow [64];
    for (int i = 0; i < 64; i++) begin
      shadow[i] = 8'($urandom);
      if (side == 0) a_req[l] <= '{1'b1, 1'b1, 1'b0, 16'(i), shadow[i]};
      else           in_req[l] <= '{1'b1, 1'b1, 1'b0, 16'(128 + i), shadow[i]};
      do @(posedge clk); while (!(side == 0 ? a_rsp[l].ack : in_rsp[l].ack));
      if (side == 0) a_req[l] <= '0; else in_req[l] <= '0;
    end
    for (int n = 0; n < 64; n++) begin
      automatic int i = $urandom_range(63);
      logic [7:0] q;
      if (side == 0) a_req[l] <= '{1'b1, 1'b0, 1'b0, 16'(i), 8'h0};
      else           in_req[l] <= '{1'b1, 1'b0, 1'b0, 16'(128 + i), 8'h0};
      do @(posedge clk); while (!(side == 0 ? a_rsp[l].ack : in_rsp[l].ack));
      q = (side == 0) ? a_rsp[l].rdata : in_rsp[l].rdata;
      if (side == 0) a_req[l] <= '0; else in_req[l] <= '0;
      check(q == shadow[i], $sformatf("side %0d lane %0d read", side, l));
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < int'(N); l++) begin
      a_req[l] = '0; in_req[l] = '0; a_rmt_req[l] = '0; rmt_rsp[l] = '0; mod_rsp[l] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // pass-through of the remote ports
    for (int l = 0; l < int'(N); l++) begin
      a_rmt_req[l] <= '{1'b1, 1'b1, 1'b1, 16'(l * 7), 8'(l + 3)};
      rmt_rsp[l]   <= '{1'b1, 8'(l + 9)};
    end
    @(posedge clk); #1;
    for (int l = 0; l < int'(N); l++)
      check(rmt_req[l] == a_rmt_req[l] && a_rmt_rsp[l] == rmt_rsp[l], "remote ports pass through");
    for (int l = 0; l < int'(N); l++) begin a_rmt_req[l] <= '0; rmt_rsp[l] <= '0; end
    // priority on an idle lane
    a_req[0]  <= '{1'b1, 1'b0, 1'b0, 16'd0, 8'h0};
    in_req[0] <= '{1'b1, 1'b0, 1'b0, 16'd128, 8'h0};
    @(posedge clk); #1;
    check(mod_req[0].addr == 16'd0, "own side first");
    do @(posedge clk); while (!a_rsp[0].ack);
    a_req[0] <= '0;
    do @(posedge clk); while (!in_rsp[0].ack);
    in_req[0] <= '0;
    @(posedge clk);
    // random concurrent traffic
    fork
      requester(0, 0); requester(1, 0);
      requester(0, 1); requester(1, 1);
      requester(0, 2); requester(1, 3);
    join
    check(waits > 0, "incoming requests had to wait");
    $display("incoming wait cycles: %0d", waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
