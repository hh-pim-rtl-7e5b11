// mem_if: the controller's MEM Interface Logic. It has one byte lane per PIM
// module of the cluster, so data moves to and from all modules in parallel
// (the paper scales its bandwidth with the number of modules).
//
// For each lane l it arbitrates between two requesters of this cluster's
// module l: the own Data Allocator (a_req) and the opposite cluster's
// controller (in_req, data arriving from the other cluster). The own side
// wins when both are waiting; once a request has been routed the lane is
// locked to it until the module acknowledges, so a request is never cut off
// in flight. The opposite cluster's traffic is therefore held back (not
// acknowledged) while the own side or a running command keeps the module
// busy. Requests from the own allocator towards the opposite cluster
// (a_rmt_req) pass straight through to the remote ports.
// Routing is combinational; lock state changes at the clock edge. The
// lane-per-module width follows the paper; the arbitration is this design's
// own.
module mem_if
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF
) (
  input  logic     clk,
  input  logic     rst_n,
  // own Data Allocator, own lanes
  input  mem_req_t a_req     [N_MODULES],
  output mem_rsp_t a_rsp     [N_MODULES],
  // own Data Allocator, lanes to the opposite cluster
  input  mem_req_t a_rmt_req [N_MODULES],
  output mem_rsp_t a_rmt_rsp [N_MODULES],
  // to / from the opposite cluster's controller
  output mem_req_t rmt_req   [N_MODULES],
  input  mem_rsp_t rmt_rsp   [N_MODULES],
  input  mem_req_t in_req    [N_MODULES],
  output mem_rsp_t in_rsp    [N_MODULES],
  // this cluster's modules
  output mem_req_t mod_req   [N_MODULES],
  input  mem_rsp_t mod_rsp   [N_MODULES],
  output logic [N_MODULES-1:0] in_wait   // incoming request not yet acknowledged
);
  logic [N_MODULES-1:0] lock_q, who_q;  // who: 0 own, 1 incoming
  logic [N_MODULES-1:0] sel_own, sel_in;

  // request routing (depends on requests and lock state only)
  always_comb begin
    for (int l = 0; l < int'(N_MODULES); l++) begin
      sel_own[l] = lock_q[l] ? !who_q[l] : a_req[l].valid;
      sel_in[l]  = lock_q[l] ?  who_q[l] : (!a_req[l].valid && in_req[l].valid);
      mod_req[l] = sel_own[l] ? a_req[l] : (sel_in[l] ? in_req[l] : '0);
      rmt_req[l] = a_rmt_req[l];
    end
  end

  // response routing
  always_comb begin
    for (int l = 0; l < int'(N_MODULES); l++) begin
      a_rsp[l]     = sel_own[l] ? mod_rsp[l] : '0;
      in_rsp[l]    = sel_in[l]  ? mod_rsp[l] : '0;
      in_wait[l]   = in_req[l].valid && !(sel_in[l] && mod_rsp[l].ack);
      a_rmt_rsp[l] = rmt_rsp[l];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lock_q <= '0;
      who_q  <= '0;
    end else begin
      for (int l = 0; l < int'(N_MODULES); l++) begin
        if (lock_q[l]) begin
          if (mod_rsp[l].ack) lock_q[l] <= 1'b0;
        end else if ((sel_own[l] || sel_in[l]) && !mod_rsp[l].ack) begin
          lock_q[l] <= 1'b1;
          who_q[l]  <= sel_in[l];
        end
      end
    end
  end
endmodule
