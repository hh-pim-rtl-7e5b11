// instr_queue: the PIM Instruction Queue. Instructions from the core are
// stored in order in a DEPTH-entry FIFO; the head is offered to the HP or the
// LP controller according to its cluster bit and leaves the queue when that
// controller takes it (valid/ready). Dispatch is in order, so an instruction
// waits behind the one ahead of it, but the two controllers run in parallel
// once each has its instruction. A SYNC instruction at the head is held until
// both controllers are idle and is then dropped; it orders work between
// clusters, for example a data move into the LP cluster before LP compute.
// push_ready is low when the queue is full. Timing: an instruction pushed in
// one cycle can be offered from the next; the head leaves at the edge at which
// its controller's ready is high, so dispatch takes one cycle per instruction
// when the controller is idle. The queue is the paper's; its depth and the
// SYNC barrier are this design's own.
module instr_queue
  import hhpim_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_valid,
  input  pim_instr_t  push_instr,
  output logic        push_ready,
  output logic        hp_valid,
  output pim_instr_t  hp_instr,
  input  logic        hp_ready,
  input  logic        hp_busy,
  output logic        lp_valid,
  output pim_instr_t  lp_instr,
  input  logic        lp_ready,
  input  logic        lp_busy,
  output logic [PW:0] count,
  output logic [15:0] sync_cnt
);
  pim_instr_t    q [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  pim_instr_t    head;
  logic          empty, is_sync, pop, push;

  assign empty      = (count == 0);
  assign push_ready = (count != (PW+1)'(DEPTH));
  assign head       = q[rd_ptr];
  assign is_sync    = (head.cat == CAT_SYNC);
  assign hp_valid   = !empty && !is_sync && !head.cluster;
  assign lp_valid   = !empty && !is_sync &&  head.cluster;
  assign hp_instr   = head;
  assign lp_instr   = head;
  wire   sync_go    = !empty && is_sync && !hp_busy && !lp_busy;
  assign pop        = (hp_valid && hp_ready) || (lp_valid && lp_ready) || sync_go;
  assign push       = push_valid && push_ready;

  always_ff @(posedge clk) begin
    if (push) q[wr_ptr] <= push_instr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      sync_cnt <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + ((PW+1)'(push)) - ((PW+1)'(pop));
      if (sync_go) sync_cnt <= sync_cnt + 16'd1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (PW+1)'(DEPTH))
    else $error("instr_queue: overflow");
endmodule
