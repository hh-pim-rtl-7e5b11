// cmd_if: the controller's CMD Interface Logic. It forwards a PIM command to
// every module named by the Module Select Signal and keeps a mask of modules
// that have not yet answered. all_done pulses for one cycle once every
// selected module has pulsed its done, which is how the controller keeps the
// modules of its cluster in step although they may finish at different times.
// cmd_o[i] carries the command only to selected modules (valid gated per
// module). all_done comes at the earliest in the cycle after the last done.
// The paper names the block and its role; the pending-mask scheme is this
// design's own.
module cmd_if
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  pim_cmd_t             cmd,
  input  logic [N_MODULES-1:0] mod_sel,
  output pim_cmd_t             cmd_o [N_MODULES],
  input  logic [N_MODULES-1:0] done_i,
  output logic                 all_done
);
  logic [N_MODULES-1:0] pending;
  logic                 active;

  always_comb begin
    for (int i = 0; i < int'(N_MODULES); i++) begin
      cmd_o[i]       = cmd;
      cmd_o[i].valid = cmd.valid && mod_sel[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending  <= '0;
      active   <= 1'b0;
      all_done <= 1'b0;
    end else begin
      all_done <= 1'b0;
      if (cmd.valid) begin
        pending <= mod_sel;
        active  <= 1'b1;
      end else if (active) begin
        if ((pending & ~done_i) == '0) begin
          active   <= 1'b0;
          all_done <= 1'b1;
          pending  <= '0;
        end else begin
          pending <= pending & ~done_i;
        end
      end
    end
  end

  a_no_stray_done: assert property (@(posedge clk) disable iff (!rst_n)
    (done_i & ~pending) == '0)
    else $error("cmd_if: done from a module that was not sent a command");
endmodule
