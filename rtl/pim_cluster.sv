// pim_cluster: one HH-PIM module cluster: a pim_controller and N_MODULES PIM
// modules of one kind. The defaults build the HP cluster (1.2 V latencies);
// the LP cluster is the same RTL with the LP_* latencies of hhpim_pkg.
// The controller's CMD lanes go to each module's command input and its MEM
// lanes to each module's MEM port; the inter-cluster MEM lanes and the
// instruction handshake are brought out to the top. pwr_mram / pwr_sram gate
// all MRAM / SRAM banks of the cluster together (the paper gates whole memory
// types). Timing is that of pim_controller and pim_module.
module pim_cluster
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  parameter int unsigned MEM_BYTES = MEM_BYTES_DEF,
  parameter int unsigned VLEN      = VLEN_DEF,
  parameter int unsigned BUF_DEPTH = 16,
  parameter int unsigned MRAM_RD   = HP_MRAM_RD,
  parameter int unsigned MRAM_WR   = HP_MRAM_WR,
  parameter int unsigned SRAM_RD   = HP_SRAM_RD,
  parameter int unsigned SRAM_WR   = HP_SRAM_WR,
  parameter int unsigned PE_LAT    = HP_PE_LAT
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 pwr_mram,
  input  logic                 pwr_sram,
  input  logic                 instr_valid,
  input  pim_instr_t           instr,
  output logic                 instr_ready,
  output logic                 busy,
  output ctrl_state_e          state,
  output logic [15:0]          illegal_cnt,
  output logic [N_MODULES-1:0] mod_busy,
  output mem_req_t             rmt_req [N_MODULES],
  input  mem_rsp_t             rmt_rsp [N_MODULES],
  input  mem_req_t             in_req  [N_MODULES],
  output mem_rsp_t             in_rsp  [N_MODULES],
  output logic [N_MODULES-1:0] in_wait,
  output logic                 rd_valid,
  output logic [31:0]          rd_data,
  input  logic                 rd_ready
);
  pim_cmd_t             mod_cmd [N_MODULES];
  logic [N_MODULES-1:0] mod_done;
  mem_req_t             mod_req [N_MODULES];
  mem_rsp_t             mod_rsp [N_MODULES];

  pim_controller #(.N_MODULES(N_MODULES), .VLEN(VLEN), .BUF_DEPTH(BUF_DEPTH)) u_ctrl (
    .clk, .rst_n, .instr_valid, .instr, .instr_ready, .busy, .state, .illegal_cnt,
    .mod_cmd, .mod_done, .mod_req, .mod_rsp, .rmt_req, .rmt_rsp, .in_req, .in_rsp,
    .in_wait, .rd_valid, .rd_data, .rd_ready
  );

  for (genvar m = 0; m < int'(N_MODULES); m++) begin : g_mod
    pim_module #(
      .MEM_BYTES(MEM_BYTES), .VLEN(VLEN), .MRAM_RD(MRAM_RD), .MRAM_WR(MRAM_WR),
      .SRAM_RD(SRAM_RD), .SRAM_WR(SRAM_WR), .PE_LAT(PE_LAT)
    ) u_mod (
      .clk, .rst_n, .pwr_mram, .pwr_sram, .cmd(mod_cmd[m]), .done(mod_done[m]),
      .busy(mod_busy[m]), .preq(mod_req[m]), .prsp(mod_rsp[m])
    );
  end
endmodule
