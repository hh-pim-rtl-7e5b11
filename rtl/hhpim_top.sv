// hhpim_top: the HH-PIM block (heterogeneous-hybrid processing-in-memory).
//
// Two clusters of PIM modules sit behind one AXI4-Lite slave and one
// instruction queue: an HP cluster (fast, power-hungry: 1.2 V latencies) and
// an LP cluster (slow, frugal: 0.8 V latencies), N_MODULES modules each, every
// module with a 64 kB STT-MRAM bank, a 64 kB SRAM bank and a MAC PE. Software
// splits each layer's weights between the four memory kinds (HP-MRAM, HP-SRAM,
// LP-MRAM, LP-SRAM) to trade energy for latency; the hardware provides
// compute instructions that take any mix of MRAM and SRAM operands, data
// placement instructions that move weights between banks and clusters, and
// power gates per memory kind.
//
// The HP controller's remote MEM lanes connect to the LP controller's
// incoming lanes and vice versa (the inter-cluster link between the
// "HP-PIM Interface" and "LP-PIM Interface"). pwr_o mirrors the PWR register
// for an external power controller. The observation outputs (controller
// states, module busy flags, cross-cluster waits, SYNC count) are for debug
// and performance counters and may be left open. All timing is in cycles of
// clk: one cycle stands for 0.25 ns of the published memory and PE access
// times. The original prototype ran at 50 MHz with its memory latencies
// scaled from the same access times; the 0.25 ns scale is this design's own.
module hhpim_top
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  parameter int unsigned MEM_BYTES = MEM_BYTES_DEF,
  parameter int unsigned VLEN      = VLEN_DEF,
  parameter int unsigned BUF_DEPTH = 16,
  parameter int unsigned Q_DEPTH   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  output logic [3:0]  pwr_o,
  output logic        hp_busy,
  output logic        lp_busy,
  // observation outputs (debug / performance counters)
  output ctrl_state_e  hp_state,
  output ctrl_state_e  lp_state,
  output logic [N_MODULES-1:0] hp_mod_busy,
  output logic [N_MODULES-1:0] lp_mod_busy,
  output logic [N_MODULES-1:0] hp_in_wait,
  output logic [N_MODULES-1:0] lp_in_wait,
  output logic [15:0]  sync_cnt
);
  localparam int unsigned QW = $clog2(Q_DEPTH) + 1;

  logic        q_push, q_ready;
  pim_instr_t  q_instr, hp_instr, lp_instr;
  logic [QW-1:0] q_count;
  logic        hp_valid, hp_ready, lp_valid, lp_ready;
  logic [15:0] hp_illegal, lp_illegal;
  logic        hp_rd_valid, hp_rd_ready, lp_rd_valid, lp_rd_ready;
  logic [31:0] hp_rd_data, lp_rd_data;
  logic [3:0]  pwr;
  mem_req_t    hp2lp_req [N_MODULES], lp2hp_req [N_MODULES];
  mem_rsp_t    hp2lp_rsp [N_MODULES], lp2hp_rsp [N_MODULES];

  assign pwr_o = pwr;

  hhpim_axi_if #(.QCNT_W(QW)) u_axi (
    .clk, .rst_n,
    .s_awaddr, .s_awvalid, .s_awready, .s_wdata, .s_wstrb, .s_wvalid, .s_wready,
    .s_bresp, .s_bvalid, .s_bready, .s_araddr, .s_arvalid, .s_arready,
    .s_rdata, .s_rresp, .s_rvalid, .s_rready,
    .q_push, .q_instr, .q_ready, .q_count,
    .hp_busy, .lp_busy, .hp_illegal, .lp_illegal,
    .hp_rd_valid, .hp_rd_data, .hp_rd_ready, .lp_rd_valid, .lp_rd_data, .lp_rd_ready,
    .pwr
  );

  instr_queue #(.DEPTH(Q_DEPTH)) u_queue (
    .clk, .rst_n, .push_valid(q_push), .push_instr(q_instr), .push_ready(q_ready),
    .hp_valid, .hp_instr, .hp_ready, .hp_busy,
    .lp_valid, .lp_instr, .lp_ready, .lp_busy,
    .count(q_count), .sync_cnt
  );

  pim_cluster #(
    .N_MODULES(N_MODULES), .MEM_BYTES(MEM_BYTES), .VLEN(VLEN), .BUF_DEPTH(BUF_DEPTH),
    .MRAM_RD(HP_MRAM_RD), .MRAM_WR(HP_MRAM_WR), .SRAM_RD(HP_SRAM_RD),
    .SRAM_WR(HP_SRAM_WR), .PE_LAT(HP_PE_LAT)
  ) u_hp (
    .clk, .rst_n, .pwr_mram(pwr[0]), .pwr_sram(pwr[1]),
    .instr_valid(hp_valid), .instr(hp_instr), .instr_ready(hp_ready), .busy(hp_busy),
    .state(hp_state), .illegal_cnt(hp_illegal), .mod_busy(hp_mod_busy),
    .rmt_req(hp2lp_req), .rmt_rsp(hp2lp_rsp), .in_req(lp2hp_req), .in_rsp(lp2hp_rsp),
    .in_wait(hp_in_wait), .rd_valid(hp_rd_valid), .rd_data(hp_rd_data), .rd_ready(hp_rd_ready)
  );

  pim_cluster #(
    .N_MODULES(N_MODULES), .MEM_BYTES(MEM_BYTES), .VLEN(VLEN), .BUF_DEPTH(BUF_DEPTH),
    .MRAM_RD(LP_MRAM_RD), .MRAM_WR(LP_MRAM_WR), .SRAM_RD(LP_SRAM_RD),
    .SRAM_WR(LP_SRAM_WR), .PE_LAT(LP_PE_LAT)
  ) u_lp (
    .clk, .rst_n, .pwr_mram(pwr[2]), .pwr_sram(pwr[3]),
    .instr_valid(lp_valid), .instr(lp_instr), .instr_ready(lp_ready), .busy(lp_busy),
    .state(lp_state), .illegal_cnt(lp_illegal), .mod_busy(lp_mod_busy),
    .rmt_req(lp2hp_req), .rmt_rsp(lp2hp_rsp), .in_req(hp2lp_req), .in_rsp(hp2lp_rsp),
    .in_wait(lp_in_wait), .rd_valid(lp_rd_valid), .rd_data(lp_rd_data), .rd_ready(lp_rd_ready)
  );
endmodule
