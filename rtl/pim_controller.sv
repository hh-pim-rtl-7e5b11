// pim_controller: the controller of one HH-PIM cluster (HP or LP; the two are
// identical RTL). It takes one instruction at a time from the instruction
// queue and drives the cluster's PIM modules:
//
//   Instruction Decoder -> Category, Instruction Field, Module Select Signal
//   State Machine       -> FETCH, DECODE, LOAD, EXECUTE, STORE (compute) or
//                          ALLOC (data placement / host access)
//   Command Encoder     -> PIM command of the current phase
//   CMD Interface Logic -> sends it to the selected modules, waits for all
//   Data Allocator      -> Address Generator + Data Rearrange Buffer, moves
//                          bytes between banks and between clusters
//   MEM Interface Logic -> one byte lane per module to this cluster's modules,
//                          one per module to the opposite cluster, and the
//                          entry point for the opposite cluster's writes
//
// Handshakes: instr_valid/instr_ready (instruction taken in IDLE), PIM
// commands as one-cycle pulses with a done pulse per module, and mem_req_t /
// mem_rsp_t lanes (request held until ack). A compute instruction costs
// FETCH + DECODE + the slowest selected module's LOAD, EXEC and STORE, plus a
// cycle of CMD Interface Logic per phase. The block structure is the paper's;
// encodings and handshakes are this design's own.
module pim_controller
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  parameter int unsigned VLEN      = VLEN_DEF,
  parameter int unsigned BUF_DEPTH = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 instr_valid,
  input  pim_instr_t           instr,
  output logic                 instr_ready,
  output logic                 busy,
  output ctrl_state_e          state,
  output logic [15:0]          illegal_cnt,
  // CMD interface to the modules
  output pim_cmd_t             mod_cmd  [N_MODULES],
  input  logic [N_MODULES-1:0] mod_done,
  // MEM interface to the modules
  output mem_req_t             mod_req  [N_MODULES],
  input  mem_rsp_t             mod_rsp  [N_MODULES],
  // MEM interface between clusters
  output mem_req_t             rmt_req  [N_MODULES],
  input  mem_rsp_t             rmt_rsp  [N_MODULES],
  input  mem_req_t             in_req   [N_MODULES],
  output mem_rsp_t             in_rsp   [N_MODULES],
  output logic [N_MODULES-1:0] in_wait,
  // host read data
  output logic                 rd_valid,
  output logic [31:0]          rd_data,
  input  logic                 rd_ready
);
  pim_instr_t           instr_q;
  category_e            category;
  instr_field_t         field;
  logic [N_MODULES-1:0] mod_sel;
  logic                 illegal, fetch_en, cmd_issue, cmd_done, alloc_start, alloc_done;
  pim_cmd_t             cmd;
  mem_req_t             a_req [N_MODULES], a_rmt_req [N_MODULES];
  mem_rsp_t             a_rsp [N_MODULES], a_rmt_rsp [N_MODULES];

  // Instruction register, loaded on FETCH
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        instr_q <= '0;
    else if (fetch_en) instr_q <= instr;
  end

  instr_decoder #(.N_MODULES(N_MODULES), .VLEN(VLEN)) u_dec (
    .instr(instr_q), .category, .field, .mod_sel, .illegal
  );

  ctrl_fsm u_fsm (
    .clk, .rst_n, .instr_valid, .instr_ready, .fetch_en, .category, .illegal,
    .store_en(field.op[1]), .state, .cmd_issue, .cmd_done, .alloc_start, .alloc_done,
    .busy, .illegal_cnt
  );

  cmd_encoder u_enc (.state, .cmd_issue, .field, .cmd);

  cmd_if #(.N_MODULES(N_MODULES)) u_cmd_if (
    .clk, .rst_n, .cmd, .mod_sel, .cmd_o(mod_cmd), .done_i(mod_done), .all_done(cmd_done)
  );

  data_allocator #(.N_MODULES(N_MODULES), .BUF_DEPTH(BUF_DEPTH)) u_alloc (
    .clk, .rst_n, .start(alloc_start), .category, .field, .mod_sel, .done(alloc_done),
    .own_req(a_req), .own_rsp(a_rsp), .rmt_req(a_rmt_req), .rmt_rsp(a_rmt_rsp),
    .rd_valid, .rd_data, .rd_ready
  );

  mem_if #(.N_MODULES(N_MODULES)) u_mem_if (
    .clk, .rst_n, .a_req, .a_rsp, .a_rmt_req, .a_rmt_rsp, .rmt_req, .rmt_rsp,
    .in_req, .in_rsp, .mod_req, .mod_rsp, .in_wait
  );
endmodule
