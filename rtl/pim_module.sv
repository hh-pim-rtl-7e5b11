// pim_module: one HH-PIM module: an STT-MRAM bank, an SRAM bank, a PE and the
// module interface that sequences them.
//
// HP and LP modules are the same RTL; they differ only in the latency
// parameters (defaults: HP module, 1.2 V figures; an LP module uses the
// LP_* constants of hhpim_pkg). Each bank is MEM_BYTES bytes (64 kB in the
// paper). Commands come from the cluster controller's CMD Interface Logic
// (pim_cmd_t, done pulse); byte accesses come through the MEM port
// (mem_req_t/mem_rsp_t, req.sram selects the bank). pwr_mram / pwr_sram are
// the power gates of the two banks. Timing is that of pim_module_if.
module pim_module
  import hhpim_pkg::*;
#(
  parameter int unsigned MEM_BYTES = MEM_BYTES_DEF,
  parameter int unsigned VLEN      = VLEN_DEF,
  parameter int unsigned MRAM_RD   = HP_MRAM_RD,
  parameter int unsigned MRAM_WR   = HP_MRAM_WR,
  parameter int unsigned SRAM_RD   = HP_SRAM_RD,
  parameter int unsigned SRAM_WR   = HP_SRAM_WR,
  parameter int unsigned PE_LAT    = HP_PE_LAT
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     pwr_mram,
  input  logic     pwr_sram,
  input  pim_cmd_t cmd,
  output logic     done,
  output logic     busy,
  input  mem_req_t preq,
  output mem_rsp_t prsp
);
  mem_req_t mreq, sreq;
  mem_rsp_t mrsp, srsp;
  logic pe_start, pe_clr, pe_done, pe_busy;
  logic [DATA_W-1:0] pe_a, pe_b;
  logic [ACC_W-1:0]  pe_acc;

  pim_module_if #(.VLEN(VLEN)) u_if (
    .clk, .rst_n, .cmd, .done, .busy, .preq, .prsp,
    .mreq, .mrsp, .sreq, .srsp,
    .pe_start, .pe_clr, .pe_a, .pe_b, .pe_done, .pe_acc
  );

  pim_mem_bank #(.DEPTH(MEM_BYTES), .RD_LAT(MRAM_RD), .WR_LAT(MRAM_WR)) u_mram (
    .clk, .rst_n, .power_on(pwr_mram), .req(mreq), .rsp(mrsp)
  );

  pim_mem_bank #(.DEPTH(MEM_BYTES), .RD_LAT(SRAM_RD), .WR_LAT(SRAM_WR)) u_sram (
    .clk, .rst_n, .power_on(pwr_sram), .req(sreq), .rsp(srsp)
  );

  pim_pe #(.PE_LAT(PE_LAT)) u_pe (
    .clk, .rst_n, .start(pe_start), .clr(pe_clr), .a(pe_a), .b(pe_b),
    .busy(pe_busy), .done(pe_done), .acc(pe_acc)
  );
endmodule
