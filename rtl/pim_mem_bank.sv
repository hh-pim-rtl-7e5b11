// pim_mem_bank: one SRAM or STT-MRAM bank of a PIM module, modelled as an
// array with a fixed read and write latency.
//
// HH-PIM modules hold weights and activations in a hybrid of MRAM and SRAM
// banks whose access times differ; the same RTL serves all four kinds
// (HP-MRAM, HP-SRAM, LP-MRAM, LP-SRAM) through RD_LAT/WR_LAT. The defaults are
// the HP-MRAM figures (2.62 ns read, 11.81 ns write at one cycle per 0.25 ns).
//
// Interface: byte-wide mem_req_t/mem_rsp_t. A request is accepted in a cycle
// in which the bank is idle and req.valid is high; the array is read or
// written at that edge and rsp.ack rises exactly LAT cycles after the accept
// cycle, for one cycle, with rsp.rdata. The requester holds req until ack;
// the bank is idle again in the cycle after ack, so back-to-back accesses take
// LAT+1 cycles each.
//
// power_on models the power gate: a gated bank still acknowledges, but drops
// writes and reads as zero. Losing the SRAM contents on power-down is not
// modelled. The latency model and the gate behaviour are this design's own.
module pim_mem_bank
  import hhpim_pkg::*;
#(
  parameter int unsigned DEPTH  = MEM_BYTES_DEF,
  parameter int unsigned RD_LAT = HP_MRAM_RD,
  parameter int unsigned WR_LAT = HP_MRAM_WR
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     power_on,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DATA_W-1:0] mem [DEPTH];
  logic              busy;
  logic [7:0]        cnt;
  logic [DATA_W-1:0] rdata_q;
  logic              pwr_q;

  wire accept = !busy && req.valid;

  always_ff @(posedge clk) begin
    if (accept) begin
      if (req.we && power_on) mem[req.addr[AW-1:0]] <= req.wdata;
      rdata_q <= mem[req.addr[AW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      pwr_q <= 1'b0;
    end else if (accept) begin
      busy  <= 1'b1;
      cnt   <= 8'((req.we ? WR_LAT : RD_LAT) - 1);
      pwr_q <= power_on;
    end else if (busy) begin
      if (cnt == 0) busy <= 1'b0;
      else          cnt  <= cnt - 8'd1;
    end
  end

  assign rsp.ack   = busy && (cnt == 0);
  assign rsp.rdata = pwr_q ? rdata_q : '0;

  initial begin
    assert (RD_LAT >= 1 && RD_LAT <= 256 && WR_LAT >= 1 && WR_LAT <= 256)
      else $error("pim_mem_bank: latency out of range");
  end
endmodule
