// rearrange_buf: the Data Allocator's Data Rearrange Buffer (one "module
// buffer" per lane). It holds the bytes read from the source modules until
// the destination modules accept them, so a fast cluster never has to wait
// on a slow one mid-transfer.
//
// Write side (per source lane l): wr_en[l] stores wr_data[l] at entry wr_idx
// and tags the lane with its destination module wr_tag[l]. Read side (per
// destination module d): rd_valid[d] and rd_data[d] give entry rd_idx of the
// lane whose tag is d, so data leaves the buffer rearranged into destination
// order. clear empties all lanes. Writes take effect at the clock edge; reads
// are combinational. Depth per lane is this design's own choice.
module rearrange_buf
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  parameter int unsigned DEPTH     = 16,
  localparam int unsigned MW = (N_MODULES > 1) ? $clog2(N_MODULES) : 1,
  localparam int unsigned IW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic [N_MODULES-1:0] wr_en,
  input  logic [IW-1:0]     wr_idx,
  input  logic [DATA_W-1:0] wr_data [N_MODULES],
  input  logic [MW-1:0]     wr_tag  [N_MODULES],
  input  logic [IW-1:0]     rd_idx,
  output logic [N_MODULES-1:0] rd_valid,
  output logic [DATA_W-1:0] rd_data [N_MODULES]
);
  logic [DATA_W-1:0]    mem [N_MODULES][DEPTH];
  logic [MW-1:0]        tag [N_MODULES];
  logic [N_MODULES-1:0] lane_v;

  always_ff @(posedge clk) begin
    for (int l = 0; l < int'(N_MODULES); l++)
      if (wr_en[l]) mem[l][wr_idx] <= wr_data[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane_v <= '0;
      for (int l = 0; l < int'(N_MODULES); l++) tag[l] <= '0;
    end else if (clear) begin
      lane_v <= '0;
    end else begin
      for (int l = 0; l < int'(N_MODULES); l++)
        if (wr_en[l]) begin
          lane_v[l] <= 1'b1;
          tag[l]    <= wr_tag[l];
        end
    end
  end

  always_comb begin
    for (int d = 0; d < int'(N_MODULES); d++) begin
      rd_valid[d] = 1'b0;
      rd_data[d]  = '0;
      for (int l = 0; l < int'(N_MODULES); l++)
        if (lane_v[l] && (int'(tag[l]) == d)) begin
          rd_valid[d] = 1'b1;
          rd_data[d]  = mem[l][rd_idx];
        end
    end
  end
endmodule
