// addr_gen: the Data Allocator's Address Generator: Address Calculation Logic
// plus Address Register.
//
// On load it captures the source and destination base addresses and the
// module offset of a data-placement instruction. step_src / step_dst advance
// the source / destination byte address by one. For every source lane l the
// calculation logic gives the destination module index
//   dst_mod[l] = (l + mod_off) mod N_MODULES,
// so lane l of one cluster lands in module dst_mod[l] of the destination
// cluster. Addresses are registered; dst_mod is combinational from the
// registered offset. The paper says the generator produces "the destination
// PIM module index and memory bank addresses"; the rotation rule is this
// design's own.
module addr_gen
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  localparam int unsigned MW = (N_MODULES > 1) ? $clog2(N_MODULES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              load,
  input  logic [ADDR_W-1:0] src_base,
  input  logic [ADDR_W-1:0] dst_base,
  input  logic [2:0]        mod_off,
  input  logic              step_src,
  input  logic              step_dst,
  output logic [ADDR_W-1:0] src_addr,
  output logic [ADDR_W-1:0] dst_addr,
  output logic [MW-1:0]     dst_mod [N_MODULES]
);
  logic [2:0] off_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_addr <= '0;
      dst_addr <= '0;
      off_q    <= '0;
    end else if (load) begin
      src_addr <= src_base;
      dst_addr <= dst_base;
      off_q    <= mod_off;
    end else begin
      if (step_src) src_addr <= src_addr + 1'b1;
      if (step_dst) dst_addr <= dst_addr + 1'b1;
    end
  end

  always_comb begin
    for (int l = 0; l < int'(N_MODULES); l++)
      dst_mod[l] = MW'((l + int'(off_q)) % int'(N_MODULES));
  end
endmodule
