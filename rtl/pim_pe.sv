// pim_pe: processing element of a PIM module: signed INT8 x INT8
// multiply-accumulate into a 32-bit accumulator.
//
// A start pulse (PE idle) captures the weight a and the input b; the product
// is added to the accumulator PE_LAT cycles later, in the cycle in which done
// is high. clr (PE idle) zeroes the accumulator. One MAC therefore occupies
// the PE for PE_LAT cycles after its start cycle. The paper gives the PE's
// latency (5.52 ns HP, 10.68 ns LP; default is HP at one cycle per 0.25 ns)
// and that PIM computes MACs; the signed arithmetic and accumulator width are
// this design's own.
module pim_pe
  import hhpim_pkg::*;
#(
  parameter int unsigned PE_LAT = HP_PE_LAT,
  parameter int unsigned AW     = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic                     clr,
  input  logic signed [DATA_W-1:0] a,
  input  logic signed [DATA_W-1:0] b,
  output logic                     busy,
  output logic                     done,
  output logic signed [AW-1:0]     acc
);
  logic signed [DATA_W-1:0] a_q, b_q;
  logic [7:0]               cnt;
  logic signed [2*DATA_W-1:0] prod;

  assign prod = a_q * b_q;

  assign done = busy && (cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      a_q  <= '0;
      b_q  <= '0;
      acc  <= '0;
    end else if (!busy) begin
      if (clr) acc <= '0;
      if (start) begin
        busy <= 1'b1;
        cnt  <= 8'(PE_LAT - 1);
        a_q  <= a;
        b_q  <= b;
      end
    end else if (cnt == 0) begin
      busy <= 1'b0;
      acc  <= acc + AW'(prod);
    end else begin
      cnt <= cnt - 8'd1;
    end
  end

  initial assert (PE_LAT >= 1 && PE_LAT <= 256) else $error("pim_pe: PE_LAT out of range");
endmodule
