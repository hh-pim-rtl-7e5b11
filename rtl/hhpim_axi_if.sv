// hhpim_axi_if: the HH-PIM Interface, the AXI slave through which the core
// talks to HH-PIM. It is an AXI4-Lite subset (single beats, no bursts, no
// IDs) with this register map (byte offsets, 32-bit registers):
//   0x00-0x0C INSTR0..3  instruction word k = bits [32k+31:32k]; a write to
//                        INSTR3 pushes the assembled 128-bit instruction into
//                        the instruction queue (the write is not accepted
//                        while the queue is full)
//   0x10 STATUS  [5:0] queue count, [8] HP busy, [9] LP busy,
//                [14:12] read-data FIFO count, [16] queue empty
//   0x14 RDATA   pops the next 32-bit word of host-read data (0 if empty)
//   0x18 PWR     power gates: [0] HP-MRAM [1] HP-SRAM [2] LP-MRAM [3] LP-SRAM,
//                1 = powered (reset 4'hF)
//   0x1C ILLEGAL [15:0] HP, [31:16] LP illegal-instruction counts
// A write is accepted when AWVALID and WVALID are both high (AWREADY = WREADY
// in that cycle), WSTRB selects bytes, BVALID follows one cycle later. A read
// is answered one cycle after ARVALID/ARREADY. Responses are always OKAY.
// Host-read words from the two controllers enter a 4-deep FIFO, HP first
// when both offer one. The paper states only that the core and HH-PIM
// communicate over AXI; the register map is this design's own.
module hhpim_axi_if
  import hhpim_pkg::*;
#(
  parameter int unsigned QCNT_W = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [7:0]        s_awaddr,
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  input  logic              s_wvalid,
  output logic              s_wready,
  output logic [1:0]        s_bresp,
  output logic              s_bvalid,
  input  logic              s_bready,
  input  logic [7:0]        s_araddr,
  input  logic              s_arvalid,
  output logic              s_arready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  output logic              s_rvalid,
  input  logic              s_rready,
  // instruction queue
  output logic              q_push,
  output pim_instr_t        q_instr,
  input  logic              q_ready,
  input  logic [QCNT_W-1:0] q_count,
  // status
  input  logic              hp_busy,
  input  logic              lp_busy,
  input  logic [15:0]       hp_illegal,
  input  logic [15:0]       lp_illegal,
  // host read data from the controllers
  input  logic              hp_rd_valid,
  input  logic [31:0]       hp_rd_data,
  output logic              hp_rd_ready,
  input  logic              lp_rd_valid,
  input  logic [31:0]       lp_rd_data,
  output logic              lp_rd_ready,
  // power gates
  output logic [3:0]        pwr
);
  logic [31:0] iw [4];
  logic [31:0] rf [4];
  logic [1:0]  rf_rd, rf_wr;
  logic [2:0]  rf_cnt;

  function automatic logic [31:0] apply_strb(logic [31:0] old, logic [31:0] d, logic [3:0] s);
    for (int b = 0; b < 4; b++) if (s[b]) old[8*b +: 8] = d[8*b +: 8];
    return old;
  endfunction

  // ---- write channel
  wire aw_is_i3 = (s_awaddr[7:2] == 6'd3);
  wire wr_go    = s_awvalid && s_wvalid && !s_bvalid && (!aw_is_i3 || q_ready);
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;
  assign q_push    = wr_go && aw_is_i3;
  assign q_instr   = {apply_strb(iw[3], s_wdata, s_wstrb), iw[2], iw[1], iw[0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      pwr      <= 4'hF;
      for (int k = 0; k < 4; k++) iw[k] <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr[7:2])
          6'd0, 6'd1, 6'd2, 6'd3: iw[s_awaddr[3:2]] <= apply_strb(iw[s_awaddr[3:2]], s_wdata, s_wstrb);
          6'd6: if (s_wstrb[0]) pwr <= s_wdata[3:0];
          default: ;
        endcase
      end
    end
  end

  // ---- read-data FIFO
  wire rf_full  = (rf_cnt == 3'd4);
  assign hp_rd_ready = !rf_full;
  assign lp_rd_ready = !rf_full && !hp_rd_valid;
  wire rf_push  = (hp_rd_valid || lp_rd_valid) && !rf_full;
  wire rd_go    = s_arvalid && !s_rvalid;
  wire rf_pop   = rd_go && (s_araddr[7:2] == 6'd5) && (rf_cnt != 0);

  always_ff @(posedge clk) begin
    if (rf_push) rf[rf_wr] <= hp_rd_valid ? hp_rd_data : lp_rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rf_rd  <= '0;
      rf_wr  <= '0;
      rf_cnt <= '0;
    end else begin
      if (rf_push) rf_wr <= rf_wr + 2'd1;
      if (rf_pop)  rf_rd <= rf_rd + 2'd1;
      rf_cnt <= rf_cnt + (rf_push ? 3'd1 : 3'd0) - (rf_pop ? 3'd1 : 3'd0);
    end
  end

  // ---- read channel
  assign s_arready = rd_go;
  assign s_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
    end else begin
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (rd_go) begin
        s_rvalid <= 1'b1;
        unique case (s_araddr[7:2])
          6'd0, 6'd1, 6'd2, 6'd3: s_rdata <= iw[s_araddr[3:2]];
          6'd4: s_rdata <= {15'd0, (q_count == 0), 1'b0, rf_cnt, 2'b00, lp_busy, hp_busy, 2'b00, 6'(q_count)};
          6'd5: s_rdata <= (rf_cnt != 0) ? rf[rf_rd] : 32'd0;
          6'd6: s_rdata <= {28'd0, pwr};
          6'd7: s_rdata <= {lp_illegal, hp_illegal};
          default: s_rdata <= 32'd0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n) (s_bvalid && !s_bready) |=> s_bvalid)
    else $error("hhpim_axi_if: BVALID dropped");
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n) (s_rvalid && !s_rready) |=> s_rvalid && $stable(s_rdata))
    else $error("hhpim_axi_if: RVALID dropped or RDATA changed");
endmodule
