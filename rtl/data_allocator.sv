// data_allocator: the controller's Data Allocator. It runs the instructions
// that move data rather than compute:
//
//   MOVE (data placement): copies LEN = {cnt_m,cnt_s} bytes from bank op[0]
//     (0 MRAM, 1 SRAM) at addr_a of every selected module of this cluster to
//     bank op[1] at addr_b of module (lane + imm[2:0]) mod N, either in this
//     cluster (op[2]=0, e.g. MRAM->SRAM inside a module) or in the opposite
//     cluster (op[2]=1). The copy goes in chunks of BUF_DEPTH bytes: all
//     selected lanes are read in parallel into the Data Rearrange Buffer
//     (one byte per lane per step), then the buffered bytes are written to
//     the destination modules, again one byte per lane per step. A
//     destination that is busy simply does not acknowledge; the bytes stay in
//     the buffer until it does.
//   HOST write: writes the 32-bit immediate, byte by byte from addr_a, into
//     bank op[1] of every selected module (a broadcast when several are set).
//   HOST read: reads 4 bytes from addr_a of bank op[1] of the lowest selected
//     module and offers them on rd_valid/rd_data until rd_ready.
//
// start is a one-cycle pulse with the decoded instruction stable until done
// (one-cycle pulse). Byte requests use mem_req_t (held until ack) on the own
// lanes (to this cluster's modules) and the remote lanes (to the opposite
// cluster). The paper describes the read-buffer-write sequence, the buffer
// and the address generator; chunking, the host-access path and the lane
// rotation are this design's own.
module data_allocator
  import hhpim_pkg::*;
#(
  parameter int unsigned N_MODULES = N_MODULES_DEF,
  parameter int unsigned BUF_DEPTH = 16,
  localparam int unsigned MW = (N_MODULES > 1) ? $clog2(N_MODULES) : 1,
  localparam int unsigned IW = (BUF_DEPTH > 1) ? $clog2(BUF_DEPTH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  category_e            category,
  input  instr_field_t         field,
  input  logic [N_MODULES-1:0] mod_sel,
  output logic                 done,
  output mem_req_t             own_req [N_MODULES],
  input  mem_rsp_t             own_rsp [N_MODULES],
  output mem_req_t             rmt_req [N_MODULES],
  input  mem_rsp_t             rmt_rsp [N_MODULES],
  output logic                 rd_valid,
  output logic [31:0]          rd_data,
  input  logic                 rd_ready
);
  typedef enum logic [2:0] {A_IDLE, A_RD, A_WR, A_HWR, A_HRD, A_HOUT, A_DONE} astate_e;

  astate_e              st;
  logic [15:0]          rem;      // bytes still to move
  logic [15:0]          chunk;    // bytes in the current chunk
  logic [IW:0]          j;        // byte index within chunk / host word
  logic [N_MODULES-1:0] got;      // lanes that have finished the current step
  logic [N_MODULES-1:0] lanes;    // lanes taking part in the current step
  logic [MW-1:0]        hlane;    // lane of a host read

  // address generator
  logic              ag_load, step_src, step_dst;
  logic [ADDR_W-1:0] src_addr, dst_addr;
  logic [MW-1:0]     dst_mod [N_MODULES];

  addr_gen #(.N_MODULES(N_MODULES)) u_ag (
    .clk, .rst_n, .load(ag_load), .src_base(field.addr_a), .dst_base(field.addr_b),
    .mod_off(field.imm[2:0]), .step_src, .step_dst, .src_addr, .dst_addr, .dst_mod
  );

  // rearrange buffer
  logic [N_MODULES-1:0] buf_wr, buf_rv;
  logic [DATA_W-1:0]    buf_wd [N_MODULES];
  logic [DATA_W-1:0]    buf_rd [N_MODULES];
  logic                 buf_clr;

  rearrange_buf #(.N_MODULES(N_MODULES), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n, .clear(buf_clr), .wr_en(buf_wr), .wr_idx(j[IW-1:0]), .wr_data(buf_wd),
    .wr_tag(dst_mod), .rd_idx(j[IW-1:0]), .rd_valid(buf_rv), .rd_data(buf_rd)
  );

  wire to_rmt = field.op[2];   // destination is the opposite cluster
  wire [15:0] len = {field.cnt_m, field.cnt_s};

  always_comb begin
    hlane = '0;
    for (int l = int'(N_MODULES) - 1; l >= 0; l--)
      if (mod_sel[l]) hlane = MW'(l);
  end

  // request generation
  logic [N_MODULES-1:0] ack_v;
  always_comb begin
    ack_v  = '0;
    buf_wr = '0;
    lanes  = '0;
    for (int l = 0; l < int'(N_MODULES); l++) begin
      own_req[l] = '0;
      rmt_req[l] = '0;
      buf_wd[l]  = own_rsp[l].rdata;
    end
    unique case (st)
      A_RD: begin
        lanes = mod_sel;
        for (int l = 0; l < int'(N_MODULES); l++) begin
          own_req[l].valid = mod_sel[l] && !got[l];
          own_req[l].sram  = field.op[0];
          own_req[l].addr  = src_addr;
          ack_v[l]  = own_rsp[l].ack;
          buf_wr[l] = own_rsp[l].ack && mod_sel[l] && !got[l];
        end
      end
      A_WR: begin
        lanes = buf_rv;
        for (int d = 0; d < int'(N_MODULES); d++) begin
          if (to_rmt) begin
            rmt_req[d].valid = buf_rv[d] && !got[d];
            rmt_req[d].we    = 1'b1;
            rmt_req[d].sram  = field.op[1];
            rmt_req[d].addr  = dst_addr;
            rmt_req[d].wdata = buf_rd[d];
            ack_v[d] = rmt_rsp[d].ack;
          end else begin
            own_req[d].valid = buf_rv[d] && !got[d];
            own_req[d].we    = 1'b1;
            own_req[d].sram  = field.op[1];
            own_req[d].addr  = dst_addr;
            own_req[d].wdata = buf_rd[d];
            ack_v[d] = own_rsp[d].ack;
          end
        end
      end
      A_HWR: begin
        lanes = mod_sel;
        for (int l = 0; l < int'(N_MODULES); l++) begin
          own_req[l].valid = mod_sel[l] && !got[l];
          own_req[l].we    = 1'b1;
          own_req[l].sram  = field.op[1];
          own_req[l].addr  = src_addr;
          own_req[l].wdata = field.imm[8*j[1:0] +: 8];
          ack_v[l] = own_rsp[l].ack;
        end
      end
      A_HRD: begin
        lanes = '0;
        lanes[hlane] = 1'b1;
        own_req[hlane].valid = 1'b1;
        own_req[hlane].sram  = field.op[1];
        own_req[hlane].addr  = src_addr;
        ack_v[hlane] = own_rsp[hlane].ack;
      end
      default: ;
    endcase
  end

  wire step_done = (lanes & ~(got | ack_v)) == '0;

  assign rd_valid = (st == A_HOUT);

  always_comb begin
    ag_load  = start;
    step_src = (st inside {A_RD, A_HWR, A_HRD}) && step_done;
    step_dst = (st == A_WR) && step_done;
    buf_clr  = start || ((st == A_WR) && step_done && (j + 1 == chunk[IW:0]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= A_IDLE;
      rem     <= '0;
      chunk   <= '0;
      j       <= '0;
      got     <= '0;
      done    <= 1'b0;
      rd_data <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        A_IDLE: if (start) begin
          j   <= '0;
          got <= '0;
          if (category == CAT_MOVE) begin
            rem   <= len;
            chunk <= (len > 16'(BUF_DEPTH)) ? 16'(BUF_DEPTH) : len;
            st    <= (len == 0) ? A_DONE : A_RD;
          end else if (field.op[0]) st <= A_HRD;
          else                      st <= A_HWR;
        end
        A_RD: begin
          if (step_done) begin
            got <= '0;
            if (j + 1 == chunk[IW:0]) begin
              j  <= '0;
              st <= A_WR;
            end else j <= j + 1'b1;
          end else got <= got | (ack_v & lanes);
        end
        A_WR: begin
          if (step_done) begin
            got <= '0;
            if (j + 1 == chunk[IW:0]) begin
              j <= '0;
              if (rem == chunk) st <= A_DONE;
              else begin
                rem   <= rem - chunk;
                chunk <= ((rem - chunk) > 16'(BUF_DEPTH)) ? 16'(BUF_DEPTH) : (rem - chunk);
                st    <= A_RD;
              end
            end else j <= j + 1'b1;
          end else got <= got | (ack_v & lanes);
        end
        A_HWR: begin
          if (step_done) begin
            got <= '0;
            if (j == 3) st <= A_DONE;
            else j <= j + 1'b1;
          end else got <= got | (ack_v & lanes);
        end
        A_HRD: if (step_done) begin
          rd_data[8*j[1:0] +: 8] <= own_rsp[hlane].rdata;
          if (j == 3) st <= A_HOUT;
          else j <= j + 1'b1;
        end
        A_HOUT: if (rd_ready) st <= A_DONE;
        A_DONE: begin
          done <= 1'b1;
          st   <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> st == A_IDLE)
    else $error("data_allocator: start while busy");
endmodule
