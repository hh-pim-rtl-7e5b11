// pim_module_if: the "Interface" inside each PIM module. It runs the three
// commands a controller sends to a module and serves the module's MEM port.
//
//   LOAD : fetches cnt_m weights from MRAM (from addr_m) and then cnt_s weights
//          from SRAM (from addr_s) into the weight buffer, then cnt_m+cnt_s
//          inputs from SRAM (from addr_in) into the input buffer. MRAM and SRAM
//          answer after different latencies; every fetch waits for its bank's
//          ack, so the mix of operand counts may be anything up to VLEN.
//   EXEC : optionally clears the PE accumulator, then feeds the PE one
//          weight/input pair at a time and waits for each MAC.
//   STORE: writes the 32-bit accumulator to SRAM at addr_out..addr_out+3,
//          least significant byte first.
// done pulses for one cycle when a command ends. Accesses are strictly one
// at a time, as the paper states that weights in MRAM and SRAM of one module
// are not processed in parallel.
//
// The MEM port (byte reads/writes from the controller's MEM Interface Logic,
// used for data placement and host access) is routed to the bank selected by
// req.sram while no command runs. A command that arrives while a MEM access is
// in flight waits for that access to end; MEM requests that arrive while a
// command is pending or running are held off (no ack) until it is done.
//
// Follows the paper: variable MRAM/SRAM operand counts, LOAD/EXECUTE/STORE
// phases, serial access. Own choices: buffer depth, byte order, command and
// port encodings.
module pim_module_if
  import hhpim_pkg::*;
#(
  parameter int unsigned VLEN = VLEN_DEF
) (
  input  logic            clk,
  input  logic            rst_n,
  // command from the CMD Interface Logic
  input  pim_cmd_t        cmd,
  output logic            done,
  output logic            busy,
  // MEM port from the MEM Interface Logic
  input  mem_req_t        preq,
  output mem_rsp_t        prsp,
  // banks
  output mem_req_t        mreq,
  input  mem_rsp_t        mrsp,
  output mem_req_t        sreq,
  input  mem_rsp_t        srsp,
  // PE
  output logic            pe_start,
  output logic            pe_clr,
  output logic [DATA_W-1:0] pe_a,
  output logic [DATA_W-1:0] pe_b,
  input  logic            pe_done,
  input  logic [ACC_W-1:0] pe_acc
);
  localparam int unsigned IW = $clog2(VLEN) + 1;

  typedef enum logic [2:0] {M_IDLE, M_LOADW, M_LOADX, M_EXEC_CLR, M_EXEC, M_STORE, M_DONE} mstate_e;

  mstate_e           st;
  pim_cmd_t          cq;          // command being run (or pending)
  logic              pend;        // command waiting for a MEM access to end
  logic              port_act;    // MEM port access in flight
  logic [IW-1:0]     idx;
  logic              issued;      // current bank request / PE MAC issued
  logic [DATA_W-1:0] wbuf [VLEN];
  logic [DATA_W-1:0] xbuf [VLEN];
  logic [IW-1:0]     total;

  assign total = IW'(cq.cnt_m) + IW'(cq.cnt_s);
  assign busy  = (st != M_IDLE) || pend;

  // Port is routed to the banks while idle, unless a command is pending and
  // the current port access has not started yet.
  logic port_route;
  assign port_route = (st == M_IDLE) && (!pend || port_act);

  // bank requests
  always_comb begin
    mreq = '0;
    sreq = '0;
    prsp = '0;
    if (port_route) begin
      if (preq.sram) begin
        sreq = preq;
        prsp = srsp;
      end else begin
        mreq = preq;
        prsp = mrsp;
      end
    end else begin
      unique case (st)
        M_LOADW: begin
          if (idx < IW'(cq.cnt_m)) begin
            mreq.valid = 1'b1;
            mreq.addr  = cq.addr_m + ADDR_W'(idx);
          end else begin
            sreq.valid = 1'b1;
            sreq.addr  = cq.addr_s + ADDR_W'(idx - IW'(cq.cnt_m));
          end
        end
        M_LOADX: begin
          sreq.valid = 1'b1;
          sreq.addr  = cq.addr_in + ADDR_W'(idx);
        end
        M_STORE: begin
          sreq.valid = 1'b1;
          sreq.we    = 1'b1;
          sreq.addr  = cq.addr_out + ADDR_W'(idx);
          sreq.wdata = pe_acc[8*idx[1:0] +: 8];
        end
        default: ;
      endcase
    end
  end

  wire bank_ack = mrsp.ack || srsp.ack;
  wire [DATA_W-1:0] bank_rdata = mrsp.ack ? mrsp.rdata : srsp.rdata;
  wire [IW-2:0] bidx = idx[IW-2:0];

  assign pe_start = (st == M_EXEC) && !issued;
  assign pe_clr   = (st == M_EXEC_CLR);
  assign pe_a     = wbuf[bidx];
  assign pe_b     = xbuf[bidx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= M_IDLE;
      cq       <= '0;
      pend     <= 1'b0;
      port_act <= 1'b0;
      idx      <= '0;
      issued   <= 1'b0;
      done     <= 1'b0;
      for (int i = 0; i < int'(VLEN); i++) begin
        wbuf[i] <= '0;
        xbuf[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      // track a MEM port access that has been routed to a bank
      if (port_route && prsp.ack)        port_act <= 1'b0;
      else if (port_route && preq.valid) port_act <= 1'b1;
      if (cmd.valid) begin
        cq   <= cmd;
        pend <= 1'b1;
      end
      unique case (st)
        M_IDLE: begin
          if (pend && !port_act) begin
            pend <= 1'b0;
            idx  <= '0;
            unique case (cq.op)
              PCMD_LOAD:  st <= (total == 0) ? M_DONE : M_LOADW;
              PCMD_EXEC:  st <= cq.acc_clr ? M_EXEC_CLR : ((total == 0) ? M_DONE : M_EXEC);
              PCMD_STORE: st <= M_STORE;
              default:    st <= M_DONE;
            endcase
          end
        end
        M_LOADW: if (bank_ack) begin
          wbuf[bidx] <= bank_rdata;
          if (idx + 1 == total) begin
            idx <= '0;
            st  <= M_LOADX;
          end else idx <= idx + 1'b1;
        end
        M_LOADX: if (bank_ack) begin
          xbuf[bidx] <= bank_rdata;
          if (idx + 1 == total) st <= M_DONE;
          else idx <= idx + 1'b1;
        end
        M_EXEC_CLR: st <= (total == 0) ? M_DONE : M_EXEC;
        M_EXEC: begin
          if (!issued) issued <= 1'b1;
          else if (pe_done) begin
            issued <= 1'b0;
            if (idx + 1 == total) st <= M_DONE;
            else idx <= idx + 1'b1;
          end
        end
        M_STORE: if (bank_ack) begin
          if (idx == IW'(3)) st <= M_DONE;
          else idx <= idx + 1'b1;
        end
        M_DONE: begin
          done <= 1'b1;
          st   <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  // A new command must not arrive before the previous one has finished.
  a_no_cmd_overlap: assert property (@(posedge clk) disable iff (!rst_n) cmd.valid |-> !busy)
    else $error("pim_module_if: command while busy");
  a_cnt_fits: assert property (@(posedge clk) disable iff (!rst_n)
    cmd.valid |-> (int'(cmd.cnt_m) + int'(cmd.cnt_s) <= int'(VLEN)))
    else $error("pim_module_if: operand count exceeds VLEN");
  // MEM port: request held stable until ack
  a_port_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (preq.valid && !prsp.ack) |=> preq.valid)
    else $error("pim_module_if: MEM request dropped before ack");
endmodule
