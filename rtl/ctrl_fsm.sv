// ctrl_fsm: the controller's State Machine (State Control Logic plus State
// Register). It steps through the PIM instruction cycle
//   IDLE -> FETCH -> DECODE -> LOAD -> EXECUTE -> [STORE] -> IDLE
// for compute instructions, and IDLE -> FETCH -> DECODE -> ALLOC -> IDLE for
// data-placement and host-access instructions, which the Data Allocator runs.
// An illegal instruction goes from DECODE back to IDLE and is counted.
//
// In LOAD, EXECUTE and STORE the FSM raises cmd_issue for exactly one cycle on
// entry (the Command Encoder's enable) and waits for cmd_done from the CMD
// Interface Logic, i.e. until every selected module has finished. In ALLOC it
// pulses alloc_start once and waits for alloc_done. instr_ready is high in
// IDLE; an instruction offered there is latched at the edge that enters
// FETCH (fetch_en).
// The FETCH-DECODE-LOAD-EXECUTE-STORE sequence is the paper's; STORE being
// optional (op[1]) and the ALLOC state are this design's own.
module ctrl_fsm
  import hhpim_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        instr_valid,
  output logic        instr_ready,
  output logic        fetch_en,
  input  category_e   category,
  input  logic        illegal,
  input  logic        store_en,
  output ctrl_state_e state,
  output logic        cmd_issue,
  input  logic        cmd_done,
  output logic        alloc_start,
  input  logic        alloc_done,
  output logic        busy,
  output logic [15:0] illegal_cnt
);
  ctrl_state_e st_q, st_d;
  logic        issued_q;

  assign state       = st_q;
  assign instr_ready = (st_q == S_IDLE);
  assign fetch_en    = instr_ready && instr_valid;
  assign busy        = (st_q != S_IDLE);
  assign cmd_issue   = (st_q inside {S_LOAD, S_EXEC, S_STORE}) && !issued_q;
  assign alloc_start = (st_q == S_ALLOC) && !issued_q;

  always_comb begin
    st_d = st_q;
    unique case (st_q)
      S_IDLE:   if (instr_valid) st_d = S_FETCH;
      S_FETCH:  st_d = S_DECODE;
      S_DECODE: begin
        if (illegal)                    st_d = S_IDLE;
        else if (category == CAT_COMPUTE) st_d = S_LOAD;
        else                            st_d = S_ALLOC;
      end
      S_LOAD:   if (cmd_done) st_d = S_EXEC;
      S_EXEC:   if (cmd_done) st_d = store_en ? S_STORE : S_IDLE;
      S_STORE:  if (cmd_done) st_d = S_IDLE;
      S_ALLOC:  if (alloc_done) st_d = S_IDLE;
      default:  st_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q        <= S_IDLE;
      issued_q    <= 1'b0;
      illegal_cnt <= '0;
    end else begin
      st_q <= st_d;
      if (st_d != st_q) issued_q <= 1'b0;
      else if (cmd_issue || alloc_start) issued_q <= 1'b1;
      if (st_q == S_DECODE && illegal) illegal_cnt <= illegal_cnt + 16'd1;
    end
  end

  a_done_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_done |-> (st_q inside {S_LOAD, S_EXEC, S_STORE}))
    else $error("ctrl_fsm: cmd_done outside a command phase");
endmodule
