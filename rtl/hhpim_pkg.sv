// hhpim_pkg: types and constants shared by the HH-PIM blocks.
//
// HH-PIM pairs a cluster of high-performance (HP) PIM modules with a cluster of
// low-power (LP) PIM modules; every module holds an STT-MRAM bank, an SRAM bank
// and a processing element (PE). This package defines the 128-bit PIM
// instruction, the command a controller sends to a module, the byte-wide memory
// request/response pair used on every MEM port, and the default latencies.
//
// Follows the paper: 4 modules per cluster, 64 kB MRAM + 64 kB SRAM per module,
// INT8 data, and the relative latencies of the memories and PEs (given in ns;
// converted here at one cycle per 0.25 ns, rounded up). Own choices: the
// instruction layout, the command and memory-port encodings, the 32-bit
// accumulator and the 16-entry operand buffer.
package hhpim_pkg;

  localparam int unsigned N_MODULES_DEF = 4;      // modules per cluster
  localparam int unsigned MAX_MODULES   = 8;      // width of the module-select field
  localparam int unsigned MEM_BYTES_DEF = 65536;  // 64 kB per bank
  localparam int unsigned ADDR_W        = 16;
  localparam int unsigned DATA_W        = 8;      // INT8 weights and activations
  localparam int unsigned ACC_W         = 32;
  localparam int unsigned CNT_W         = 8;
  localparam int unsigned VLEN_DEF      = 16;     // operands per LOAD/EXEC

  // Latencies in cycles (ns x 4, rounded up).
  localparam int unsigned HP_MRAM_RD = 11;  // 2.62 ns
  localparam int unsigned HP_MRAM_WR = 48;  // 11.81 ns
  localparam int unsigned HP_SRAM_RD = 5;   // 1.12 ns
  localparam int unsigned HP_SRAM_WR = 5;   // 1.12 ns
  localparam int unsigned HP_PE_LAT  = 23;  // 5.52 ns
  localparam int unsigned LP_MRAM_RD = 12;  // 2.96 ns
  localparam int unsigned LP_MRAM_WR = 59;  // 14.65 ns
  localparam int unsigned LP_SRAM_RD = 6;   // 1.41 ns
  localparam int unsigned LP_SRAM_WR = 6;   // 1.41 ns
  localparam int unsigned LP_PE_LAT  = 43;  // 10.68 ns

  typedef enum logic [1:0] {
    CAT_COMPUTE = 2'd0,   // MAC over operands in one or more modules
    CAT_MOVE    = 2'd1,   // data placement between banks / clusters
    CAT_HOST    = 2'd2,   // host write/read of a module bank
    CAT_SYNC    = 2'd3    // barrier: wait until both clusters are idle
  } category_e;

  // op bits by category
  //   COMPUTE: op[0] clear accumulator before the MACs, op[1] store result
  //   MOVE   : op[0] source is SRAM, op[1] destination is SRAM, op[2] destination is the other cluster
  //   HOST   : op[0] read (1) / write (0), op[1] bank is SRAM
  typedef struct packed {
    category_e        cat;      // [127:126]
    logic [2:0]       op;       // [125:123]
    logic             cluster;  // [122]     0 = HP, 1 = LP
    logic [MAX_MODULES-1:0] mod_sel; // [121:114]
    logic [CNT_W-1:0] cnt_m;    // [113:106] weights from MRAM  | MOVE: length[15:8]
    logic [CNT_W-1:0] cnt_s;    // [105:98]  weights from SRAM  | MOVE: length[7:0]
    logic [ADDR_W-1:0] addr_a;  // [97:82]   MRAM weight addr   | MOVE: src | HOST: addr
    logic [ADDR_W-1:0] addr_b;  // [81:66]   SRAM weight addr   | MOVE: dst
    logic [ADDR_W-1:0] addr_c;  // [65:50]   input vector addr (SRAM)
    logic [ADDR_W-1:0] addr_d;  // [49:34]   result addr (SRAM)
    logic [33:0]      imm;      // [33:0]    HOST write data [31:0] | MOVE: module offset [2:0]
  } pim_instr_t;

  // Instruction field handed from the decoder to the rest of the controller.
  typedef struct packed {
    logic [2:0]        op;
    logic [CNT_W-1:0]  cnt_m;
    logic [CNT_W-1:0]  cnt_s;
    logic [ADDR_W-1:0] addr_a;
    logic [ADDR_W-1:0] addr_b;
    logic [ADDR_W-1:0] addr_c;
    logic [ADDR_W-1:0] addr_d;
    logic [33:0]       imm;
  } instr_field_t;

  typedef enum logic [1:0] {
    PCMD_NOP   = 2'd0,
    PCMD_LOAD  = 2'd1,
    PCMD_EXEC  = 2'd2,
    PCMD_STORE = 2'd3
  } pim_op_e;

  typedef struct packed {
    logic              valid;    // one-cycle pulse
    pim_op_e           op;
    logic              acc_clr;
    logic [CNT_W-1:0]  cnt_m;
    logic [CNT_W-1:0]  cnt_s;
    logic [ADDR_W-1:0] addr_m;
    logic [ADDR_W-1:0] addr_s;
    logic [ADDR_W-1:0] addr_in;
    logic [ADDR_W-1:0] addr_out;
  } pim_cmd_t;

  // Byte-wide memory port. valid is held with stable fields until ack (one-cycle pulse).
  typedef struct packed {
    logic              valid;
    logic              we;
    logic              sram;     // at module level: 1 = SRAM bank, 0 = MRAM bank
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic              ack;
    logic [DATA_W-1:0] rdata;
  } mem_rsp_t;

  typedef enum logic [2:0] {
    S_IDLE   = 3'd0,
    S_FETCH  = 3'd1,
    S_DECODE = 3'd2,
    S_LOAD   = 3'd3,
    S_EXEC   = 3'd4,
    S_STORE  = 3'd5,
    S_ALLOC  = 3'd6
  } ctrl_state_e;

endpackage
