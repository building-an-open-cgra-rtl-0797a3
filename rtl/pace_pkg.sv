// pace_pkg: types and constants shared by the PACE CGRA and SoC RTL.
//
// PACE is an 8x8 array of processing elements (PEs) with a 16-bit datapath,
// built from four 4x4 clusters, with eight 8KB dual-port data memory banks on
// its left and right edges and a controller that the host CPU programs over
// an AXI4-Lite port. Each PE reads one 64-bit instruction per cycle from its
// own 32-entry configuration memory; the instruction carries a 5-bit opcode
// and a 21-bit router configuration. These widths and sizes follow the paper.
// The placement of the remaining instruction fields, the opcode numbering
// (apart from NOP = 5'h00), the crossbar source codes and the address map are
// this design's own choices.
//
// Instruction word (64 bits):
//   [4:0]   opcode
//   [25:5]  router configuration: seven 3-bit crossbar selects, in the order
//           out N, out E, out S, out W, ALU operand A, operand B, predicate
//   [29:26] input register write enables (N,E,S,W)
//   [33:30] input register select: 1 = crossbar sees the register, 0 = bypass
//   [49:34] 16-bit constant
//   [54:50] NOP count (cycles of idleness, used when opcode is NOP)
//   [57:55] ALU input register write enables (A, B, predicate)
//   [60:58] ALU input register select: 1 = ALU sees the register
//   [63:61] reserved, zero
package pace_pkg;

  localparam int unsigned DW        = 16;  // datapath width
  localparam int unsigned OPC_W     = 5;   // opcode width
  localparam int unsigned XBAR_W    = 21;  // router configuration width
  localparam int unsigned INSTR_W   = 64;  // instruction width
  localparam int unsigned CM_DEPTH  = 32;  // instructions per PE
  localparam int unsigned SLOT_W    = $clog2(CM_DEPTH);
  localparam int unsigned NOPCNT_W  = 5;
  localparam int unsigned DM_WORDS  = 4096; // 8KB of 16-bit words
  localparam int unsigned DM_AW     = $clog2(DM_WORDS);
  localparam int unsigned ROWS      = 8;
  localparam int unsigned COLS      = 8;
  localparam int unsigned NDIR      = 4;

  // Directions, also the index of a PE's links.
  typedef enum logic [1:0] {DIR_N = 2'd0, DIR_E = 2'd1, DIR_S = 2'd2, DIR_W = 2'd3} dir_e;

  // A flit on a link: 16-bit data plus the predicate flag that every operand
  // carries. p = 0 marks a value that is absent or predicated off.
  typedef struct packed {
    logic          p;
    logic [DW-1:0] d;
  } flit_t;

  localparam flit_t FLIT_NONE = '{p: 1'b0, d: '0};

  // Crossbar source codes (3 bits each).
  typedef enum logic [2:0] {
    SRC_N    = 3'd0,
    SRC_E    = 3'd1,
    SRC_S    = 3'd2,
    SRC_W    = 3'd3,
    SRC_ALU  = 3'd4,   // this PE's registered ALU result
    SRC_CONST= 3'd5,   // the instruction's constant, predicate set
    SRC_RSVD = 3'd6,   // unused, behaves as SRC_NONE
    SRC_NONE = 3'd7    // nothing: p = 0 (for the predicate input: unconditional)
  } src_e;

  // Crossbar outputs, in the order their selects sit in the instruction.
  localparam int unsigned XO_N = 0, XO_E = 1, XO_S = 2, XO_W = 3,
                          XO_A = 4, XO_B = 5, XO_P = 6, N_XOUT = 7;

  typedef enum logic [OPC_W-1:0] {
    OP_NOP   = 5'h00,
    OP_ADD   = 5'h01,
    OP_SUB   = 5'h02,
    OP_MUL   = 5'h03,
    OP_AND   = 5'h04,
    OP_OR    = 5'h05,
    OP_XOR   = 5'h06,
    OP_SHL   = 5'h07,
    OP_SRL   = 5'h08,
    OP_SRA   = 5'h09,
    OP_CMPEQ = 5'h0A,
    OP_CMPNE = 5'h0B,
    OP_CMPLT = 5'h0C,  // signed
    OP_CMPGT = 5'h0D,  // signed
    OP_SEL   = 5'h0E,  // SELECT: whichever operand has its predicate set
    OP_MOV   = 5'h0F,  // pass operand A
    OP_LOAD  = 5'h10,  // memory PEs only: address = A
    OP_STORE = 5'h11   // memory PEs only: address = A, data = B
  } opcode_e;

  // Decoded instruction.
  typedef struct packed {
    logic [2:0]          alu_sel;
    logic [2:0]          alu_we;
    logic [NOPCNT_W-1:0] nop_cnt;
    logic [DW-1:0]       konst;
    logic [NDIR-1:0]     reg_sel;
    logic [NDIR-1:0]     reg_we;
    logic [N_XOUT-1:0][2:0] xbar;
    opcode_e             opc;
  } instr_t;

  // Memory request from a PE (or the host) to one port of a data memory bank.
  typedef struct packed {
    logic             en;
    logic             we;
    logic [DM_AW-1:0] addr;
    logic [DW-1:0]    wdata;
  } mem_req_t;

  localparam mem_req_t MEM_REQ_IDLE = '{en: 1'b0, we: 1'b0, addr: '0, wdata: '0};

  // AXI4-Lite, 32-bit address and data, split into the master's and the
  // slave's halves.
  typedef struct packed {
    logic        aw_valid;
    logic [31:0] aw_addr;
    logic        w_valid;
    logic [31:0] w_data;
    logic [3:0]  w_strb;
    logic        b_ready;
    logic        ar_valid;
    logic [31:0] ar_addr;
    logic        r_ready;
  } axil_req_t;

  typedef struct packed {
    logic        aw_ready;
    logic        w_ready;
    logic        b_valid;
    logic [1:0]  b_resp;
    logic        ar_ready;
    logic        r_valid;
    logic [31:0] r_data;
    logic [1:0]  r_resp;
  } axil_rsp_t;

  localparam axil_req_t AXIL_REQ_IDLE = '0;
  localparam axil_rsp_t AXIL_RSP_IDLE = '0;
  localparam logic [1:0] RESP_OKAY = 2'b00, RESP_SLVERR = 2'b10, RESP_DECERR = 2'b11;

  // CGRA address map (offsets inside the CGRA's AXI window).
  localparam logic [31:0] CGRA_REG_CTRL     = 32'h0000_0000; // [0] start (write 1), [1] irq enable
  localparam logic [31:0] CGRA_REG_STATUS   = 32'h0000_0004; // [0] busy, [1] done (write 1 clears)
  localparam logic [31:0] CGRA_REG_II       = 32'h0000_0008; // slots per iteration, 1..32
  localparam logic [31:0] CGRA_REG_CYCLES   = 32'h0000_000C; // cycles to execute
  localparam logic [31:0] CGRA_REG_CLKEN_LO = 32'h0000_0010; // static clock enable, PEs 0..31
  localparam logic [31:0] CGRA_REG_CLKEN_HI = 32'h0000_0014; // static clock enable, PEs 32..63
  localparam logic [31:0] CGRA_REG_CYCCNT   = 32'h0000_0018; // cycles executed (read only)
  localparam logic [31:0] CGRA_CM_BASE      = 32'h0001_0000; // + pe*256 + slot*8 + half*4
  localparam logic [31:0] CGRA_DM_BASE      = 32'h0004_0000; // + bank*0x4000 + word*4

  // Instruction builder, used by testbenches and bring-up code.
  function automatic logic [INSTR_W-1:0] mk_instr(
      opcode_e opc,
      logic [2:0] xn, logic [2:0] xe, logic [2:0] xs, logic [2:0] xw,
      logic [2:0] xa, logic [2:0] xb, logic [2:0] xp,
      logic [NDIR-1:0] reg_we = '0, logic [NDIR-1:0] reg_sel = '0,
      logic [DW-1:0] konst = '0, logic [NOPCNT_W-1:0] nop_cnt = '0,
      logic [2:0] alu_we = '0, logic [2:0] alu_sel = '0);
    logic [INSTR_W-1:0] w;
    w = '0;
    w[4:0]   = opc;
    w[7:5]   = xn;
    w[10:8]  = xe;
    w[13:11] = xs;
    w[16:14] = xw;
    w[19:17] = xa;
    w[22:20] = xb;
    w[25:23] = xp;
    w[29:26] = reg_we;
    w[33:30] = reg_sel;
    w[49:34] = konst;
    w[54:50] = nop_cnt;
    w[57:55] = alu_we;
    w[60:58] = alu_sel;
    return w;
  endfunction

endpackage
