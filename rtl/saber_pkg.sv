// saber_pkg: types and constants shared by the Saber co-processor.
// Memory requests are a packed struct so that every functional unit can
// drive the two ports of the 1K x 64-bit data SRAM in the same way.  The
// 4-bit opcodes are those of the instruction format (0111 for the
// vector-vector multiplication is this design's own pick of a free code).
package saber_pkg;

  localparam int unsigned AW      = 10;  // SRAM address width (1K words)
  localparam int unsigned DW      = 64;  // SRAM data width
  localparam int unsigned INSTR_W = 24;  // instruction width
  localparam int unsigned EQ      = 13;  // log2 q
  localparam int unsigned EP      = 10;  // log2 p
  localparam int unsigned ET      = 4;   // log2 T
  localparam int unsigned H1      = 4;   // 2^(EQ-EP-1), rounding constant
  localparam int unsigned SCAN_LEN = 207;

  typedef struct packed {
    logic          en;     // access this cycle
    logic          we;     // 1 = write, 0 = read
    logic [AW-1:0] addr;
    logic [DW-1:0] wdata;
  } mem_req_t;

  localparam mem_req_t MEM_IDLE = '{en: 1'b0, we: 1'b0, addr: '0, wdata: '0};

  typedef enum logic [3:0] {
    OP_MEM_WR   = 4'b0000,
    OP_MEM_RD   = 4'b0001,
    OP_SHA      = 4'b0010,
    OP_SAMPLER  = 4'b0011,
    OP_ADDPACK  = 4'b0100,
    OP_ADDROUND = 4'b0101,
    OP_UNPACK   = 4'b0110,
    OP_VVMUL    = 4'b0111,
    OP_VVMUL_P  = 4'b1000,
    OP_VERIFY   = 4'b1001,
    OP_COPY     = 4'b1010,
    OP_CMOV     = 4'b1011,
    OP_SHAKE_EXT = 4'b1100
  } opcode_e;

  typedef struct packed {
    logic [AW-1:0] off2;   // [23:14]
    logic [AW-1:0] off1;   // [13:4]
    logic [3:0]    op;     // [3:0]
  } instr_t;

  // Owners of the SRAM bus.  Index 0 is the controller itself.
  typedef enum logic [3:0] {
    U_CTRL = 4'd0, U_SHA = 4'd1, U_SMP = 4'd2, U_APK = 4'd3, U_ARD = 4'd4,
    U_UNP  = 4'd5, U_VER = 4'd6, U_CPY = 4'd7, U_CMV = 4'd8, U_VVM = 4'd9
  } unit_e;
  localparam int unsigned NUNIT = 10;

  // States of the vector-multiplier control FSM.
  typedef enum logic [2:0] {
    VV_IDLE, VV_LOAD_A, VV_LOAD_B, VV_EVAL_MUL, VV_INTERP
  } vv_state_e;

endpackage
