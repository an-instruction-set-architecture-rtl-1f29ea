// pia_pkg: types and constants shared by the IMPLY processing-in-array core.
//
// Holds the geometry of one crossbar array (512 data rows of 16 words of 32
// bits, plus 8 work memristors per row), the 32-bit address configuration
// that every address-bank slot holds, the crossbar operation codes, the
// micro-operation format of the u-OP cache, and the instruction encodings.
//
// Encodings of the RV32I instructions keep their standard opcode/funct3/
// funct7 values, as the ISA adaptation keeps those fields. The opcodes of
// the architecture-specific instructions (li, mv, la, lai, laui, lio, sio,
// nxt_array) are not fixed by the ISA description; this design places them
// in the RISC-V custom opcode space (custom-0/1/2).
package pia_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned XLEN      = 32;
  localparam int unsigned ROWS      = 512;
  localparam int unsigned DATA_COLS = 512;
  localparam int unsigned WORK_COLS = 8;
  localparam int unsigned COLS      = DATA_COLS + WORK_COLS;   // 520
  localparam int unsigned COL_W     = 10;                      // column number width
  localparam int unsigned SHAMT_W   = 5;                       // log2(XLEN)

  // ---------------------------------------------------- address configuration
  // Bit 31 is the MSB of Column A: [31:28] col A, [27:24] col B,
  // [23:15] start row, [14:6] num rows, [5:0] stride.
  typedef struct packed {
    logic [3:0] col_a;
    logic [3:0] col_b;
    logic [8:0] start_row;
    logic [8:0] num_rows;
    logic [5:0] stride;
  } addr_cfg_t;

  // ------------------------------------------------------- crossbar operation
  typedef enum logic [1:0] {
    XB_NOP   = 2'd0,
    XB_RESET = 2'd1,   // V_RESET on the masked columns: bit <= 0
    XB_SET   = 2'd2,   // V_SET on the masked columns: bit <= 1
    XB_IMPLY = 2'd3    // V_COND on cond column p, V_SET on target q: q <= p -> q
  } xb_op_e;

  // ---------------------------------------------------------- micro-operations
  // Operand roles used by the algorithm tables; the control logic binds each
  // role to a physical column for every bit iteration.
  typedef enum logic [3:0] {
    R_NONE = 4'd0,
    R_A    = 4'd1,   // bit of operand A
    R_B    = 4'd2,   // bit of operand B (usually overwritten with the result)
    R_C    = 4'd3,   // carry / borrow memristor
    R_S    = 4'd4,   // multiplexer select (shift distance bit d_j)
    R_X    = 4'd5,   // second multiplexer input / extra source bit
    R_W1   = 4'd6,
    R_W2   = 4'd7,
    R_W3   = 4'd8
  } role_e;

  localparam int unsigned N_ROLES = 9;

  typedef enum logic [1:0] {
    U_NOP   = 2'd0,
    U_FALSE = 2'd1,  // reset q, q2, q3
    U_IMPLY = 2'd2   // q <= p -> q
  } uop_kind_e;

  typedef struct packed {
    uop_kind_e kind;
    role_e     p;
    role_e     q;
    role_e     q2;
    role_e     q3;
    logic      last;
  } uop_t;

  // Per-bit algorithms held in the u-OP cache.
  typedef enum logic [3:0] {
    K_AND  = 4'd0,   // 5 steps
    K_OR   = 4'd1,   // 3 steps
    K_XOR  = 4'd2,   // 9 steps
    K_COPY = 4'd3,   // 3 steps
    K_FA   = 4'd4,   // 20 steps, full adder
    K_FS   = 4'd5,   // 20 steps, full subtractor
    K_MUX  = 4'd6,   // 8 steps, a = mux_s(x, a)
    K_AUX  = 4'd7,   // 6 steps, a = ~s & a
    K_CMP  = 4'd8,   // 13 steps, single-bit comparator
    K_IMP  = 4'd9    // 1 step, b = x -> b
  } kernel_e;

  // ------------------------------------------------------------- opcodes
  localparam logic [6:0] OPC_OP      = 7'b0110011;
  localparam logic [6:0] OPC_OPIMM   = 7'b0010011;
  localparam logic [6:0] OPC_LUI     = 7'b0110111;
  localparam logic [6:0] OPC_AUIPC   = 7'b0010111;
  localparam logic [6:0] OPC_JAL     = 7'b1101111;
  localparam logic [6:0] OPC_JALR    = 7'b1100111;
  localparam logic [6:0] OPC_BRANCH  = 7'b1100011;
  localparam logic [6:0] OPC_SYSTEM  = 7'b1110011;
  localparam logic [6:0] OPC_CUST0   = 7'b0001011;  // li, mv, la, lai (I-type)
  localparam logic [6:0] OPC_LAUI    = 7'b0101011;  // laui (U-type, custom-1)
  localparam logic [6:0] OPC_CUST2   = 7'b1011011;  // lio, sio, nxt_array (R-type)

  localparam logic [2:0] F3_LI  = 3'd0;
  localparam logic [2:0] F3_MV  = 3'd1;
  localparam logic [2:0] F3_LA  = 3'd2;
  localparam logic [2:0] F3_LAI = 3'd3;

  localparam logic [2:0] F3_LIO = 3'd0;
  localparam logic [2:0] F3_SIO = 3'd1;
  localparam logic [2:0] F3_NXT = 3'd2;

  localparam logic [31:0] INSN_WFI    = 32'h1050_0073;
  localparam logic [31:0] INSN_MRET   = 32'h3020_0073;
  localparam logic [31:0] INSN_EBREAK = 32'h0010_0073;

  // CSR bank entry numbers
  localparam logic [4:0] CSR_MSTATUS = 5'd0;
  localparam logic [4:0] CSR_MTVEC   = 5'd1;
  localparam logic [4:0] CSR_MEPC    = 5'd2;
  localparam logic [4:0] CSR_MCAUSE  = 5'd3;

  localparam logic [31:0] MCAUSE_EXT_IRQ = 32'h8000_000B;
  localparam logic [31:0] MCAUSE_ILLEGAL = 32'h0000_0002;
  localparam logic [31:0] MCAUSE_BREAK   = 32'h0000_0003;

  // Physical column of bit i of data word w.
  function automatic logic [COL_W-1:0] data_col(input logic [3:0] w, input logic [4:0] i);
    return COL_W'({w, i});
  endfunction

  // Physical column of work memristor k (0..7).
  function automatic logic [COL_W-1:0] work_col(input logic [2:0] k);
    return COL_W'(DATA_COLS + k);
  endfunction

endpackage
