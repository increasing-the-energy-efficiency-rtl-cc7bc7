// coprosit_pkg: types and constants shared by the Coprosit posit coprocessor.
//
// It holds three things:
//  * the CV-X-IF channel structs (issue, commit, memory request/response,
//    memory result, result). Only the fields a posit16 coprocessor on an RV32
//    host needs are kept; names follow the published CV-X-IF.
//  * the instruction encoding of the posit instructions. The encoding mirrors
//    the RISC-V F extension (same funct5 values) but sits on the custom
//    opcodes: loads on custom-0, stores on custom-1, register operations on
//    custom-2. This encoding is a choice of this design.
//  * the operator enums and the decoded-instruction struct passed from the
//    decoder to the controller and execution stage.
package coprosit_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned XLEN       = 32;  // host integer register width (RV32)
  localparam int unsigned X_ID_WIDTH = 4;   // instruction id width on the CV-X-IF
  localparam int unsigned NUM_PREGS  = 32;  // posit registers

  typedef logic [X_ID_WIDTH-1:0] x_id_t;

  // ---------------------------------------------------------------- CV-X-IF
  typedef struct packed {
    logic [31:0]          instr;     // offloaded instruction
    x_id_t                id;        // instruction id
    logic [XLEN-1:0]      rs0;       // value of x[rs1]
    logic [XLEN-1:0]      rs1;       // value of x[rs2]
    logic [1:0]           rs_valid;  // rs0/rs1 hold valid values
  } x_issue_req_t;

  typedef struct packed {
    logic accept;     // the coprocessor takes the instruction
    logic writeback;  // it will write an integer register
    logic loadstore;  // it will use the memory interface
  } x_issue_resp_t;

  typedef struct packed {
    x_id_t id;
    logic  commit_kill;  // 1: drop the instruction, 0: it may execute
  } x_commit_t;

  typedef struct packed {
    x_id_t           id;
    logic [31:0]     addr;
    logic            we;
    logic [1:0]      size;   // 0 byte, 1 half, 2 word
    logic [XLEN-1:0] wdata;
  } x_mem_req_t;

  typedef struct packed {
    logic       exc;       // the request raised an exception
    logic [5:0] exccode;
  } x_mem_resp_t;

  typedef struct packed {
    x_id_t           id;
    logic [XLEN-1:0] rdata;
    logic            err;
  } x_mem_result_t;

  typedef struct packed {
    x_id_t           id;
    logic [XLEN-1:0] data;
    logic [4:0]      rd;
    logic            we;       // write data to x[rd]
    logic            exc;
    logic [5:0]      exccode;
  } x_result_t;

  // ---------------------------------------------------------------- encoding
  localparam logic [6:0] OPC_PLOAD  = 7'b0001011;  // custom-0, I-type
  localparam logic [6:0] OPC_PSTORE = 7'b0101011;  // custom-1, S-type
  localparam logic [6:0] OPC_POP    = 7'b1011011;  // custom-2, R-type
  localparam logic [2:0] F3_HALF    = 3'b001;      // width field of PLH/PSH

  localparam logic [4:0] F5_ADD  = 5'b00000;
  localparam logic [4:0] F5_SUB  = 5'b00001;
  localparam logic [4:0] F5_MUL  = 5'b00010;
  localparam logic [4:0] F5_DIV  = 5'b00011;
  localparam logic [4:0] F5_SGNJ = 5'b00100;  // funct3 0 J, 1 JN, 2 JX
  localparam logic [4:0] F5_MINMAX = 5'b00101;  // funct3 0 MIN, 1 MAX
  localparam logic [4:0] F5_SQRT = 5'b01011;
  localparam logic [4:0] F5_CMP  = 5'b10100;  // funct3 2 EQ, 1 LT, 0 LE
  localparam logic [4:0] F5_P2I  = 5'b11000;  // rs2 0: to signed, 1: to unsigned
  localparam logic [4:0] F5_I2P  = 5'b11010;  // rs2 0: from signed, 1: from unsigned
  localparam logic [4:0] F5_MVXP = 5'b11100;  // posit register to x register
  localparam logic [4:0] F5_MVPX = 5'b11110;  // x register to posit register

  // ---------------------------------------------------------------- operators
  // Operators of the PRAU.
  // The 64-bit conversions (P2L, P2LU, L2P, LU2P) belong to the PRAU; an
  // RV32 host has no instructions for them, so the decoder never selects them.
  typedef enum logic [4:0] {
    PRAU_ADD, PRAU_SUB, PRAU_MUL, PRAU_DIV, PRAU_SQRT,
    PRAU_P2I, PRAU_P2U, PRAU_I2P, PRAU_U2P,
    PRAU_P2L, PRAU_P2LU, PRAU_L2P, PRAU_LU2P,
    PRAU_SGNJ, PRAU_SGNJN, PRAU_SGNJX, PRAU_MVXP, PRAU_MVPX
  } prau_op_e;

  // Operators of the comparison ALU.
  typedef enum logic [2:0] {
    ALU_EQ, ALU_LT, ALU_LE, ALU_MIN, ALU_MAX
  } alu_op_e;

  typedef enum logic [1:0] {
    UNIT_PRAU, UNIT_ALU, UNIT_MEM
  } unit_e;

  // Decoded instruction.
  typedef struct packed {
    logic        valid;       // a posit instruction this coprocessor executes
    unit_e       unit;
    prau_op_e    prau_op;
    alu_op_e     alu_op;
    logic        is_store;    // memory: 1 store, 0 load
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic        use_prs1;    // reads posit register rs1
    logic        use_prs2;    // reads posit register rs2
    logic        use_xrs1;    // needs the integer value of x[rs1]
    logic        rd_is_x;     // writes integer register rd (else posit rd)
    logic [11:0] imm;         // load/store offset
  } decoded_t;

  // Entry of the input buffer.
  typedef struct packed {
    logic [31:0]     instr;
    x_id_t           id;
    logic [XLEN-1:0] xrs1;
  } ibuf_entry_t;

  // Entry of the memory stream FIFO: one outstanding memory request.
  typedef struct packed {
    x_id_t      id;
    logic [4:0] rd;
    logic       is_load;
  } mem_entry_t;

endpackage
