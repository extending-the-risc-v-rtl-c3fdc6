// simd_pkg: constants and types shared by the softcore.
// Widths follow the main configuration (32-bit base registers, 256-bit
// vector registers, 8 vector registers, 256-bit L1 blocks). The custom
// opcode numbers are the four RISC-V "custom" major opcodes; which custom
// instruction lives on which opcode/func3 is this design's own choice.
package simd_pkg;
  localparam int XLEN    = 32;
  localparam int VLEN    = 256;
  localparam int NVREG   = 8;
  localparam int L1BLOCK = 256;

  // RV32I major opcodes
  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;
  localparam logic [6:0] OP_FENCE  = 7'b0001111;
  localparam logic [6:0] OP_SYSTEM = 7'b1110011;
  // custom-0..3: c0 (S' vector load/store), c1, c2, c3 (I' SIMD units)
  localparam logic [6:0] OP_C0     = 7'b0001011;
  localparam logic [6:0] OP_C1     = 7'b0101011;
  localparam logic [6:0] OP_C2     = 7'b1011011;
  localparam logic [6:0] OP_C3     = 7'b1111011;

  // func3 codes of the custom instructions
  localparam logic [2:0] F3_C0_LV    = 3'd0;
  localparam logic [2:0] F3_C0_SV    = 3'd1;
  localparam logic [2:0] F3_C1_MERGE = 3'd0;
  localparam logic [2:0] F3_C1_SORT4 = 3'd1;

  // Fields of the I' and S' vector instruction types (Figure 2 of the
  // paper's encoding): vrs1 31:29, vrd1 28:26, vrs2 25:23 / imm 25,
  // vrd2 22:20 / rs2 24:20, rs1 19:15, func3 14:12, rd 11:7, opcode 6:0.
  typedef struct packed {
    logic [6:0] opcode;
    logic [4:0] rd;
    logic [2:0] func3;
    logic [4:0] rs1;
    logic [4:0] rs2;    // S' only
    logic       imm;    // S' only
    logic [2:0] vrs1;
    logic [2:0] vrd1;
    logic [2:0] vrs2;   // I' only
    logic [2:0] vrd2;   // I' only
    logic       is_ip;  // I' type (custom-1/2/3)
    logic       is_sp;  // S' type (custom-0)
  } vfields_t;

  // memory access size
  typedef enum logic [1:0] {SZ_B = 2'd0, SZ_H = 2'd1, SZ_W = 2'd2, SZ_V = 2'd3} msize_e;
endpackage
