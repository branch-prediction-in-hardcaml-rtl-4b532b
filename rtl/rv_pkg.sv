// rv_pkg: opcodes, decoded-instruction fields and the bundles that travel
// with an instruction through the four pipeline stages.
// Encodings are the RISC-V RV32IM base ones; the bundle layouts are this
// design's own.
package rv_pkg;

  localparam logic [6:0] OP_LUI    = 7'b0110111;
  localparam logic [6:0] OP_AUIPC  = 7'b0010111;
  localparam logic [6:0] OP_JAL    = 7'b1101111;
  localparam logic [6:0] OP_JALR   = 7'b1100111;
  localparam logic [6:0] OP_BRANCH = 7'b1100011;
  localparam logic [6:0] OP_LOAD   = 7'b0000011;
  localparam logic [6:0] OP_STORE  = 7'b0100011;
  localparam logic [6:0] OP_IMM    = 7'b0010011;
  localparam logic [6:0] OP_REG    = 7'b0110011;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] { MUL_MUL, MUL_MULH, MUL_MULHSU, MUL_MULHU } mul_op_e;
  typedef enum logic [1:0] { DIV_DIV, DIV_DIVU, DIV_REM, DIV_REMU } div_op_e;

  // Which execution unit produces rd.
  typedef enum logic [2:0] { RES_ALU, RES_MUL, RES_DIV, RES_LOAD, RES_LINK } res_sel_e;

  typedef struct packed {
    logic        valid_op;   // a recognised instruction
    logic [4:0]  rd;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic        rd_we;
    logic [31:0] imm;
    alu_op_e     alu_op;
    logic        alu_a_pc;   // operand A is the PC (AUIPC)
    logic        alu_b_imm;  // operand B is the immediate
    res_sel_e    res_sel;
    mul_op_e     mul_op;
    div_op_e     div_op;
    logic        is_branch;
    logic        is_jal;
    logic        is_jalr;
    logic [2:0]  funct3;     // branch condition / load-store size
    logic        is_load;
    logic        is_store;
  } decoded_t;

  // What the fetch stage predicted for one instruction.
  typedef struct packed {
    logic [31:0] next_pc;      // PC fetched after this one
    logic        jbtb_hit;     // jump BTB hit
    logic        bbtb_hit;     // branch BTB hit
    logic        bat_taken;    // BATAGE direction
    logic        bat_tagged;   // BATAGE provider was a tagged bank
  } fetch_pred_t;

  // Classification of a jump for the return address stack (RISC-V
  // calling-convention hints: x1 and x5 are link registers).
  function automatic logic is_link(input logic [4:0] r);
    return (r == 5'd1) || (r == 5'd5);
  endfunction

endpackage
