// decoder: combinational RV32IM instruction decoder of the decode/register
// load stage. It extracts register addresses, builds the immediate of each
// format (I, S, B, U, J) and selects the ALU operation and the unit whose
// result is written back. Instructions outside RV32IM (FENCE, ECALL,
// EBREAK, CSR accesses) decode as no-operations that write nothing: this
// design has no exceptions or CSRs.
module decoder
  import rv_pkg::*;
(
  input  logic [31:0] instr,
  output decoded_t    d
);
  logic [6:0] opc;
  logic [2:0] f3;
  logic [6:0] f7;
  logic [31:0] imm_i, imm_s, imm_b, imm_u, imm_j;

  always_comb begin
    opc = instr[6:0];
    f3  = instr[14:12];
    f7  = instr[31:25];
    imm_i = {{20{instr[31]}}, instr[31:20]};
    imm_s = {{20{instr[31]}}, instr[31:25], instr[11:7]};
    imm_b = {{19{instr[31]}}, instr[31], instr[7], instr[30:25], instr[11:8], 1'b0};
    imm_u = {instr[31:12], 12'd0};
    imm_j = {{11{instr[31]}}, instr[31], instr[19:12], instr[20], instr[30:21], 1'b0};

    d = '0;
    d.rd     = instr[11:7];
    d.rs1    = instr[19:15];
    d.rs2    = instr[24:20];
    d.funct3 = f3;
    d.alu_op = ALU_ADD;
    d.res_sel = RES_ALU;
    d.mul_op = mul_op_e'(f3[1:0]);
    d.div_op = div_op_e'(f3[1:0]);

    unique case (opc)
      OP_LUI:   begin d.valid_op = 1'b1; d.rd_we = 1'b1; d.imm = imm_u; d.alu_b_imm = 1'b1; d.alu_op = ALU_PASSB; end
      OP_AUIPC: begin d.valid_op = 1'b1; d.rd_we = 1'b1; d.imm = imm_u; d.alu_a_pc = 1'b1; d.alu_b_imm = 1'b1; end
      OP_JAL:   begin d.valid_op = 1'b1; d.rd_we = 1'b1; d.imm = imm_j; d.is_jal = 1'b1; d.res_sel = RES_LINK; end
      OP_JALR:  begin d.valid_op = 1'b1; d.rd_we = 1'b1; d.imm = imm_i; d.is_jalr = 1'b1; d.res_sel = RES_LINK; end
      OP_BRANCH: begin d.valid_op = 1'b1; d.imm = imm_b; d.is_branch = 1'b1; end
      OP_LOAD:  begin d.valid_op = 1'b1; d.rd_we = 1'b1; d.imm = imm_i; d.alu_b_imm = 1'b1; d.is_load = 1'b1; d.res_sel = RES_LOAD; end
      OP_STORE: begin d.valid_op = 1'b1; d.imm = imm_s; d.alu_b_imm = 1'b1; d.is_store = 1'b1; end
      OP_IMM: begin
        d.valid_op = 1'b1; d.rd_we = 1'b1; d.imm = imm_i; d.alu_b_imm = 1'b1;
        unique case (f3)
          3'b000: d.alu_op = ALU_ADD;
          3'b001: d.alu_op = ALU_SLL;
          3'b010: d.alu_op = ALU_SLT;
          3'b011: d.alu_op = ALU_SLTU;
          3'b100: d.alu_op = ALU_XOR;
          3'b101: d.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
          3'b110: d.alu_op = ALU_OR;
          default: d.alu_op = ALU_AND;
        endcase
      end
      OP_REG: begin
        d.valid_op = 1'b1; d.rd_we = 1'b1;
        if (f7 == 7'b0000001) begin
          d.res_sel = f3[2] ? RES_DIV : RES_MUL;
        end else begin
          unique case (f3)
            3'b000: d.alu_op = instr[30] ? ALU_SUB : ALU_ADD;
            3'b001: d.alu_op = ALU_SLL;
            3'b010: d.alu_op = ALU_SLT;
            3'b011: d.alu_op = ALU_SLTU;
            3'b100: d.alu_op = ALU_XOR;
            3'b101: d.alu_op = instr[30] ? ALU_SRA : ALU_SRL;
            3'b110: d.alu_op = ALU_OR;
            default: d.alu_op = ALU_AND;
          endcase
        end
      end
      default: ;
    endcase
    if (d.rd == 5'd0) d.rd_we = 1'b0;
  end
endmodule
