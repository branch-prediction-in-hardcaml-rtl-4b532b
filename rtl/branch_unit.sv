// branch_unit: execute-stage verification of the frontend's prediction.
// It evaluates the branch condition (BEQ, BNE, BLT, BGE, BLTU, BGEU),
// forms the real next PC (branch or JAL target pc+imm, JALR target
// (rs1+imm) with bit 0 cleared, else pc+4) and compares it with the next PC
// the frontend actually followed. A mismatch is a misprediction: the
// pipeline redirects fetch in the same cycle and squashes the one
// instruction in decode, a one-cycle recovery penalty. Combinational.
module branch_unit
  import rv_pkg::*;
(
  input  logic        valid,
  input  logic [31:0] pc,
  input  decoded_t    d,
  input  logic [31:0] a,        // rs1 value
  input  logic [31:0] b,        // rs2 value
  input  logic [31:0] pred_next,
  output logic        taken,
  output logic [31:0] actual_next,
  output logic        mispredict
);
  logic cond;

  always_comb begin
    unique case (d.funct3)
      3'b000:  cond = (a == b);
      3'b001:  cond = (a != b);
      3'b100:  cond = $signed(a) < $signed(b);
      3'b101:  cond = $signed(a) >= $signed(b);
      3'b110:  cond = a < b;
      3'b111:  cond = a >= b;
      default: cond = 1'b0;
    endcase
    taken = d.is_jal || d.is_jalr || (d.is_branch && cond);
    if (d.is_jalr)   actual_next = (a + d.imm) & ~32'd1;
    else if (taken)  actual_next = pc + d.imm;
    else             actual_next = pc + 32'd4;
    mispredict = valid && (actual_next != pred_next);
  end
endmodule
