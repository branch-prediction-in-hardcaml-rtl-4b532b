// multiplier: the RV32M multiply instructions in one combinational step.
// MUL returns the low word of the product; MULH, MULHSU and MULHU the high
// word with both operands signed, a signed and b unsigned, or both unsigned.
// A single-cycle multiplier is this design's choice; the processor is
// described only as RV32IM.
module multiplier
  import rv_pkg::*;
(
  input  mul_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic signed [32:0] sa, sb;
  logic signed [65:0] prod;

  always_comb begin
    sa = (op == MUL_MULHU) ? {1'b0, a} : {a[31], a};
    sb = (op == MUL_MULH || op == MUL_MUL) ? {b[31], b} : {1'b0, b};
    prod = sa * sb;
    y = (op == MUL_MUL) ? prod[31:0] : prod[63:32];
  end
endmodule
