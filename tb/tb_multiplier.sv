// tb_multiplier: MUL, MULH, MULHSU and MULHU against 64-bit products.
module tb_multiplier;
  import rv_pkg::*;
  mul_op_e op; logic [31:0] a, b, y;
  multiplier dut (.*);
  int checks = 0, failures = 0;
  logic [63:0] p, exp;
  initial begin
    for (int k = 0; k < 4000; k++) begin
      op = mul_op_e'($urandom_range(0, 3));
      a = ($urandom_range(0, 5) == 0) ? 32'h8000_0000 : $urandom;
      b = ($urandom_range(0, 5) == 0) ? 32'hFFFF_FFFF : $urandom;
      case (op)
        MUL_MUL:    begin p = {32'd0, a} * {32'd0, b}; exp = {32'd0, p[31:0]}; end
        MUL_MULH:   begin p = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b})); exp = {32'd0, p[63:32]}; end
        MUL_MULHSU: begin p = 64'($signed({{32{a[31]}}, a}) * $signed({32'd0, b})); exp = {32'd0, p[63:32]}; end
        default:    begin p = {32'd0, a} * {32'd0, b}; exp = {32'd0, p[63:32]}; end
      endcase
      #1; checks++;
      if (y !== exp[31:0]) begin failures++; $display("FAIL op %0d %h*%h -> %h exp %h", op, a, b, y, exp[31:0]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
