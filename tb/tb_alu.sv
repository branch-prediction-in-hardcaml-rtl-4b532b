// tb_alu: every ALU operation on random and corner operands against a
// model written with SystemVerilog operators.
module tb_alu;
  import rv_pkg::*;
  alu_op_e op; logic [31:0] a, b, y;
  alu dut (.*);
  int checks = 0, failures = 0;
  function automatic logic [31:0] model(alu_op_e o, logic [31:0] x, logic [31:0] z);
    case (o)
      ALU_ADD: return x + z;  ALU_SUB: return x - z;  ALU_SLL: return x << z[4:0];
      ALU_SLT: return ($signed(x) < $signed(z)) ? 1 : 0;  ALU_SLTU: return (x < z) ? 1 : 0;
      ALU_XOR: return x ^ z;  ALU_SRL: return x >> z[4:0];
      ALU_SRA: return 32'($signed(x) >>> z[4:0]);  ALU_OR: return x | z;
      ALU_AND: return x & z;  default: return z;
    endcase
  endfunction
  initial begin
    for (int k = 0; k < 5000; k++) begin
      op = alu_op_e'($urandom_range(0, 10));
      a = ($urandom_range(0, 7) == 0) ? 32'h8000_0000 : $urandom;
      b = ($urandom_range(0, 7) == 0) ? 32'hFFFF_FFFF : $urandom;
      #1; checks++;
      if (y !== model(op, a, b)) begin failures++; $display("FAIL op %0d %h %h -> %h", op, a, b, y); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
