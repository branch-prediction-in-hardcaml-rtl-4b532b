// tb_decoder: random instructions of every RV32IM format, assembled with
// the encoders of rv_model_pkg, must decode to the fields and immediates
// they were built from.
module tb_decoder;
  import rv_pkg::*;
  import rv_model_pkg::*;
  logic [31:0] instr; decoded_t d;
  decoder dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s %h", w, instr); end endtask
  initial begin
    for (int k = 0; k < 3000; k++) begin
      int rd, rs1, rs2, imm, f3;
      rd = $urandom_range(1, 31); rs1 = $urandom_range(0, 31); rs2 = $urandom_range(0, 31);
      case (k % 8)
        0: begin imm = $urandom_range(0, 4095) - 2048; f3 = 0; instr = enc_i(imm, rs1, 0, rd, 7'h13); #1;
                 chk(d.valid_op && d.rd_we && d.rd == 5'(rd) && d.rs1 == 5'(rs1) && d.imm == 32'(imm) && d.alu_b_imm && d.alu_op == ALU_ADD, "addi"); end
        1: begin imm = $urandom_range(0, 2047) * 2 - 2048; f3 = $urandom_range(0, 1); instr = enc_b(imm, rs2, rs1, f3); #1;
                 chk(d.is_branch && !d.rd_we && d.imm == 32'(imm) && d.rs2 == 5'(rs2) && d.funct3 == 3'(f3), "branch"); end
        2: begin imm = ($urandom_range(0, 1048575) - 524288) * 2; instr = enc_j(imm, rd); #1;
                 chk(d.is_jal && d.rd_we && d.imm == 32'(imm) && d.res_sel == RES_LINK, "jal"); end
        3: begin imm = $urandom_range(0, 4095) - 2048; instr = enc_s(imm, rs2, rs1, 2); #1;
                 chk(d.is_store && !d.rd_we && d.imm == 32'(imm) && d.rs2 == 5'(rs2), "store"); end
        4: begin imm = $urandom_range(0, 4095) - 2048; instr = enc_i(imm, rs1, 4, rd, 7'h03); #1;
                 chk(d.is_load && d.rd_we && d.imm == 32'(imm) && d.funct3 == 3'd4 && d.res_sel == RES_LOAD, "lbu"); end
        5: begin f3 = $urandom_range(0, 7); instr = enc_r(1, rs2, rs1, f3, rd, 7'h33); #1;
                 chk(d.res_sel == (f3 >= 4 ? RES_DIV : RES_MUL) && d.mul_op == mul_op_e'(f3 % 4) && d.div_op == div_op_e'(f3 % 4), "M op"); end
        6: begin instr = enc_r(32, rs2, rs1, 0, rd, 7'h33); #1;
                 chk(d.alu_op == ALU_SUB && d.res_sel == RES_ALU && !d.alu_b_imm, "sub");
                 instr = enc_r(32, rs2, rs1, 5, rd, 7'h33); #1; chk(d.alu_op == ALU_SRA, "sra"); end
        default: begin imm = $urandom; instr = enc_u(imm, rd, 7'h37); #1;
                 chk(d.imm == {20'(imm), 12'd0} && d.alu_op == ALU_PASSB && d.rd_we, "lui");
                 instr = enc_i(0, rs1, 0, 0, 7'h67); #1; chk(d.is_jalr && !d.rd_we, "jalr x0");
                 instr = EBREAK; #1; chk(!d.valid_op && !d.rd_we, "ebreak is a no-op"); end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
