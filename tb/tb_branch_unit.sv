// tb_branch_unit: random branch conditions, JAL and JALR targets against a
// model, and the misprediction flag for right and wrong predicted PCs.
module tb_branch_unit;
  import rv_pkg::*;
  import rv_model_pkg::*;
  logic valid, taken, mispredict;
  logic [31:0] pc, a, b, pred_next, actual_next, instr;
  decoded_t d;
  decoder u_dec (.instr, .d);
  branch_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  initial begin
    valid = 1;
    for (int k = 0; k < 3000; k++) begin
      int f3, off; bit t; logic [31:0] exp;
      pc = {$urandom_range(0, 65535), 2'b00};
      a = $urandom; b = ($urandom_range(0, 3) == 0) ? a : $urandom;
      if ($urandom_range(0, 3) == 0) b = a ^ 32'h8000_0000;
      off = ($urandom_range(0, 2047) - 1024) * 2;
      case (k % 4)
        0, 1: begin
          f3 = $urandom_range(0, 5); if (f3 >= 2) f3 += 2;
          instr = enc_b(off, 2, 1, f3);
          case (f3)
            0: t = a == b; 1: t = a != b; 4: t = $signed(a) < $signed(b);
            5: t = $signed(a) >= $signed(b); 6: t = a < b; default: t = a >= b;
          endcase
          exp = t ? pc + 32'(off) : pc + 4;
        end
        2: begin instr = enc_j(off, 1); t = 1; exp = pc + 32'(off); end
        default: begin instr = enc_i(off / 2, 1, 0, 1, 7'h67); t = 1; exp = (a + 32'(off / 2)) & ~32'd1; end
      endcase
      pred_next = ($urandom_range(0, 1)) ? exp : exp + 4;
      #1;
      chk(taken == t && actual_next == exp && mispredict == (pred_next != exp),
          $sformatf("instr %h a %h b %h -> %0d %h", instr, a, b, taken, actual_next));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
