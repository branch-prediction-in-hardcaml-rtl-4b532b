// tb_static_predictor: the decode-stage rules one by one: direct jump
// followed, call pushes, return pops and takes the RAS top, other indirect
// jump keeps the fetch choice, branch with BTB hit keeps the fetch choice,
// branch with a tagged BATAGE provider follows BATAGE, otherwise backward
// taken / forward not taken; history bits and non-control instructions.
module tb_static_predictor;
  import rv_pkg::*;
  import rv_model_pkg::*;
  logic [31:0] pc, ras_top, next_pc, push_addr, instr;
  decoded_t d; fetch_pred_t fp;
  logic ras_push, ras_pop, hist_push, hist_bit, used_static_branch, used_batage_tagged;
  decoder u_dec (.instr, .d);
  static_predictor dut (.*);
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  initial begin
    for (int k = 0; k < 500; k++) begin
      int off;
      pc = {$urandom_range(0, 65535), 2'b00} + 32'h1_0000; ras_top = $urandom;
      fp = '{next_pc: $urandom, jbtb_hit: 0, bbtb_hit: 0, bat_taken: $urandom_range(0, 1), bat_tagged: 0};
      off = ($urandom_range(0, 2047) - 1024) * 2;
      instr = enc_j(off, 1); #1;                       // call: jal ra
      chk(next_pc == pc + 32'(off) && ras_push && !ras_pop && push_addr == pc + 4 && hist_push && hist_bit, "jal call");
      instr = enc_j(off, 0); #1;                       // plain jump
      chk(next_pc == pc + 32'(off) && !ras_push && !ras_pop, "jal");
      instr = enc_i(0, 1, 0, 0, 7'h67); #1;            // ret
      chk(next_pc == ras_top && ras_pop && !ras_push && hist_push, "ret");
      instr = enc_i(0, 5, 0, 1, 7'h67); #1;            // jalr ra, t0: pop then push
      chk(next_pc == ras_top && ras_pop && ras_push, "coroutine swap");
      instr = enc_i(8, 14, 0, 1, 7'h67); #1;           // indirect call
      chk(next_pc == fp.next_pc && ras_push && !ras_pop, "indirect call");
      instr = enc_i(8, 14, 0, 0, 7'h67); #1;           // indirect jump
      chk(next_pc == fp.next_pc && !ras_push && !ras_pop, "indirect jump");
      instr = enc_b(off, 3, 4, 0);                      // branch, no BTB, no tagged
      #1;
      chk(used_static_branch && next_pc == ((off < 0) ? pc + 32'(off) : pc + 4) && hist_bit == (off < 0), "static rule");
      fp.bat_tagged = 1; #1;
      chk(used_batage_tagged && next_pc == (fp.bat_taken ? pc + 32'(off) : pc + 4) && hist_bit == fp.bat_taken, "batage in decode");
      fp.bbtb_hit = 1; fp.next_pc = pc + 32'(off); #1;
      chk(!used_batage_tagged && !used_static_branch && next_pc == pc + 32'(off) && hist_bit, "btb taken kept");
      fp.next_pc = pc + 4; #1;
      chk(next_pc == pc + 4 && !hist_bit, "btb not-taken kept");
      instr = enc_i(5, 3, 0, 3, 7'h13); fp.next_pc = 32'h1234; #1;
      chk(next_pc == pc + 4 && !hist_push && !ras_push && !ras_pop, "non-control");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
