// tb_program1: runs the even/odd counting loop (50 iterations) on the full
// core at its default parameters. The loop's inner branch alternates
// between taken and not taken, so a PC-indexed predictor always gets it
// wrong, while a history-based one can learn it completely. Checks: the
// counts t0 = t1 = 25 in the register writes, no misprediction of the
// inner branch in the last 20 iterations, and the per-iteration
// misprediction profile is printed.
module tb_program1;
  import rv_model_pkg::*;
  logic clk = 1'b0, rst = 1'b1;
  logic prog_we = 1'b0, prog_dmem = 1'b0;
  logic [31:0] prog_addr = '0, prog_wdata = '0;
  logic uart_tx, uart_rx = 1'b1;
  logic retire_valid, retire_rd_we;
  logic [31:0] retire_pc, retire_instr, retire_wdata;
  logic [4:0] retire_rd;
  cpu_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  asm_t p;
  int studied, iter = 0, miss_late = 0, miss_total = 0;
  logic [31:0] t0 = 0, t1 = 0;
  bit done = 0, missed = 0;
  string profile = "";

  initial begin
    int k_odd, k_even, k_chk, loop;
    p = new();
    p.li(10, 50);                      // li a0, 50
    loop = p.here();
    p.andi(11, 10, 1);                 // andi a1, a0, 1
    studied = p.here();
    k_odd = p.fwd();                   // bne a1, zero, odd
    k_even = p.fwd();                  // j even
    p.patch_br(k_odd, 1, 11, 0, p.here());
    p.addi(6, 6, 1);                   // odd: addi t1, t1, 1
    k_chk = p.fwd();                   // j check
    p.patch_jal(k_even, 0, p.here());
    p.addi(5, 5, 1);                   // even: addi t0, t0, 1
    p.patch_jal(k_chk, 0, p.here());
    p.addi(10, 10, -1);                // check: addi a0, a0, -1
    p.br(1, 10, 0, loop);              // bnez a0, loop
    p.emit(EBREAK);
    // t0/t1 start at zero through explicit clears placed before the loop
    p.code.push_front(enc_i(0, 0, 0, 6, 7'h13));
    p.code.push_front(enc_i(0, 0, 0, 5, 7'h13));
    studied += 8;
    repeat (2) @(posedge clk);
    foreach (p.code[i]) begin
      @(negedge clk); prog_we = 1; prog_addr = i * 4; prog_wdata = p.code[i];
    end
    @(negedge clk); prog_we = 0;
    repeat (2) @(negedge clk); rst = 0;
    wait (done);
    $display("inner-branch mispredictions per iteration: %s", profile);
    checks++; if (t0 != 25 || t1 != 25) begin failures++; $display("FAIL counts %0d %0d", t0, t1); end
    checks++; if (miss_late != 0) begin failures++; $display("FAIL %0d late mispredictions", miss_late); end
    $display("inner branch mispredicted %0d times in 50 iterations", miss_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (dut.ex_redirect && dut.ex_pc == studied) begin
      miss_total++;
      if (iter >= 30) miss_late++;
      missed = 1;
    end
    if (retire_valid) begin
      if (retire_pc == studied) begin
        iter++;
        profile = {profile, missed ? "x" : "."};
        missed = 0;
      end
      if (retire_rd_we && retire_rd == 5) t0 = retire_wdata;
      if (retire_rd_we && retire_rd == 6) t1 = retire_wdata;
      if (retire_instr == EBREAK) done = 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
