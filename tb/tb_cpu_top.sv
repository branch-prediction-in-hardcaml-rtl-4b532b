// tb_cpu_top: end-to-end test of the processor at its default parameters.
// A program assembled here is loaded through the program port and run to
// an EBREAK. Every retiring instruction is checked against the
// instruction-set model in rv_model_pkg (PC, destination register and
// value). The program contains:
//   A  the even/odd flip-flop loop whose inner branch a TAGE-style predictor
//      learns perfectly from global history (checked: no mispredictions of
//      that branch in the last quarter of the iterations);
//   B  a recursion 20 deep, called three times (RAS push/pop, overflow of
//      the 16-entry RAS, return address recovery);
//   C  random ALU, multiply and divide operations with back-to-back
//      dependencies (forwarding, divider stalls, division corner cases);
//   D  byte/half/word stores and loads with immediate use of the load;
//   E  an indirect jump through a register and an indirect call (jump BTB);
//   F  UART transmit of two bytes (decoded from the tx pin) and receive of
//      one byte driven onto rx.
// It also checks the misprediction penalty: after an execute-stage
// redirect and after a decode-stage redirect the next instruction retires
// two cycles after the redirected one (one lost cycle), and it counts how
// often each mechanism happened, failing any that never did.
module tb_cpu_top;
  import rv_model_pkg::*;

  localparam int CLKS_PER_BIT = 434;   // the design's default
  localparam int N1 = 200;             // flip-flop loop iterations

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
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // --------------------------------------------------------- the program
  asm_t   p;
  iss_t   iss;
  int     studied_pc, uart_rx_pc;
  localparam int SP = 2, RA = 1, T0 = 5, T1 = 6, T2 = 7, A0 = 10, A1 = 11;

  function automatic void build();
    int loop, k_odd, k_even, k_chk, odd, even, chk, k_call[3], sum_pc, k_base;
    int k_tbl, k_ind, tgt, k_fn, fn, loopc, k_over;
    int poll, poll2, loopg;
    p = new();
    p.li(SP, 32'h0000_F000);
    // ---- A: flip-flopping branch (the even/odd counting loop)
    p.li(A0, N1);
    loop = p.here();
    p.andi(A1, A0, 1);
    studied_pc = p.here();
    k_odd = p.fwd();                 // bne a1, zero, odd
    k_even = p.fwd();                // j even
    odd = p.here();
    p.addi(T1, T1, 1);
    k_chk = p.fwd();                 // j check
    even = p.here();
    p.addi(T0, T0, 1);
    chk = p.here();
    p.addi(A0, A0, -1);
    p.br(1, A0, 0, loop);            // bnez a0, loop
    p.patch_br(k_odd, 1, A1, 0, odd);
    p.patch_jal(k_even, 0, even);
    p.patch_jal(k_chk, 0, chk);
    // ---- B: recursion, three calls of sum(20)
    for (int c = 0; c < 3; c++) begin
      p.li(A0, 20);
      k_call[c] = p.fwd();           // jal ra, sum
      p.op(0, 0, 20 + c, A0, 0);     // x20+c = result
    end
    // ---- C: random arithmetic
    for (int k = 0; k < 160; k++) begin
      logic [31:0] va, vb;
      int f3, kind;
      va = $urandom; vb = $urandom;
      case ($urandom_range(0, 5))
        0: vb = 0;
        1: begin va = 32'h8000_0000; vb = 32'hFFFF_FFFF; end
        2: vb = 32'($urandom_range(1, 9));
        default: ;
      endcase
      if (k % 3 != 0) p.li(A0, va);
      p.li(A1, vb);
      kind = $urandom_range(0, 2);
      f3 = $urandom_range(0, 7);
      if (kind == 0)      p.op(1, f3, 12, A0, A1);                  // M extension
      else if (kind == 1) p.op((f3 == 0 || f3 == 5) ? 32 * $urandom_range(0, 1) : 0, f3, 12, A0, A1);
      else                p.opi(f3, 12, A0, (f3 == 1 || f3 == 5) ? ($urandom_range(0, 31) | (f3 == 5 ? 32'h400 * $urandom_range(0, 1) : 0)) : $urandom_range(0, 4095) - 2048);
      p.op(0, 0, A0, 12, A0);        // dependent add: forwarding
    end
    // ---- D: memory
    p.li(13, 32'h0000_0100);
    p.li(14, 32'h8765_4321);
    p.sw(14, 13, 0);
    p.sw(14, 13, 4);
    p.sw(14, 13, 4, 0);              // sb
    p.sw(14, 13, 6, 1);              // sh
    for (int f = 0; f < 8; f++) begin
      if (f == 3 || f == 6 || f == 7) continue;
      p.lw(15, 13, (f == 2) ? 4 : (f == 0 || f == 4) ? 1 : 2, f);
      p.op(0, 0, 16, 15, 15);        // immediate use of the load
      p.lw(15, 13, 4, f == 2 ? 2 : f);
      p.op(0, 0, 16, 15, 16);
    end
    // ---- E: indirect jump and indirect call, five times
    p.li(T2, 5);
    loopc = p.here();
    p.emit(enc_u(0, 14, 7'h17));     // auipc x14, 0
    k_tbl = p.fwd();                 // addi x14, x14, tgt-auipc
    p.jalr(0, 14, 0);                // indirect jump
    p.addi(17, 17, 99);              // skipped
    tgt = p.here();
    p.code[k_tbl] = enc_i(tgt - (k_tbl - 1) * 4, 14, 0, 14, 7'h13);
    p.emit(enc_u(0, 14, 7'h17));     // auipc x14, 0
    k_fn = p.fwd();
    p.jalr(RA, 14, 0);               // indirect call
    p.addi(T2, T2, -1);
    p.br(1, T2, 0, loopc);
    k_over = p.fwd();                // j over the function
    fn = p.here();
    p.code[k_fn] = enc_i(fn - (k_fn - 1) * 4, 14, 0, 14, 7'h13);
    p.addi(18, 18, 3);
    p.jalr(0, RA, 0);                // ret
    p.patch_jal(k_over, 0, p.here());
    // ---- G: two alternating branches 256 bytes apart share a branch-BTB
    //      entry, so each often misses the BTB while BATAGE's tagged banks
    //      know it
    p.li(A0, 40);
    loopg = p.here();
    p.andi(A1, A0, 1);
    p.br(0, A1, 0, p.here() + 8);
    p.addi(25, 25, 1);
    while (p.here() < loopg + 4 + 256) p.addi(0, 0, 0);
    p.br(0, A1, 0, p.here() + 8);
    p.addi(26, 26, 1);
    p.addi(A0, A0, -1);
    p.br(1, A0, 0, loopg);
    // ---- F: UART
    p.li(19, 32'h1000_0000);
    for (int c = 0; c < 2; c++) begin
      p.li(16, 32'h41 + c);
      p.sw(16, 19, 0);
      poll = p.here();
      p.lw(17, 19, 4);
      p.andi(17, 17, 1);
      p.br(1, 17, 0, poll);
    end
    poll2 = p.here();
    p.lw(17, 19, 4);
    p.andi(17, 17, 2);
    p.br(0, 17, 0, poll2);
    uart_rx_pc = p.here();
    p.lw(24, 19, 0);
    p.emit(EBREAK);
    // ---- sum(n) = n + sum(n-1)
    sum_pc = p.here();
    for (int c = 0; c < 3; c++) p.patch_jal(k_call[c], RA, sum_pc);
    p.addi(SP, SP, -8);
    p.sw(RA, SP, 4);
    p.sw(A0, SP, 0);
    k_base = p.fwd();                // beq a0, zero, base
    p.addi(A0, A0, -1);
    p.jal(RA, sum_pc);
    p.lw(T2, SP, 0);
    p.op(0, 0, A0, A0, T2);
    p.patch_br(k_base, 0, A0, 0, p.here());
    p.lw(RA, SP, 4);
    p.addi(SP, SP, 8);
    p.jalr(0, RA, 0);
  endfunction

  // ------------------------------------------------- mechanism counters
  int n_ex_redirect, n_id_redirect, n_stall, n_fwd, n_load_fwd, n_push, n_pop,
      n_overflow, n_hist_restore, n_jbtb_ret, n_jbtb_jump, n_bbtb_hit,
      n_bbtb_ins, n_jbtb_ins, n_bat_tagged, n_static_br, n_bat_alloc,
      n_tx, n_rx, n_studied_late_miss, n_studied_retire;

  always @(posedge clk) if (!rst) begin
    if (dut.ex_redirect) n_ex_redirect++;
    if (dut.id_redirect) n_id_redirect++;
    if (dut.stall) n_stall++;
    if (dut.ex_valid && dut.wb_valid && dut.wb_rd_we && dut.wb_rd == dut.ex_d.rs1) begin
      n_fwd++;
      if (dut.wb_is_load) n_load_fwd++;
    end
    if (dut.u_ras.push) n_push++;
    if (dut.u_ras.pop) n_pop++;
    if (dut.u_ras.overflow) n_overflow++;
    if (dut.ex_redirect && dut.ex_hist_pushed) n_hist_restore++;
    if (dut.id_act && dut.id_fp.jbtb_hit && dut.id_d.is_jalr && dut.sp_pop) n_jbtb_ret++;
    if (dut.id_act && dut.id_fp.jbtb_hit && !dut.sp_pop) n_jbtb_jump++;
    if (dut.id_act && dut.id_fp.bbtb_hit) n_bbtb_hit++;
    if (dut.u_bbtb.ins_valid) n_bbtb_ins++;
    if (dut.u_jbtb.ins_valid) n_jbtb_ins++;
    if (dut.id_act && dut.sp_batage) n_bat_tagged++;
    if (dut.id_act && dut.sp_static) n_static_br++;
    if (dut.wb_valid && dut.ret_branch && dut.bat_alloc) n_bat_alloc++;
    if (dut.uart_tx_start) n_tx++;
    if (dut.uart_rx_done) n_rx++;
    if (dut.ex_redirect && dut.ex_pc == studied_pc && n_studied_retire >= N1 * 3 / 4)
      n_studied_late_miss++;
  end

  // ------------------------------------------------ lockstep comparison
  logic [31:0] pend_pc;
  bit          pend_valid, gap_armed;
  longint      gap_from;
  bit          done = 0;

  always @(posedge clk) if (!rst) begin
    // remember instructions that redirected (in E) or were redirected (in D)
    if (dut.ex_redirect) begin pend_pc = dut.ex_pc; pend_valid = 1; end
    else if (dut.id_redirect) begin pend_pc = dut.id_pc; pend_valid = 1; end
    if (retire_valid) begin
      if (gap_armed) begin
        // next instruction after a redirect: exactly one bubble, unless it
        // is a divide that stalled in execute
        if (!(retire_instr[6:0] == 7'h33 && retire_instr[25] && retire_instr[14]))
          check(cycle - gap_from == 2, $sformatf("redirect penalty %0d cycles after pc %h", cycle - gap_from - 1, pend_pc));
        gap_armed = 0;
      end
      if (pend_valid && retire_pc == pend_pc) begin
        gap_armed = 1; gap_from = cycle; pend_valid = 0;
      end
      if (retire_pc == studied_pc) n_studied_retire++;
      check(retire_pc == iss.pc, $sformatf("pc %h expected %h", retire_pc, iss.pc));
      iss.step(retire_wdata);
      check(retire_rd_we == iss.rd_we && (!iss.rd_we || (retire_rd == iss.rd && retire_wdata == iss.wdata)),
            $sformatf("pc %h rd x%0d=%h expected we=%0d x%0d=%h", retire_pc, retire_rd,
                      retire_wdata, iss.rd_we, iss.rd, iss.wdata));
      if (retire_instr == EBREAK) done = 1;
    end
  end

  // ------------------------------------------------------------ UART
  int tx_bytes [$];
  initial begin
    forever begin
      logic [7:0] b;
      @(negedge uart_tx);
      repeat (CLKS_PER_BIT + CLKS_PER_BIT / 2) @(posedge clk);
      for (int i = 0; i < 8; i++) begin
        b[i] = uart_tx;
        repeat (CLKS_PER_BIT) @(posedge clk);
      end
      check(uart_tx == 1'b1, "uart stop bit");
      tx_bytes.push_back(b);
    end
  end

  initial begin
    // drive 0x5A onto rx once the program has sent its bytes
    wait (tx_bytes.size() == 2);
    repeat (100) @(posedge clk);
    uart_rx = 1'b0;
    repeat (CLKS_PER_BIT) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      uart_rx = 8'h5A >> i;
      repeat (CLKS_PER_BIT) @(posedge clk);
    end
    uart_rx = 1'b1;
  end

  // ------------------------------------------------------------ run
  task automatic report(input string name, input int n);
    $display("  %-34s %0d", name, n);
    check(n > 0, {"mechanism never happened: ", name});
  endtask

  initial begin
    build();
    iss = new();
    foreach (p.code[i]) iss.imem[i] = p.code[i];
    repeat (2) @(posedge clk);
    foreach (p.code[i]) begin
      @(negedge clk);
      prog_we = 1; prog_dmem = 0; prog_addr = i * 4; prog_wdata = p.code[i];
    end
    @(negedge clk);
    prog_we = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    wait (done);
    repeat (5) @(posedge clk);
    $display("program: %0d instructions, ran %0d cycles", p.code.size(), cycle);
    check(iss.x[T0] == N1 / 2 && iss.x[T1] == N1 / 2, "flip-flop loop counts");
    check(iss.x[20] == 210 && iss.x[21] == 210 && iss.x[22] == 210, "sum(20)");
    check(iss.x[18] == 15, "indirect call count");
    check(iss.x[24] == 32'h5A, "uart received byte");
    check(iss.x[25] == 20 && iss.x[26] == 20, "aliasing branches");
    check(tx_bytes.size() == 2 && tx_bytes[0] == 8'h41 && tx_bytes[1] == 8'h42, "uart sent bytes");
    check(n_studied_late_miss == 0, $sformatf("studied branch mispredicted %0d times late", n_studied_late_miss));
    $display("mechanisms:");
    report("execute-stage redirect", n_ex_redirect);
    report("decode-stage redirect", n_id_redirect);
    report("divider stall cycles", n_stall);
    report("writeback->execute forwarding", n_fwd);
    report("load result forwarding", n_load_fwd);
    report("RAS push", n_push);
    report("RAS pop", n_pop);
    report("RAS overflow", n_overflow);
    report("history pointer restore", n_hist_restore);
    report("jump BTB hit on a return", n_jbtb_ret);
    report("jump BTB hit on another jump", n_jbtb_jump);
    report("branch BTB hit", n_bbtb_hit);
    report("branch BTB insert", n_bbtb_ins);
    report("jump BTB insert", n_jbtb_ins);
    report("BATAGE tagged provider in decode", n_bat_tagged);
    report("static backward/forward rule", n_static_br);
    report("BATAGE allocation", n_bat_alloc);
    report("UART byte sent", n_tx);
    report("UART byte received", n_rx);
    $display("IPC %0.3f", real'(n_retired) / real'(cycle));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_retired = 0;
  always @(posedge clk) if (!rst && retire_valid) n_retired++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: program did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
