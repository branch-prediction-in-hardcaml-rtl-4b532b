// tb_batage: the predictor at its default sizes.
//  1. After reset nothing hits in the tagged banks and the base predicts
//     not taken.
//  2. An always-taken branch is learnt by the base table.
//  3. A branch whose outcome is the XOR of two of the newest history bits
//     cannot be learnt by the PC-indexed base; the tagged banks must learn
//     it: at least 95% correct over the last 300 of 1500 executions, with
//     tagged providers and allocations seen.
//  4. Throughout, the provider choice is recomputed here from the entries
//     the design read (most confident hit, ties to the longer history) and
//     compared with the design's choice.
module tb_batage;
  import batage_pkg::*;
  localparam int NB = 4, H = 32;
  logic clk = 0, rst = 1;
  logic [31:0] f_pc = 0, u_pc = 0;
  logic [H-1:0] f_hist = 0, u_hist = 0;
  logic f_taken, f_tagged, u_valid = 0, u_taken = 0, u_alloc, u_mispred;
  logic [2:0] f_provider;
  logic [31:0] rnd [5];
  batage dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", w); end endtask

  // independent provider rule
  function automatic int lvl(logic [2:0] n1, logic [2:0] n0);
    int mn = (n1 < n0) ? n1 : n0, mx = (n1 < n0) ? n0 : n1;
    if (2 * mn + 1 < mx) return 2;
    if (2 * mn + 1 == mx) return 1;
    return 0;
  endfunction
  task automatic check_provider();
    int p = 0, best;
    best = lvl(dut.f_c[0].n1, dut.f_c[0].n0);
    for (int i = 1; i <= NB; i++)
      if (dut.f_hit[i] && lvl(dut.f_c[i].n1, dut.f_c[i].n0) >= best) begin
        p = i; best = lvl(dut.f_c[i].n1, dut.f_c[i].n0);
      end
    chk(int'(f_provider) == p && f_taken == (dut.f_c[p].n1 > dut.f_c[p].n0) && f_tagged == (p != 0),
        $sformatf("provider %0d expected %0d", f_provider, p));
  endtask

  // one execution: predict, then train with the outcome at the next edge
  task automatic run(logic [31:0] pc, logic [H-1:0] h, bit outcome, output bit correct);
    @(negedge clk);
    foreach (rnd[i]) rnd[i] = $urandom;
    f_pc = pc; f_hist = h; #1;
    check_provider();
    correct = (f_taken == outcome);
    u_valid = 1; u_pc = pc; u_hist = h; u_taken = outcome;
    @(posedge clk); #1 u_valid = 0;
  endtask

  int n_alloc = 0, n_tagged = 0, late_ok = 0;
  always @(posedge clk) if (u_valid && u_alloc) n_alloc++;

  initial begin
    bit c;
    foreach (rnd[i]) rnd[i] = 0;
    repeat (2) @(posedge clk); #1 rst = 0;
    // 1
    for (int k = 0; k < 50; k++) begin
      f_pc = {$urandom_range(0, 4095), 2'b00}; f_hist = {$urandom, $urandom}; #1;
      chk(!f_tagged && !f_taken && f_provider == 0, "empty after reset");
    end
    // 2
    for (int k = 0; k < 20; k++) run(32'h400, H'({$urandom, $urandom}), 1, c);
    f_pc = 32'h400; #1;
    chk(f_taken, "always-taken branch learnt");
    // 3
    for (int k = 0; k < 1500; k++) begin
      logic [H-1:0] h;
      h = H'({$urandom, $urandom});
      run(32'h880, h, h[0] ^ h[2], c);
      if (f_tagged) n_tagged++;
      if (k >= 1200 && c) late_ok++;
    end
    chk(late_ok >= 285, $sformatf("history-correlated branch: %0d of 300 correct", late_ok));
    chk(n_tagged > 0, "tagged provider used");
    chk(n_alloc > 0, "allocations");
    $display("late accuracy %0d/300, tagged predictions %0d, allocations %0d", late_ok, n_tagged, n_alloc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
