// tb_global_history: speculative appends, the H-bit windows before the
// current pointer and before an older snapshot, and recovery (pointer
// restored, slot rewritten, same-cycle read of the rewritten slot).
module tb_global_history;
  localparam int S = 64, H = 32;
  logic clk = 0, rst = 1, push = 0, push_bit = 0, restore = 0, restore_bit = 0;
  logic [5:0] restore_slot = 0, wptr, wptr_eff, rd_ptr_a = 0, rd_ptr_b = 0;
  logic [H-1:0] hist_a, hist_b;
  global_history #(.SIZE(S), .H(H)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  bit seq [$];   // every bit ever appended, oldest first (model of history)
  function automatic logic [H-1:0] window(int n);  // newest H bits among first n
    logic [H-1:0] w = '0;
    for (int i = 0; i < H; i++) if (n - 1 - i >= 0) w[i] = seq[n - 1 - i];
    return w;
  endfunction
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 400; k++) begin
      int snap;
      @(negedge clk);
      push = 1; push_bit = $urandom_range(0, 1);
      @(posedge clk); #1 push = 0;
      seq.push_back(push_bit);
      snap = seq.size() - $urandom_range(0, 20);
      if (snap < 0) snap = 0;
      rd_ptr_a = wptr; rd_ptr_b = 6'(snap);
      #1;
      chk(wptr == 6'(seq.size()), "pointer");
      chk(hist_a == window(seq.size()), "window at pointer");
      chk(hist_b == window(snap), "window at snapshot");
      // every 10th step: a branch 3 back was mispredicted
      if (k % 10 == 9) begin
        int slot;
        slot = seq.size() - 3;
        @(negedge clk);
        restore = 1; restore_slot = 6'(slot); restore_bit = !seq[slot];
        rd_ptr_a = 6'(slot + 1);
        #1;
        chk(wptr_eff == 6'(slot + 1), "effective pointer");
        seq[slot] = !seq[slot];
        chk(hist_a == window(slot + 1), "bypassed window");
        @(posedge clk); #1 restore = 0;
        while (seq.size() > slot + 1) void'(seq.pop_back());
        chk(wptr == 6'(slot + 1), "restored pointer");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
