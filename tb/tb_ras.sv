// tb_ras: pushes past the depth (the oldest entries are overwritten and the
// newest 16 pop back in order), a random push/pop/restore sequence against a
// circular-stack model, and pointer-only recovery after a wrong-path pop.
module tb_ras;
  localparam int D = 16;
  logic clk = 0, rst = 1, push = 0, pop = 0, restore = 0, overflow;
  logic [31:0] push_addr = 0, top;
  logic [3:0] restore_ptr = 0, ptr, ptr_next;
  ras #(.DEPTH(D)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_over = 0;
  logic [31:0] m [D]; int t = 0;
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  task automatic op(bit pu, bit po, logic [31:0] ad);
    @(negedge clk); push = pu; pop = po; push_addr = ad;
    #1 if (overflow) n_over++;
    @(posedge clk); #1;
    if (pu) m[po ? t : (t + 1) % D] = ad;
    if (pu && !po) t = (t + 1) % D; else if (po && !pu) t = (t + D - 1) % D;
    push = 0; pop = 0;
  endtask
  initial begin
    foreach (m[i]) m[i] = 0;
    @(posedge clk); #1 rst = 0;
    for (int i = 1; i <= 20; i++) op(1, 0, 32'h100 * i);
    for (int i = 20; i >= 5; i--) begin chk(top == 32'h100 * i, $sformatf("lifo %0d got %h", i, top)); op(0, 1, 0); end
    chk(top == 32'h100 * 20, "wrapped top");
    chk(n_over == 4, $sformatf("overflow count %0d", n_over));
    for (int k = 0; k < 1000; k++) begin
      bit pu, po;
      pu = $urandom_range(0, 1); po = $urandom_range(0, 1);
      op(pu, po, $urandom);
      chk(top == m[t] && ptr == 4'(t), "random op");
    end
    // recovery: remember pointer, pop then push on the wrong path, restore
    begin
      logic [3:0] saved; logic [31:0] below;
      saved = ptr; below = m[(t + D - 1) % D];
      op(0, 1, 0); op(1, 0, 32'hDEAD);
      @(negedge clk); restore = 1; restore_ptr = saved; push = 1; push_addr = 32'hBEEF;
      @(posedge clk); #1 restore = 0; push = 0;
      chk(ptr == saved, "pointer restored");
      chk(top == 32'hDEAD, "popped entry lost to the later push, as expected");
      op(0, 1, 0);
      chk(top == below, "entry below survives");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
