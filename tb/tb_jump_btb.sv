// tb_jump_btb: inserted jumps hit with their target and return flag, other
// PCs (including ones sharing an index) miss, a later insert at the same
// index replaces the entry, and an insert is visible the next cycle.
module tb_jump_btb;
  logic clk = 0, rst = 1, hit, is_ret, ins_valid = 0, ins_is_ret = 0;
  logic [31:0] lookup_pc = 0, target, ins_pc = 0, ins_target = 0;
  jump_btb #(.ENTRIES(64)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] mt [int]; bit mr [int];
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 600; k++) begin
      logic [31:0] pc;
      pc = {18'd0, 12'($urandom), 2'b00};
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        ins_valid = 1; ins_pc = pc; ins_is_ret = $urandom_range(0, 1); ins_target = $urandom;
        // a direct-mapped table keeps only the last entry of each index
        foreach (mt[q]) if (q[7:2] == pc[7:2]) begin mt.delete(q); mr.delete(q); end
        mt[int'(pc)] = ins_target; mr[int'(pc)] = ins_is_ret;
      end
      @(posedge clk); #1 ins_valid = 0;
      lookup_pc = {18'd0, 12'($urandom), 2'b00};
      if ($urandom_range(0, 1)) lookup_pc = pc;
      #1;
      if (mt.exists(int'(lookup_pc))) chk(hit && target == mt[int'(lookup_pc)] && is_ret == mr[int'(lookup_pc)], $sformatf("hit %h", lookup_pc));
      else chk(!hit, $sformatf("miss %h", lookup_pc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
