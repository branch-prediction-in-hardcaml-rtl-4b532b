// tb_branch_btb: inserted branches hit and give pc + stored 12-bit offset
// (forward and backward), other PCs miss, same-index inserts replace.
module tb_branch_btb;
  logic clk = 0, rst = 1, hit, ins_valid = 0;
  logic [31:0] lookup_pc = 0, target, ins_pc = 0;
  logic [11:0] ins_offset = 0;
  branch_btb #(.ENTRIES(64)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int mo [int];
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  initial begin
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 600; k++) begin
      logic [31:0] pc;
      pc = {16'd0, 14'($urandom) | 14'h800, 2'b00};
      @(negedge clk);
      if ($urandom_range(0, 1)) begin
        ins_valid = 1; ins_pc = pc; ins_offset = 12'($urandom);
        foreach (mo[q]) if (q[7:2] == pc[7:2]) mo.delete(q);
        mo[int'(pc)] = int'($signed({ins_offset, 1'b0}));
      end
      @(posedge clk); #1 ins_valid = 0;
      lookup_pc = ($urandom_range(0, 1)) ? pc : {16'd0, 14'($urandom) | 14'h800, 2'b00};
      #1;
      if (mo.exists(int'(lookup_pc))) chk(hit && target == lookup_pc + 32'(mo[int'(lookup_pc)]), $sformatf("hit %h -> %h", lookup_pc, target));
      else chk(!hit, $sformatf("miss %h", lookup_pc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
