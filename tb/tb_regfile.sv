// tb_regfile: random reads and writes against a model array; x0 stays
// zero; a read of the register written in the same cycle sees the new value.
module tb_regfile;
  logic clk = 0, rst = 1, we = 0;
  logic [4:0] ra1, ra2, wa;
  logic [31:0] rd1, rd2, wd;
  regfile dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] m [32];
  initial begin
    foreach (m[i]) m[i] = 0;
    ra1 = 0; ra2 = 0; wa = 0; wd = 0;
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 2000; k++) begin
      we = $urandom_range(0, 1); wa = 5'($urandom); wd = $urandom;
      ra1 = ($urandom_range(0, 3) == 0) ? wa : 5'($urandom); ra2 = 5'($urandom);
      #1;
      checks += 2;
      if (rd1 !== ((ra1 == 0) ? 0 : (we && wa == ra1) ? wd : m[ra1])) begin failures++; $display("FAIL rd1 x%0d", ra1); end
      if (rd2 !== ((ra2 == 0) ? 0 : (we && wa == ra2) ? wd : m[ra2])) begin failures++; $display("FAIL rd2 x%0d", ra2); end
      @(posedge clk); #1;
      if (we && wa != 0) m[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
