// tb_sram: byte-enable writes and synchronous reads against a model,
// checking that data appear one cycle after the address.
module tb_sram;
  localparam int W = 256;
  logic clk = 0, we = 0;
  logic [7:0] addr; logic [3:0] be; logic [31:0] wdata, rdata;
  sram #(.WORDS(W)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] m [W];
  initial begin
    be = 4'hF;
    for (int i = 0; i < W; i++) begin
      @(negedge clk); we = 1; addr = 8'(i); wdata = $urandom; m[i] = wdata;
    end
    for (int k = 0; k < 3000; k++) begin
      logic [7:0] ra;
      @(negedge clk);
      we = $urandom_range(0, 1); addr = 8'($urandom); be = 4'($urandom); wdata = $urandom;
      ra = addr;
      @(posedge clk); #1;
      checks++;
      if (rdata !== m[ra]) begin failures++; $display("FAIL rd %0d %h exp %h", ra, rdata, m[ra]); end
      if (we) for (int i = 0; i < 4; i++) if (be[i]) m[ra][8*i +: 8] = wdata[8*i +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
