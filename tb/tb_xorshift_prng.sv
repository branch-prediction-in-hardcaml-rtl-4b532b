// tb_xorshift_prng: checks the five generators against an independent
// xorshift model: seeds after reset, 200 enabled steps, and that the state
// holds while en is low.
module tb_xorshift_prng;
  logic clk = 0, rst = 1, en = 0;
  logic [31:0] rnd [5];
  xorshift_prng dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] m [5] = '{32'd2463534242, 32'd1850600128, 32'd3837179466, 32'd4290344314, 32'd614373416};
  function automatic logic [31:0] step(logic [31:0] x);
    x ^= x << 13; x ^= x >> 17; x ^= x << 5; return x;
  endfunction
  task automatic cmp(string w);
    for (int i = 0; i < 5; i++) begin
      checks++;
      if (rnd[i] !== m[i]) begin failures++; $display("FAIL %s stream %0d %h vs %h", w, i, rnd[i], m[i]); end
    end
  endtask
  initial begin
    @(posedge clk); #1 rst = 0; cmp("seed");
    for (int k = 0; k < 200; k++) begin
      en = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (en) for (int i = 0; i < 5; i++) m[i] = step(m[i]);
      cmp("step");
    end
    // first output of stream 0 from the reference C code: 723471715
    checks++;
    if (step(32'd2463534242) != 32'd723471715) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
