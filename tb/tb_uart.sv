// tb_uart: transmit frames are decoded from tx and compared with the
// written bytes (bit time, start and stop bits); the status register shows
// tx_busy; bytes driven on rx are received, flagged in status and cleared
// by reading. Runs at 16 clocks per bit.
module tb_uart;
  localparam int CPB = 16;
  logic clk = 0, rst = 1, req = 0, we = 0, addr = 0, tx, rx = 1, tx_start, rx_done;
  logic [7:0] wdata = 0; logic [31:0] rdata;
  uart #(.CLKS_PER_BIT(CPB)) dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic chk(bit ok, string w); checks++; if (!ok) begin failures++; $display("FAIL %s", w); end endtask
  task automatic bus(bit w, bit ad, logic [7:0] dat);
    @(negedge clk); req = 1; we = w; addr = ad; wdata = dat;
    @(negedge clk); req = 0; we = 0;
  endtask
  logic [7:0] got [$];
  initial forever begin
    logic [7:0] bb;
    @(negedge tx);
    repeat (CPB / 2) @(posedge clk);
    chk(tx == 0, "start bit");
    for (int i = 0; i < 8; i++) begin repeat (CPB) @(posedge clk); bb[i] = tx; end
    repeat (CPB) @(posedge clk);
    chk(tx == 1, "stop bit");
    got.push_back(bb);
  end
  initial begin
    repeat (2) @(posedge clk); rst = 0;
    for (int k = 0; k < 20; k++) begin
      logic [7:0] v, r;
      v = 8'($urandom);
      bus(1, 0, v);
      bus(0, 1, 0); chk(rdata[0] == 1, "tx busy");
      wait (got.size() == k + 1);
      chk(got[k] == v, $sformatf("tx byte %h got %h", v, got[k]));
      repeat (CPB) @(posedge clk);
      bus(0, 1, 0); chk(rdata[0] == 0, "tx idle");
      // receive
      r = 8'($urandom);
      rx = 0; repeat (CPB) @(posedge clk);
      for (int i = 0; i < 8; i++) begin rx = r[i]; repeat (CPB) @(posedge clk); end
      rx = 1; repeat (CPB) @(posedge clk);
      bus(0, 1, 0); chk(rdata[1] == 1, "rx valid");
      bus(0, 0, 0); chk(rdata[7:0] == r, $sformatf("rx byte %h got %h", r, rdata[7:0]));
      bus(0, 1, 0); chk(rdata[1] == 0, "rx cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
