// tb_divider: random and corner-case divisions (by zero, -2^31 / -1)
// against the RISC-V definitions, and the latency: done exactly 33 cycles
// after start is first raised.
module tb_divider;
  import rv_pkg::*;
  logic clk = 0, rst = 1, start = 0, busy, done;
  div_op_e op; logic [31:0] a, b, y;
  divider dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  function automatic logic [31:0] model(div_op_e o, logic [31:0] x, logic [31:0] z);
    case (o)
      DIV_DIV:  return (z == 0) ? '1 : (x == 32'h8000_0000 && z == '1) ? x : 32'($signed(x) / $signed(z));
      DIV_DIVU: return (z == 0) ? '1 : x / z;
      DIV_REM:  return (z == 0) ? x : (x == 32'h8000_0000 && z == '1) ? 0 : 32'($signed(x) % $signed(z));
      default:  return (z == 0) ? x : x % z;
    endcase
  endfunction
  initial begin
    op = DIV_DIV; a = 0; b = 0;
    @(posedge clk); #1 rst = 0;
    for (int k = 0; k < 300; k++) begin
      int lat;
      op = div_op_e'($urandom_range(0, 3));
      a = $urandom; b = $urandom;
      case ($urandom_range(0, 5))
        0: b = 0;
        1: begin a = 32'h8000_0000; b = '1; end
        2: b = $urandom_range(1, 20);
        3: b = -$urandom_range(1, 20);
        default: ;
      endcase
      start = 1; lat = 0;
      do begin @(posedge clk); #1; lat++; end while (!done);
      checks += 2;
      if (y !== model(op, a, b)) begin failures++; $display("FAIL op %0d %h / %h -> %h exp %h", op, a, b, y, model(op, a, b)); end
      if (lat != 33) begin failures++; $display("FAIL latency %0d", lat); end
      @(posedge clk); #1;   // start still high: must not restart
      checks++;
      if (busy) begin failures++; $display("FAIL restarted"); end
      start = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
