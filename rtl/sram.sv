// sram: single-port memory with single-cycle access latency, used for both
// the instruction and the data memory. The word at addr is presented on
// rdata on the clock edge after the request (synchronous read); a write
// stores the bytes selected by be at the same edge, and a read of the word
// being written returns the old contents. Contents are not reset. Word
// addressed; WORDS is this design's choice, the source description gives no memory size.
module sram #(
  parameter int unsigned WORDS = 16384,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic [AW-1:0] addr,
  input  logic          we,
  input  logic [3:0]    be,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    rdata <= mem[addr];
    if (we) begin
      for (int i = 0; i < 4; i++)
        if (be[i]) mem[addr][8*i +: 8] <= wdata[8*i +: 8];
    end
  end
endmodule
