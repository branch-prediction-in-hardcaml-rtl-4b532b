// ras: return address stack, updated speculatively by the decode stage.
// A decoded call pushes the address of the instruction after it; a decoded
// return pops. A jump that is both (rd and rs1 two different link
// registers) pops and pushes in one cycle, replacing the top. The stack is a
// circular array: when it overflows the pointer simply wraps and the oldest
// return addresses are overwritten, so new calls are never refused.
// Misprediction recovery only restores the top-of-stack pointer (restore has
// priority over a same-cycle push/pop on the pointer; the data write of a
// squashed push still happens, which is the one case that loses an entry).
// top is the current top entry (combinational read); ptr_next is the
// pointer value after this cycle's operation, carried down the pipeline for
// recovery. DEPTH is this design's choice.
module ras #(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          push,
  input  logic          pop,
  input  logic [31:0]   push_addr,
  input  logic          restore,
  input  logic [PW-1:0] restore_ptr,
  output logic [31:0]   top,
  output logic [PW-1:0] ptr,
  output logic [PW-1:0] ptr_next,
  output logic          overflow    // a push overwrote a live entry
);
  logic [31:0]   stack [DEPTH];
  logic [PW-1:0] tos;         // index of the top entry
  logic [PW:0]   count;       // live entries, saturating at DEPTH
  logic [PW-1:0] wr_idx;

  assign top = stack[tos];
  assign ptr = tos;

  always_comb begin
    // pop then push writes over the popped slot; a push alone writes above.
    wr_idx   = pop ? tos : tos + PW'(1);
    ptr_next = tos;
    if (pop && !push) ptr_next = tos - PW'(1);
    else if (push && !pop) ptr_next = tos + PW'(1);
  end

  assign overflow = push && !pop && (count == (PW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (rst) begin
      tos   <= '0;
      count <= '0;
      for (int i = 0; i < DEPTH; i++) stack[i] <= '0;
    end else begin
      if (push) stack[wr_idx] <= push_addr;
      if (restore) begin
        tos <= restore_ptr;
      end else begin
        tos <= ptr_next;
        if (push && !pop && count != (PW+1)'(DEPTH)) count <= count + 1'b1;
        else if (pop && !push && count != '0) count <= count - 1'b1;
      end
    end
  end
endmodule
