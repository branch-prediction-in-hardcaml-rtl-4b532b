// global_history: the global branch history as a circular buffer of SIZE
// single-bit outcomes with a write pointer. The decode stage appends the
// predicted direction of every control transfer (jumps count as taken)
// speculatively. On a misprediction the pipeline restores the write pointer
// to just after the mispredicted instruction's slot and rewrites that slot
// with the real outcome; nothing else needs repair. SIZE must exceed the
// longest history H by the number of control transfers that can be in
// flight, so speculative writes never overwrite history still in use.
// Two read ports return the H most recent bits older than a given pointer
// (bit 0 the newest): one for fetch-stage predictions, one for retirement,
// which uses the pointer snapshot carried with the branch and so sees the
// very history the prediction saw. A read of a slot written in the same
// cycle returns the new bit. SIZE and H are this design's choice.
module global_history #(
  parameter int unsigned SIZE = 64,
  parameter int unsigned H    = 32,
  localparam int unsigned PW = $clog2(SIZE)
) (
  input  logic          clk,
  input  logic          rst,
  // speculative append at decode
  input  logic          push,
  input  logic          push_bit,
  // recovery: slot of the mispredicted instruction and its real outcome
  input  logic          restore,
  input  logic [PW-1:0] restore_slot,
  input  logic          restore_bit,
  output logic [PW-1:0] wptr,        // current write pointer
  output logic [PW-1:0] wptr_eff,    // pointer as it will be after recovery
  input  logic [PW-1:0] rd_ptr_a,
  output logic [H-1:0]  hist_a,
  input  logic [PW-1:0] rd_ptr_b,
  output logic [H-1:0]  hist_b
);
  logic          buf_q [SIZE];
  logic          wr_en, wr_bit;
  logic [PW-1:0] wr_slot;

  always_comb begin
    wr_en   = restore || push;
    wr_slot = restore ? restore_slot : wptr;
    wr_bit  = restore ? restore_bit : push_bit;
    wptr_eff = restore ? restore_slot + PW'(1) : wptr;
  end

  function automatic logic rd_bit(input logic [PW-1:0] slot, input logic en,
                                  input logic [PW-1:0] ws, input logic wb,
                                  input logic b);
    return (en && slot == ws) ? wb : b;
  endfunction

  always_comb begin
    for (int i = 0; i < H; i++) begin
      logic [PW-1:0] sa, sb;
      sa = rd_ptr_a - PW'(i + 1);
      sb = rd_ptr_b - PW'(i + 1);
      hist_a[i] = rd_bit(sa, wr_en, wr_slot, wr_bit, buf_q[sa]);
      hist_b[i] = rd_bit(sb, wr_en, wr_slot, wr_bit, buf_q[sb]);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr <= '0;
      for (int i = 0; i < SIZE; i++) buf_q[i] <= 1'b0;
    end else begin
      if (wr_en) buf_q[wr_slot] <= wr_bit;
      if (restore)   wptr <= restore_slot + PW'(1);
      else if (push) wptr <= wptr + PW'(1);
    end
  end
endmodule
