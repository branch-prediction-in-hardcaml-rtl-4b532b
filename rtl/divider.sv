// divider: RV32M DIV, DIVU, REM and REMU with a radix-2 restoring divider.
// Handshake: hold start high with stable operands; the divider loads them in
// the first cycle, runs one quotient bit per cycle for 32 cycles and then
// raises done for exactly one cycle with the result valid. It ignores start
// in that cycle, so a requester that keeps start high until it sees done
// gets one division. Total latency from the first start cycle to done is
// 33 cycles. Division by zero and the signed overflow case give the results
// the RISC-V specification prescribes. An iterative divider is this
// design's own choice.
module divider
  import rv_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  div_op_e     op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        busy,
  output logic        done,
  output logic [31:0] y
);
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_DONE } state_e;
  state_e      state;
  logic [5:0]  count;
  logic [31:0] quot, rem, divisor;
  logic        neg_q, neg_r, want_rem, by_zero;
  logic [31:0] a_save;
  logic        is_signed;
  logic [32:0] shifted;
  logic [33:0] trial;

  assign is_signed = (op == DIV_DIV) || (op == DIV_REM);
  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
  assign shifted = {rem, quot[31]};
  assign trial = {1'b0, shifted} - {2'b0, divisor};

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      count <= '0;
      quot <= '0; rem <= '0; divisor <= '0;
      neg_q <= 1'b0; neg_r <= 1'b0; want_rem <= 1'b0; by_zero <= 1'b0;
      a_save <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          quot     <= (is_signed && a[31]) ? -a : a;
          divisor  <= (is_signed && b[31]) ? -b : b;
          rem      <= '0;
          neg_q    <= is_signed && (a[31] ^ b[31]);
          neg_r    <= is_signed && a[31];
          want_rem <= (op == DIV_REM) || (op == DIV_REMU);
          by_zero  <= (b == '0);
          a_save   <= a;
          count    <= 6'd32;
          state    <= S_RUN;
        end
        S_RUN: begin
          // Shift the next dividend bit into the partial remainder.
          if (!trial[33]) begin
            rem  <= trial[31:0];
            quot <= {quot[30:0], 1'b1};
          end else begin
            rem  <= shifted[31:0];
            quot <= {quot[30:0], 1'b0};
          end
          count <= count - 6'd1;
          if (count == 6'd1) state <= S_DONE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    if (by_zero)       y = want_rem ? a_save : 32'hFFFF_FFFF;
    else if (want_rem) y = neg_r ? -rem : rem;
    else               y = neg_q ? -quot : quot;
  end
endmodule
