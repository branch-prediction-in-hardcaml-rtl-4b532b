// static_predictor: the decode stage's next-PC decision, made once the
// instruction word is known, plus the return address stack and global
// history operations that decoding implies. Purely combinational.
//
//  * Direct jump (JAL): always followed, target pc + immediate.
//  * Indirect jump (JALR): a return (rs1 a link register, x1 or x5, and rd
//    not the same link) pops and goes to the RAS top; any other indirect
//    jump keeps what the fetch stage chose (a jump-BTB target or pc+4): the
//    frontend is not stalled. A call (rd a link register) pushes pc+4.
//    Push/pop follow the RISC-V calling-convention hint table.
//  * Conditional branch: if the fetch stage hit the branch BTB, its
//    BATAGE-directed choice stands; otherwise, if BATAGE's provider was a
//    tagged bank, BATAGE's direction is used; otherwise backward branches
//    (negative offset) are predicted taken and forward ones not taken.
//  * Anything else: pc+4, which also undoes any stale fetch redirect.
//
// Every control transfer appends one bit to the global history: its
// predicted direction, 1 for jumps. next_pc differing from the fetch
// stage's choice is a decode-stage redirect (one lost cycle).
module static_predictor
  import rv_pkg::*;
(
  input  logic [31:0]  pc,
  input  decoded_t     d,
  input  fetch_pred_t  fp,
  input  logic [31:0]  ras_top,
  output logic [31:0]  next_pc,
  output logic         ras_push,
  output logic         ras_pop,
  output logic [31:0]  push_addr,
  output logic         hist_push,
  output logic         hist_bit,
  output logic         used_static_branch,  // backward/forward rule decided
  output logic         used_batage_tagged   // BATAGE tagged provider decided
);
  logic [31:0] seq, tgt;
  logic        rd_link, rs1_link, pred_taken;

  always_comb begin
    seq       = pc + 32'd4;
    tgt       = pc + d.imm;
    push_addr = seq;
    rd_link   = is_link(d.rd);
    rs1_link  = is_link(d.rs1);
    next_pc   = seq;
    ras_push  = 1'b0;
    ras_pop   = 1'b0;
    hist_push = 1'b0;
    hist_bit  = 1'b1;
    pred_taken = 1'b0;
    used_static_branch = 1'b0;
    used_batage_tagged = 1'b0;
    if (d.is_jal) begin
      next_pc   = tgt;
      ras_push  = rd_link;
      hist_push = 1'b1;
    end else if (d.is_jalr) begin
      ras_push  = rd_link;
      ras_pop   = rs1_link && (!rd_link || d.rd != d.rs1);
      next_pc   = ras_pop ? ras_top : fp.next_pc;
      hist_push = 1'b1;
    end else if (d.is_branch) begin
      if (fp.bbtb_hit) begin
        pred_taken = (fp.next_pc != seq);
      end else if (fp.bat_tagged) begin
        pred_taken = fp.bat_taken;
        used_batage_tagged = 1'b1;
      end else begin
        pred_taken = d.imm[31];
        used_static_branch = 1'b1;
      end
      next_pc   = pred_taken ? tgt : seq;
      hist_push = 1'b1;
      hist_bit  = pred_taken;
    end
  end
endmodule
