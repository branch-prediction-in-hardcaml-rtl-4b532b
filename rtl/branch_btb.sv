// branch_btb: the conditional-branch half of the partitioned branch target
// buffer. Because a branch target is PC-relative with a 13-bit immediate
// whose low bit is zero, an entry stores only the 12-bit offset imm[12:1];
// the fetch stage adds it to the PC. Looked up combinationally with the
// fetch PC; a hit tells the fetch stage to consult the direction predictor.
// Only taken branches are inserted, and only at retirement. Direct mapped
// on PC[IW+1:2] with the remaining PC bits as tag; ENTRIES and the
// organisation are this design's choice.
module branch_btb #(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IW = $clog2(ENTRIES),
  localparam int unsigned TW = 30 - IW
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] lookup_pc,
  output logic        hit,
  output logic [31:0] target,
  input  logic        ins_valid,
  input  logic [31:0] ins_pc,
  input  logic [11:0] ins_offset   // branch immediate bits [12:1]
);
  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
    logic [11:0]   offset;
  } entry_t;

  entry_t table_q [ENTRIES];
  entry_t e;

  always_comb begin
    e      = table_q[lookup_pc[IW+1:2]];
    hit    = e.valid && (e.tag == lookup_pc[31:IW+2]);
    target = lookup_pc + {{19{e.offset[11]}}, e.offset, 1'b0};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < ENTRIES; i++) table_q[i] <= '0;
    end else if (ins_valid) begin
      table_q[ins_pc[IW+1:2]] <= '{valid: 1'b1, tag: ins_pc[31:IW+2], offset: ins_offset};
    end
  end
endmodule
