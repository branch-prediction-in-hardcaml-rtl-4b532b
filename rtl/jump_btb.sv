// jump_btb: the jump half of the partitioned branch target buffer, looked
// up with the fetch PC in the same cycle (combinational read). A hit means
// the instruction at that PC is a known jump: either a return, for which
// the fetch stage takes the return address stack's top, or another jump
// whose full 32-bit target is stored. Entries are written only at
// retirement (ins_valid) and never updated afterwards, since nothing
// dynamic is stored. Direct mapped on PC[IW+1:2] with the remaining PC bits
// as tag; ENTRIES and the organisation are this design's choice.
module jump_btb #(
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned IW = $clog2(ENTRIES),
  localparam int unsigned TW = 30 - IW
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] lookup_pc,
  output logic        hit,
  output logic        is_ret,
  output logic [31:0] target,
  input  logic        ins_valid,
  input  logic [31:0] ins_pc,
  input  logic        ins_is_ret,
  input  logic [31:0] ins_target
);
  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
    logic          is_ret;
    logic [31:0]   target;
  } entry_t;

  entry_t table_q [ENTRIES];
  entry_t e;

  always_comb begin
    e      = table_q[lookup_pc[IW+1:2]];
    hit    = e.valid && (e.tag == lookup_pc[31:IW+2]);
    is_ret = e.is_ret;
    target = e.target;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < ENTRIES; i++) table_q[i] <= '0;
    end else if (ins_valid) begin
      table_q[ins_pc[IW+1:2]] <= '{valid: 1'b1, tag: ins_pc[31:IW+2],
                                   is_ret: ins_is_ret, target: ins_target};
    end
  end
endmodule
