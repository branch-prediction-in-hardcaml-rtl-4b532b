// cpu_top: in-order, scalar RV32IM processor with a four-stage pipeline
// and a layered branch prediction frontend.
//
// Stages
//   F  fetch      the fetch address goes to the instruction SRAM and, in the
//                 same cycle, to the jump BTB, the branch BTB and BATAGE,
//                 which choose the next fetch address (jump target, RAS top
//                 for a return, BATAGE-directed branch target, or pc+4).
//   D  decode     the SRAM word arrives; decode and register read are one
//                 stage (RISC-V keeps rs1/rs2 in fixed bits). The static
//                 predictor corrects the fetch choice where decode knows
//                 better (one lost cycle), pushes/pops the RAS and appends
//                 the predicted direction to the global history.
//   E  execute    ALU, multiplier, iterative divider (stalls F/D/E while
//                 busy), data memory/UART access, and branch verification:
//                 a wrong next PC redirects the fetch address in the same
//                 cycle and squashes the instruction in D (one-cycle
//                 penalty); the RAS pointer and the history write pointer
//                 are restored from values the instruction carried.
//   W  writeback  load data arrives (synchronous SRAM), the register file is
//                 written, and the instruction retires: BATAGE is trained,
//                 taken branches and jumps missing from the BTBs are
//                 inserted. W results are forwarded to E, so there are no
//                 load-use stalls.
//
// Memory map (data side): 0x1000_0000-0x1FFF_FFFF UART (see uart), any
// other address the data SRAM (address bits above its size ignored). The
// instruction SRAM is separate (Harvard) and is filled through the prog_*
// port, normally while rst is high; prog_dmem selects the data SRAM
// instead. Reset starts fetching at RESET_PC. The retire_* outputs report
// every retiring instruction (trace port).
//
// Follows the source design description: 4 stages with decode and register read combined,
// single-cycle SRAMs, memory-mapped UART, verification in execute with a
// one-cycle recovery penalty, decode-stage static prediction and RAS
// update, pointer-only RAS and history recovery, partitioned BTB filled at
// retirement with taken branches only, BATAGE in fetch and (on BTB miss,
// tagged provider) in decode. All sizes, the memory map, the trace and
// program-load ports, and the divider are this design's choices.
module cpu_top
  import rv_pkg::*;
#(
  parameter int unsigned IMEM_WORDS        = 16384,
  parameter int unsigned DMEM_WORDS        = 16384,
  parameter int unsigned RAS_DEPTH         = 16,
  parameter int unsigned JBTB_ENTRIES      = 64,
  parameter int unsigned BBTB_ENTRIES      = 64,
  parameter int unsigned BAT_BASE_ENTRIES  = 1024,
  parameter int unsigned BAT_NUM_BANKS     = 4,
  parameter int unsigned BAT_BANK_ENTRIES  = 256,
  parameter int unsigned BAT_TAG_BITS      = 8,
  parameter int unsigned BAT_MIN_HIST      = 4,
  parameter int unsigned GHIST_SIZE        = 64,
  parameter int unsigned UART_CLKS_PER_BIT = 434,
  parameter logic [31:0] RESET_PC          = 32'h0
) (
  input  logic        clk,
  input  logic        rst,
  // program load
  input  logic        prog_we,
  input  logic        prog_dmem,
  input  logic [31:0] prog_addr,     // byte address
  input  logic [31:0] prog_wdata,
  // UART pins
  output logic        uart_tx,
  input  logic        uart_rx,
  // retirement trace
  output logic        retire_valid,
  output logic [31:0] retire_pc,
  output logic [31:0] retire_instr,
  output logic        retire_rd_we,
  output logic [4:0]  retire_rd,
  output logic [31:0] retire_wdata
);
  localparam int unsigned IAW = $clog2(IMEM_WORDS);
  localparam int unsigned DAW = $clog2(DMEM_WORDS);
  localparam int unsigned RPW = $clog2(RAS_DEPTH);
  localparam int unsigned GPW = $clog2(GHIST_SIZE);
  localparam int unsigned H   = BAT_MIN_HIST << (BAT_NUM_BANKS - 1);
  localparam int unsigned PVW = $clog2(BAT_NUM_BANKS + 1);

  // ------------------------------------------------------------ signals
  logic        stall;
  logic        ex_redirect;
  logic [31:0] ex_actual_next;
  logic        id_redirect;
  logic [31:0] id_next;

  // ============================================================== FETCH
  logic [31:0] pc_f, fetch_addr, fetch_next, fetch_seq;
  logic        jb_hit, jb_is_ret, bb_hit, bat_taken, bat_tagged;
  logic [31:0] jb_target, bb_target, ras_top;
  logic [PVW-1:0] bat_provider;
  logic [GPW-1:0] gh_wptr, gh_wptr_eff;
  logic [H-1:0]   gh_hist_f, gh_hist_u;

  assign fetch_addr = ex_redirect ? ex_actual_next : pc_f;
  assign fetch_seq  = fetch_addr + 32'd4;

  always_comb begin
    if (jb_hit)       fetch_next = jb_is_ret ? ras_top : jb_target;
    else if (bb_hit)  fetch_next = bat_taken ? bb_target : fetch_seq;
    else              fetch_next = fetch_seq;
  end

  // instruction memory
  logic [31:0] imem_rdata;
  logic [IAW-1:0] imem_addr;
  assign imem_addr = (prog_we && !prog_dmem) ? prog_addr[IAW+1:2] : fetch_addr[IAW+1:2];
  sram #(.WORDS(IMEM_WORDS)) u_imem (
    .clk, .addr(imem_addr), .we(prog_we && !prog_dmem), .be(4'hF),
    .wdata(prog_wdata), .rdata(imem_rdata));

  // retirement-side signals used by the predictors (driven in W)
  logic        wb_valid;
  logic [31:0] wb_pc;
  logic        ret_branch, ret_taken, ret_jump, ret_is_ret;
  logic [31:0] ret_target;
  logic [11:0] ret_offset;
  logic        ret_jb_hit, ret_bb_hit;
  logic [GPW-1:0] ret_ghp;
  logic [31:0] rnd [5];
  logic        bat_alloc, bat_u_mispred;

  jump_btb #(.ENTRIES(JBTB_ENTRIES)) u_jbtb (
    .clk, .rst, .lookup_pc(fetch_addr), .hit(jb_hit), .is_ret(jb_is_ret),
    .target(jb_target),
    .ins_valid(wb_valid && ret_jump && !ret_jb_hit), .ins_pc(wb_pc),
    .ins_is_ret(ret_is_ret), .ins_target(ret_target));

  branch_btb #(.ENTRIES(BBTB_ENTRIES)) u_bbtb (
    .clk, .rst, .lookup_pc(fetch_addr), .hit(bb_hit), .target(bb_target),
    .ins_valid(wb_valid && ret_branch && ret_taken && !ret_bb_hit),
    .ins_pc(wb_pc), .ins_offset(ret_offset));

  batage #(.BASE_ENTRIES(BAT_BASE_ENTRIES), .NUM_BANKS(BAT_NUM_BANKS),
           .BANK_ENTRIES(BAT_BANK_ENTRIES), .TAG_BITS(BAT_TAG_BITS),
           .MIN_HIST(BAT_MIN_HIST)) u_batage (
    .clk, .rst,
    .f_pc(fetch_addr), .f_hist(gh_hist_f), .f_taken(bat_taken),
    .f_tagged(bat_tagged), .f_provider(bat_provider),
    .u_valid(wb_valid && ret_branch), .u_pc(wb_pc), .u_hist(gh_hist_u),
    .u_taken(ret_taken), .rnd, .u_alloc(bat_alloc), .u_mispred(bat_u_mispred));

  xorshift_prng u_prng (.clk, .rst, .en(wb_valid && ret_branch), .rnd);

  // ======================================================== FETCH -> D
  logic        id_valid;
  logic [31:0] id_pc;
  fetch_pred_t id_fp;
  logic [GPW-1:0] id_ghp;
  logic        id_use_hold;
  logic [31:0] id_hold, id_instr;

  assign id_instr = id_use_hold ? id_hold : imem_rdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      pc_f        <= RESET_PC;
      id_valid    <= 1'b0;
      id_pc       <= '0;
      id_fp       <= '0;
      id_ghp      <= '0;
      id_use_hold <= 1'b0;
      id_hold     <= '0;
    end else begin
      id_use_hold <= stall;
      id_hold     <= id_instr;
      if (!stall) begin
        pc_f     <= id_redirect ? id_next : fetch_next;
        id_valid <= !id_redirect;
        id_pc    <= fetch_addr;
        id_fp    <= '{next_pc: fetch_next, jbtb_hit: jb_hit, bbtb_hit: bb_hit,
                      bat_taken: bat_taken, bat_tagged: bat_tagged};
        id_ghp   <= gh_wptr_eff;
      end
    end
  end

  // ============================================================= DECODE
  decoded_t id_d;
  logic     sp_push, sp_pop, sp_hist_push, sp_hist_bit;
  logic     sp_static, sp_batage;
  logic [31:0] sp_push_addr;
  logic     id_act;
  logic [RPW-1:0] ras_ptr, ras_ptr_next;
  logic     ras_overflow;

  decoder u_dec (.instr(id_instr), .d(id_d));

  static_predictor u_sp (
    .pc(id_pc), .d(id_d), .fp(id_fp), .ras_top, .next_pc(id_next),
    .ras_push(sp_push), .ras_pop(sp_pop), .push_addr(sp_push_addr),
    .hist_push(sp_hist_push), .hist_bit(sp_hist_bit),
    .used_static_branch(sp_static), .used_batage_tagged(sp_batage));

  assign id_act      = id_valid && !stall;
  assign id_redirect = id_act && !ex_redirect && (id_next != id_fp.next_pc);

  // EX-stage values needed for recovery
  logic        ex_valid;
  decoded_t    ex_d;
  logic [RPW-1:0] ex_ras_ptr;
  logic [GPW-1:0] ex_hist_slot;
  logic        ex_hist_pushed;
  logic        ex_taken;

  ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst, .push(id_act && sp_push), .pop(id_act && sp_pop),
    .push_addr(sp_push_addr), .restore(ex_redirect), .restore_ptr(ex_ras_ptr),
    .top(ras_top), .ptr(ras_ptr), .ptr_next(ras_ptr_next), .overflow(ras_overflow));

  global_history #(.SIZE(GHIST_SIZE), .H(H)) u_ghist (
    .clk, .rst,
    .push(id_act && !ex_redirect && sp_hist_push), .push_bit(sp_hist_bit),
    .restore(ex_redirect && ex_hist_pushed), .restore_slot(ex_hist_slot),
    .restore_bit(ex_taken),
    .wptr(gh_wptr), .wptr_eff(gh_wptr_eff),
    .rd_ptr_a(gh_wptr_eff), .hist_a(gh_hist_f),
    .rd_ptr_b(ret_ghp), .hist_b(gh_hist_u));

  // register file
  logic [31:0] rf_rd1, rf_rd2;
  logic        wb_rd_we;
  logic [4:0]  wb_rd;
  logic [31:0] wb_result;

  regfile u_rf (.clk, .rst, .ra1(id_d.rs1), .ra2(id_d.rs2), .rd1(rf_rd1), .rd2(rf_rd2),
                .we(wb_valid && wb_rd_we), .wa(wb_rd), .wd(wb_result));

  // ========================================================== D -> EX
  logic [31:0] ex_pc, ex_instr, ex_a_q, ex_b_q, ex_pred_next;
  logic        ex_jb_hit, ex_bb_hit;
  logic [GPW-1:0] ex_ghp;

  always_ff @(posedge clk) begin
    if (rst) begin
      ex_valid <= 1'b0;
      ex_pc <= '0; ex_instr <= '0; ex_d <= '0; ex_a_q <= '0; ex_b_q <= '0;
      ex_pred_next <= '0; ex_ras_ptr <= '0; ex_hist_slot <= '0;
      ex_hist_pushed <= 1'b0; ex_jb_hit <= 1'b0; ex_bb_hit <= 1'b0; ex_ghp <= '0;
    end else if (!stall) begin
      ex_valid       <= id_valid && !ex_redirect;
      ex_pc          <= id_pc;
      ex_instr       <= id_instr;
      ex_d           <= id_d;
      ex_a_q         <= rf_rd1;
      ex_b_q         <= rf_rd2;
      ex_pred_next   <= id_next;
      ex_ras_ptr     <= ras_ptr_next;
      ex_hist_slot   <= gh_wptr;
      ex_hist_pushed <= sp_hist_push;
      ex_jb_hit      <= id_fp.jbtb_hit;
      ex_bb_hit      <= id_fp.bbtb_hit;
      ex_ghp         <= id_ghp;
    end
  end

  // ============================================================ EXECUTE
  logic [31:0] ex_a, ex_b, alu_y, mul_y, div_y, ex_res;
  logic        div_busy, div_done, div_start;
  logic        ex_mem, ex_uart_sel;
  logic [31:0] ex_addr;

  // forwarding from writeback
  assign ex_a = (wb_valid && wb_rd_we && wb_rd == ex_d.rs1) ? wb_result : ex_a_q;
  assign ex_b = (wb_valid && wb_rd_we && wb_rd == ex_d.rs2) ? wb_result : ex_b_q;

  alu u_alu (.op(ex_d.alu_op), .a(ex_d.alu_a_pc ? ex_pc : ex_a),
             .b(ex_d.alu_b_imm ? ex_d.imm : ex_b), .y(alu_y));
  multiplier u_mul (.op(ex_d.mul_op), .a(ex_a), .b(ex_b), .y(mul_y));

  assign div_start = ex_valid && (ex_d.res_sel == RES_DIV);
  divider u_div (.clk, .rst, .start(div_start), .op(ex_d.div_op), .a(ex_a), .b(ex_b),
                 .busy(div_busy), .done(div_done), .y(div_y));
  assign stall = div_start && !div_done;

  branch_unit u_bu (.valid(ex_valid), .pc(ex_pc), .d(ex_d), .a(ex_a), .b(ex_b),
                    .pred_next(ex_pred_next), .taken(ex_taken),
                    .actual_next(ex_actual_next), .mispredict(ex_redirect));

  always_comb begin
    unique case (ex_d.res_sel)
      RES_MUL:  ex_res = mul_y;
      RES_DIV:  ex_res = div_y;
      RES_LINK: ex_res = ex_pc + 32'd4;
      default:  ex_res = alu_y;
    endcase
  end

  // data memory and UART access
  logic [3:0]  st_be;
  logic [31:0] st_data;
  logic [31:0] dmem_rdata, uart_rdata;
  logic        uart_tx_start, uart_rx_done;
  logic [DAW-1:0] dmem_addr;

  assign ex_addr     = alu_y;
  assign ex_mem      = ex_valid && (ex_d.is_load || ex_d.is_store);
  assign ex_uart_sel = (ex_addr[31:28] == 4'h1);

  always_comb begin
    unique case (ex_d.funct3[1:0])
      2'b00:   begin st_data = {4{ex_b[7:0]}};  st_be = 4'b0001 << ex_addr[1:0]; end
      2'b01:   begin st_data = {2{ex_b[15:0]}}; st_be = ex_addr[1] ? 4'b1100 : 4'b0011; end
      default: begin st_data = ex_b;            st_be = 4'b1111; end
    endcase
  end

  assign dmem_addr = (prog_we && prog_dmem) ? prog_addr[DAW+1:2] : ex_addr[DAW+1:2];
  sram #(.WORDS(DMEM_WORDS)) u_dmem (
    .clk, .addr(dmem_addr),
    .we((prog_we && prog_dmem) || (ex_mem && ex_d.is_store && !ex_uart_sel)),
    .be((prog_we && prog_dmem) ? 4'hF : st_be),
    .wdata((prog_we && prog_dmem) ? prog_wdata : st_data), .rdata(dmem_rdata));

  uart #(.CLKS_PER_BIT(UART_CLKS_PER_BIT)) u_uart (
    .clk, .rst, .req(ex_mem && ex_uart_sel), .we(ex_d.is_store), .addr(ex_addr[2]),
    .wdata(ex_b[7:0]), .rdata(uart_rdata), .tx(uart_tx), .rx(uart_rx),
    .tx_start(uart_tx_start), .rx_done(uart_rx_done));

  // ========================================================== EX -> WB
  logic [31:0] wb_instr, wb_res;
  logic        wb_is_load, wb_uart;
  logic [2:0]  wb_funct3;
  logic [1:0]  wb_addr_lo;

  always_ff @(posedge clk) begin
    if (rst) begin
      wb_valid <= 1'b0; wb_pc <= '0; wb_instr <= '0; wb_rd_we <= 1'b0; wb_rd <= '0;
      wb_res <= '0; wb_is_load <= 1'b0; wb_uart <= 1'b0; wb_funct3 <= '0; wb_addr_lo <= '0;
      ret_branch <= 1'b0; ret_taken <= 1'b0; ret_jump <= 1'b0; ret_is_ret <= 1'b0;
      ret_target <= '0; ret_offset <= '0; ret_jb_hit <= 1'b0; ret_bb_hit <= 1'b0;
      ret_ghp <= '0;
    end else begin
      wb_valid   <= ex_valid && !stall;
      wb_pc      <= ex_pc;
      wb_instr   <= ex_instr;
      wb_rd_we   <= ex_d.rd_we;
      wb_rd      <= ex_d.rd;
      wb_res     <= ex_res;
      wb_is_load <= ex_d.is_load;
      wb_uart    <= ex_uart_sel;
      wb_funct3  <= ex_d.funct3;
      wb_addr_lo <= ex_addr[1:0];
      ret_branch <= ex_d.is_branch;
      ret_taken  <= ex_taken;
      ret_jump   <= ex_d.is_jal || ex_d.is_jalr;
      ret_is_ret <= ex_d.is_jalr && is_link(ex_d.rs1) && (!is_link(ex_d.rd) || ex_d.rd != ex_d.rs1);
      ret_target <= ex_actual_next;
      ret_offset <= ex_d.imm[12:1];
      ret_jb_hit <= ex_jb_hit;
      ret_bb_hit <= ex_bb_hit;
      ret_ghp    <= ex_ghp;
    end
  end

  // ========================================================== WRITEBACK
  logic [31:0] ld_raw, ld_sh;
  always_comb begin
    ld_raw = wb_uart ? uart_rdata : dmem_rdata;
    ld_sh  = ld_raw >> (8 * wb_addr_lo);
    unique case (wb_funct3)
      3'b000:  wb_result = {{24{ld_sh[7]}}, ld_sh[7:0]};
      3'b001:  wb_result = {{16{ld_sh[15]}}, ld_sh[15:0]};
      3'b100:  wb_result = {24'd0, ld_sh[7:0]};
      3'b101:  wb_result = {16'd0, ld_sh[15:0]};
      default: wb_result = ld_sh;
    endcase
    if (!wb_is_load) wb_result = wb_res;
  end

  assign retire_valid = wb_valid;
  assign retire_pc    = wb_pc;
  assign retire_instr = wb_instr;
  assign retire_rd_we = wb_rd_we;
  assign retire_rd    = wb_rd;
  assign retire_wdata = wb_result;

  // The divider only stalls; a redirect never coincides with a stall.
  a_no_redirect_in_stall: assert property (@(posedge clk) disable iff (rst)
    !(stall && ex_redirect));
endmodule
