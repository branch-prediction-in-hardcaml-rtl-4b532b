// rv_model_pkg: testbench helpers for the processor: RV32IM instruction
// encoders (a tiny assembler) and an instruction-set model that executes one
// instruction per call, used as the independent reference the retirement
// trace is compared with.
package rv_model_pkg;

  // ----------------------------------------------------------- encoders
  function automatic logic [31:0] enc_r(int f7, int rs2, int rs1, int f3, int rd, int op);
    return {7'(f7), 5'(rs2), 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] enc_i(int imm, int rs1, int f3, int rd, int op);
    logic [11:0] i = 12'(imm);
    return {i, 5'(rs1), 3'(f3), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] enc_s(int imm, int rs2, int rs1, int f3);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:0], 7'b0100011};
  endfunction
  function automatic logic [31:0] enc_b(int off, int rs2, int rs1, int f3);
    logic [12:0] i = 13'(off);
    return {i[12], i[10:5], 5'(rs2), 5'(rs1), 3'(f3), i[4:1], i[11], 7'b1100011};
  endfunction
  function automatic logic [31:0] enc_u(int imm20, int rd, int op);
    return {20'(imm20), 5'(rd), 7'(op)};
  endfunction
  function automatic logic [31:0] enc_j(int off, int rd);
    logic [20:0] i = 21'(off);
    return {i[20], i[10:1], i[11], i[19:12], 5'(rd), 7'b1101111};
  endfunction

  localparam logic [31:0] EBREAK = 32'h0010_0073;

  // Program under construction, with simple label patching.
  class asm_t;
    logic [31:0] code [$];
    function int here(); return code.size() * 4; endfunction
    function void emit(logic [31:0] w); code.push_back(w); endfunction
    // register-immediate and register-register ALU
    function void addi(int rd, int rs1, int imm); emit(enc_i(imm, rs1, 0, rd, 7'h13)); endfunction
    function void andi(int rd, int rs1, int imm); emit(enc_i(imm, rs1, 7, rd, 7'h13)); endfunction
    function void opi(int f3, int rd, int rs1, int imm); emit(enc_i(imm, rs1, f3, rd, 7'h13)); endfunction
    function void op(int f7, int f3, int rd, int rs1, int rs2); emit(enc_r(f7, rs2, rs1, f3, rd, 7'h33)); endfunction
    function void li(int rd, logic [31:0] v);
      logic [31:0] hi;
      hi = (v + 32'h800) >> 12;
      emit(enc_u(int'(hi), rd, 7'h37));
      addi(rd, rd, int'($signed(v[11:0])));
    endfunction
    function void lw(int rd, int rs1, int imm, int f3 = 2); emit(enc_i(imm, rs1, f3, rd, 7'h03)); endfunction
    function void sw(int rs2, int rs1, int imm, int f3 = 2); emit(enc_s(imm, rs2, rs1, f3)); endfunction
    function void br(int f3, int rs1, int rs2, int target); emit(enc_b(target - here(), rs2, rs1, f3)); endfunction
    function void jal(int rd, int target); emit(enc_j(target - here(), rd)); endfunction
    function void jalr(int rd, int rs1, int imm); emit(enc_i(imm, rs1, 0, rd, 7'h67)); endfunction
    // forward references: emit a placeholder, patch when the label is known
    function int fwd(); int k = code.size(); emit(32'h0000_0013); return k; endfunction
    function void patch_br(int k, int f3, int rs1, int rs2, int target);
      code[k] = enc_b(target - k * 4, rs2, rs1, f3);
    endfunction
    function void patch_jal(int k, int rd, int target);
      code[k] = enc_j(target - k * 4, rd);
    endfunction
  endclass

  // ---------------------------------------------------- reference model
  class iss_t;
    logic [31:0] x [32];
    logic [31:0] pc;
    logic [31:0] imem [int];
    logic [31:0] dmem [int];
    // results of the last step
    logic        rd_we;
    logic [4:0]  rd;
    logic [31:0] wdata;
    logic        is_uart_load;

    function new();
      foreach (x[i]) x[i] = '0;
      pc = '0;
    endfunction

    static function logic is_uart(logic [31:0] a); return a[31:28] == 4'h1; endfunction

    // Execute one instruction. For UART loads the model cannot know the
    // value, so it takes uart_val (the value the design loaded).
    function void step(logic [31:0] uart_val);
      logic [31:0] ins, a, b, immi, imms, immb, immu, immj, addr, res, npc, w;
      logic [6:0] opc; logic [2:0] f3; logic [6:0] f7;
      logic [63:0] p;
      ins = imem.exists(int'(pc >> 2)) ? imem[int'(pc >> 2)] : 32'h13;
      opc = ins[6:0]; f3 = ins[14:12]; f7 = ins[31:25];
      a = x[ins[19:15]]; b = x[ins[24:20]];
      immi = {{20{ins[31]}}, ins[31:20]};
      imms = {{20{ins[31]}}, ins[31:25], ins[11:7]};
      immb = {{19{ins[31]}}, ins[31], ins[7], ins[30:25], ins[11:8], 1'b0};
      immu = {ins[31:12], 12'd0};
      immj = {{11{ins[31]}}, ins[31], ins[19:12], ins[20], ins[30:21], 1'b0};
      rd = ins[11:7]; rd_we = 1'b0; res = '0; npc = pc + 4; is_uart_load = 1'b0;
      case (opc)
        7'h37: begin rd_we = 1; res = immu; end
        7'h17: begin rd_we = 1; res = pc + immu; end
        7'h6f: begin rd_we = 1; res = pc + 4; npc = pc + immj; end
        7'h67: begin rd_we = 1; res = pc + 4; npc = (a + immi) & ~32'd1; end
        7'h63: begin
          logic t;
          case (f3)
            0: t = a == b; 1: t = a != b; 4: t = $signed(a) < $signed(b);
            5: t = $signed(a) >= $signed(b); 6: t = a < b; 7: t = a >= b; default: t = 0;
          endcase
          if (t) npc = pc + immb;
        end
        7'h03: begin
          rd_we = 1; addr = a + immi;
          if (is_uart(addr)) begin w = uart_val; is_uart_load = 1; end
          else begin
            w = dmem.exists(int'(addr[31:2])) ? dmem[int'(addr[31:2])] : 32'h0;
            w = w >> (8 * addr[1:0]);
          end
          case (f3)
            0: res = {{24{w[7]}}, w[7:0]};   1: res = {{16{w[15]}}, w[15:0]};
            4: res = {24'd0, w[7:0]};        5: res = {16'd0, w[15:0]};
            default: res = w;
          endcase
          if (is_uart(addr)) res = uart_val;
        end
        7'h23: begin
          addr = a + imms;
          if (!is_uart(addr)) begin
            w = dmem.exists(int'(addr[31:2])) ? dmem[int'(addr[31:2])] : 32'h0;
            case (f3)
              0: w[8*addr[1:0] +: 8] = b[7:0];
              1: w[16*addr[1] +: 16] = b[15:0];
              default: w = b;
            endcase
            dmem[int'(addr[31:2])] = w;
          end
        end
        7'h13: begin
          rd_we = 1;
          case (f3)
            0: res = a + immi; 1: res = a << immi[4:0];
            2: res = {31'd0, $signed(a) < $signed(immi)}; 3: res = {31'd0, a < immi};
            4: res = a ^ immi; 5: res = ins[30] ? 32'($signed(a) >>> immi[4:0]) : a >> immi[4:0];
            6: res = a | immi; default: res = a & immi;
          endcase
        end
        7'h33: begin
          rd_we = 1;
          if (f7 == 7'h01) begin
            case (f3)
              0: begin p = 64'($signed(a) * $signed(b)); res = p[31:0]; end
              1: begin p = 64'($signed({{32{a[31]}}, a}) * $signed({{32{b[31]}}, b})); res = p[63:32]; end
              2: begin p = 64'($signed({{32{a[31]}}, a}) * $signed({32'd0, b})); res = p[63:32]; end
              3: begin p = {32'd0, a} * {32'd0, b}; res = p[63:32]; end
              4: res = (b == 0) ? 32'hFFFF_FFFF : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? a : 32'($signed(a) / $signed(b));
              5: res = (b == 0) ? 32'hFFFF_FFFF : a / b;
              6: res = (b == 0) ? a : (a == 32'h8000_0000 && b == 32'hFFFF_FFFF) ? 32'd0 : 32'($signed(a) % $signed(b));
              default: res = (b == 0) ? a : a % b;
            endcase
          end else begin
            case (f3)
              0: res = ins[30] ? a - b : a + b; 1: res = a << b[4:0];
              2: res = {31'd0, $signed(a) < $signed(b)}; 3: res = {31'd0, a < b};
              4: res = a ^ b; 5: res = ins[30] ? 32'($signed(a) >>> b[4:0]) : a >> b[4:0];
              6: res = a | b; default: res = a & b;
            endcase
          end
        end
        default: ;
      endcase
      if (rd == 0) rd_we = 1'b0;
      wdata = res;
      if (rd_we) x[rd] = res;
      pc = npc;
    endfunction
  endclass

endpackage
