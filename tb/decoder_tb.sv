// Self-checking testbench for decoder: instructions encoded with the
// testbench assembler (random registers and immediates) are pushed through
// the decode stage, and the micro-op's unit, operation, source and
// destination registers, immediate and link flag are compared with the
// values expected from the MIPS32 R6 definition of each instruction. Also
// checks the handshake (hold while out_ready is low), flush, that writes to
// register 0 are dropped and that unsupported words become no-unit micro-ops.
module decoder_tb;
  import lagarto_pkg::*;
  import mips_asm_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  fetch_entry_t in_entry;
  uop_t out_uop;
  int checks = 0, failures = 0;

  decoder dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic reg_ref_t g(input logic [4:0] i); return (i == 0) ? '{en: 1, fp: 0, idx: 0} : '{en: 1, fp: 0, idx: i}; endfunction
  function automatic reg_ref_t f(input logic [4:0] i); return '{en: 1, fp: 1, idx: i}; endfunction
  function automatic reg_ref_t gd(input logic [4:0] i); return (i == 0) ? '0 : '{en: 1, fp: 0, idx: i}; endfunction
  localparam reg_ref_t NO = '0;

  logic exp_acc = 1'b0;   // only the fused multiply-adds read their destination

  task automatic dec(input string name, input logic [31:0] ins, input unit_e unit, input logic [4:0] op,
                     input reg_ref_t s1, input reg_ref_t s2, input reg_ref_t d,
                     input logic chk_imm, input logic [31:0] imm, input logic link);
    logic [31:0] pc;
    pc = {$urandom, 2'b00};
    @(negedge clk);
    in_valid = 1; in_entry = '{pc: pc, instr: ins, pred_taken: 1'b1, pred_target: 32'h1234};
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!(out_valid && out_uop.unit == unit && out_uop.pc == pc && out_uop.pred_taken &&
          out_uop.pred_target == 32'h1234 &&
          (unit == U_NONE || (out_uop.op == op && out_uop.s1 == s1 && out_uop.s2 == s2 &&
           out_uop.d == d && (!chk_imm || out_uop.imm == imm) && out_uop.link == link &&
           out_uop.acc == exp_acc)))) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: unit %s op %0d s1 %p s2 %p d %p imm %h link %b", name, out_uop.unit.name(),
                 out_uop.op, out_uop.s1, out_uop.s2, out_uop.d, out_uop.imm, out_uop.link);
    end
  endtask

  initial begin
    logic [4:0] rs, rt, rd, sa;
    int imm;
    logic [31:0] sx, zx;
    in_entry = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      rs = 5'($urandom % 31 + 1); rt = 5'($urandom % 31 + 1); rd = 5'($urandom % 31 + 1); sa = $urandom;
      if (rs == rt) rt = (rt == 31) ? 1 : rt + 1;
      imm = int'($urandom % 65536);
      sx = {{16{imm[15]}}, imm[15:0]}; zx = {16'd0, imm[15:0]};
      dec("addu", addu(rd, rs, rt), U_ALU, ALU_ADD, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("subu", subu(rd, rs, rt), U_ALU, ALU_SUB, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("and",  and_(rd, rs, rt), U_ALU, ALU_AND, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("nor",  nor_(rd, rs, rt), U_ALU, ALU_NOR, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("sltu", sltu(rd, rs, rt), U_ALU, ALU_SLTU, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("sll",  sll(rd, rt, sa), U_ALU, ALU_SLL, g(rt), NO, gd(rd), 1, {27'd0, sa}, 0);
      dec("sra",  sra(rd, rt, sa), U_ALU, ALU_SRA, g(rt), NO, gd(rd), 1, {27'd0, sa}, 0);
      dec("sllv", sllv(rd, rt, rs), U_ALU, ALU_SLL, g(rt), g(rs), gd(rd), 0, 0, 0);
      dec("mul",  mul(rd, rs, rt), U_ALU, ALU_MUL, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("muh",  muh(rd, rs, rt), U_ALU, ALU_MUH, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("mulu", mulu(rd, rs, rt), U_ALU, ALU_MULU, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("seleqz", seleqz(rd, rs, rt), U_ALU, ALU_SELEQZ, g(rs), g(rt), gd(rd), 0, 0, 0);
      dec("addiu", addiu(rt, rs, imm), U_ALU, ALU_ADD, g(rs), NO, gd(rt), 1, sx, 0);
      dec("slti",  slti(rt, rs, imm), U_ALU, ALU_SLT, g(rs), NO, gd(rt), 1, sx, 0);
      dec("andi",  andi(rt, rs, imm), U_ALU, ALU_AND, g(rs), NO, gd(rt), 1, zx, 0);
      dec("ori",   ori(rt, rs, imm), U_ALU, ALU_OR, g(rs), NO, gd(rt), 1, zx, 0);
      dec("aui",   aui(rt, rs, imm), U_ALU, ALU_ADD, g(rs), NO, gd(rt), 1, {imm[15:0], 16'd0}, 0);
      dec("lw",   lw(rt, imm, rs), U_LSU, LS_LW, g(rs), NO, gd(rt), 1, sx, 0);
      dec("lb",   lb(rt, imm, rs), U_LSU, LS_LB, g(rs), NO, gd(rt), 1, sx, 0);
      dec("lhu",  lhu(rt, imm, rs), U_LSU, LS_LHU, g(rs), NO, gd(rt), 1, sx, 0);
      dec("sw",   sw(rt, imm, rs), U_LSU, LS_SW, g(rs), g(rt), NO, 1, sx, 0);
      dec("sb",   sb(rt, imm, rs), U_LSU, LS_SB, g(rs), g(rt), NO, 1, sx, 0);
      dec("lwc1", lwc1(rt, imm, rs), U_LSU, LS_LW, g(rs), NO, f(rt), 1, sx, 0);
      dec("swc1", swc1(rt, imm, rs), U_LSU, LS_SW, g(rs), f(rt), NO, 1, sx, 0);
      dec("bc",   bc(imm - 32768), U_BR, BR_ALWAYS, NO, NO, NO, 1, 32'((imm - 32768) * 4), 0);
      dec("balc", balc(imm), U_BR, BR_ALWAYS, NO, NO, gd(31), 1, 32'(imm * 4), 1);
      dec("beqzc", beqzc(rs, imm), U_BR, BR_EQ, g(rs), g(0), NO, 1, 32'(imm * 4), 0);
      dec("bnezc", bnezc(rs, imm - 32768), U_BR, BR_NE, g(rs), g(0), NO, 1, 32'((imm - 32768) * 4), 0);
      dec("jic",   jic(rt, imm), U_BR, BR_JIC, g(rt), NO, NO, 1, sx, 0);
      dec("jialc", jialc(rt, imm), U_BR, BR_JIC, g(rt), NO, gd(31), 1, sx, 1);
      dec("beqc",  beqc(rs < rt ? rs : rt, rs < rt ? rt : rs, imm), U_BR, BR_EQ,
          g(rs < rt ? rs : rt), g(rs < rt ? rt : rs), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bnec",  bnec(rs < rt ? rs : rt, rs < rt ? rt : rs, imm), U_BR, BR_NE,
          g(rs < rt ? rs : rt), g(rs < rt ? rt : rs), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bltc",  bltc(rs, rt, imm), U_BR, BR_LT, g(rs), g(rt), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bgec",  bgec(rs, rt, imm), U_BR, BR_GE, g(rs), g(rt), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bltuc", bltuc(rs, rt, imm), U_BR, BR_LTU, g(rs), g(rt), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bgeuc", bgeuc(rs, rt, imm), U_BR, BR_GEU, g(rs), g(rt), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("blezc", blezc(rt, imm), U_BR, BR_GE, g(0), g(rt), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bgtzc", bgtzc(rt, imm), U_BR, BR_LT, g(0), g(rt), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bgezc", bgezc(rt, imm), U_BR, BR_GE, g(rt), g(0), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("bltzc", bltzc(rt, imm), U_BR, BR_LT, g(rt), g(0), NO, 1, {sx[29:0], 2'b00}, 0);
      dec("mfc1",  mfc1(rt, rd), U_ALU, ALU_PASSA, f(rd), NO, gd(rt), 0, 0, 0);
      dec("mtc1",  mtc1(rt, rd), U_FPS, FPS_MTC1, g(rt), NO, f(rd), 0, 0, 0);
      dec("add.s", add_s(sa, rd, rt), U_FP4, FP4_ADD, f(rd), f(rt), f(sa), 0, 0, 0);
      dec("sub.s", sub_s(sa, rd, rt), U_FP4, FP4_SUB, f(rd), f(rt), f(sa), 0, 0, 0);
      dec("mul.s", mul_s(sa, rd, rt), U_FP4, FP4_MUL, f(rd), f(rt), f(sa), 0, 0, 0);
      exp_acc = 1'b1;
      dec("maddf.s", maddf_s(sa, rd, rt), U_FP4, FP4_MADDF, f(rd), f(rt), f(sa), 0, 0, 0);
      dec("msubf.s", msubf_s(sa, rd, rt), U_FP4, FP4_MSUBF, f(rd), f(rt), f(sa), 0, 0, 0);
      exp_acc = 1'b0;
      dec("div.s", div_s(sa, rd, rt), U_FP12, FP12_DIV, f(rd), f(rt), f(sa), 0, 0, 0);
      dec("sqrt.s", sqrt_s(sa, rd), U_FP12, FP12_SQRT, f(rd), NO, f(sa), 0, 0, 0);
      dec("abs.s", abs_s(sa, rd), U_FPS, FPS_ABS, f(rd), NO, f(sa), 0, 0, 0);
      dec("neg.s", neg_s(sa, rd), U_FPS, FPS_NEG, f(rd), NO, f(sa), 0, 0, 0);
      dec("cvt.s.w", cvt_s_w(sa, rd), U_FP4, FP4_CVT_S_W, f(rd), NO, f(sa), 0, 0, 0);
      dec("cvt.w.s", cvt_w_s(sa, rd), U_FP4, FP4_CVT_W_S, f(rd), NO, f(sa), 0, 0, 0);
      dec("trunc.w.s", trunc_w_s(sa, rd), U_FP4, FP4_TRUNC_W_S, f(rd), NO, f(sa), 0, 0, 0);
      dec("cmp.lt.s", cmp_lt_s(sa, rd, rt), U_FPS, FPS_CMP_LT, f(rd), f(rt), f(sa), 0, 0, 0);
      dec("cmp.eq.s", cmp_eq_s(sa, rd, rt), U_FPS, FPS_CMP_EQ, f(rd), f(rt), f(sa), 0, 0, 0);
      dec("cmp.le.s", cmp_le_s(sa, rd, rt), U_FPS, FPS_CMP_LE, f(rd), f(rt), f(sa), 0, 0, 0);
    end
    dec("addu to r0", addu(0, 1, 2), U_ALU, ALU_ADD, g(1), g(2), NO, 0, 0, 0);
    dec("nop", nop(), U_ALU, ALU_SLL, g(0), NO, NO, 1, 0, 0);
    dec("reserved", 32'hFC00_0000, U_NONE, 0, NO, NO, NO, 0, 0, 0);
    dec("beq (delay slot)", {6'b000100, 26'h0}, U_NONE, 0, NO, NO, NO, 0, 0, 0);
    // hold while downstream is not ready, then flush
    @(negedge clk);
    in_valid = 1; in_entry.instr = addiu(3, 4, 7); out_ready = 0;
    @(negedge clk);
    in_entry.instr = addiu(5, 6, 8);
    checks++; if (in_ready || !out_valid || out_uop.d.idx != 3) failures++;
    @(negedge clk);
    checks++; if (!out_valid || out_uop.d.idx != 3) failures++;   // still the first
    flush = 1; in_valid = 0;
    @(negedge clk);
    flush = 0;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
