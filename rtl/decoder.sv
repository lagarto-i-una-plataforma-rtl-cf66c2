// Decode stage: turns one MIPS32 Release 6 instruction word into a micro-op
// (uop_t) and holds it in the decode pipeline register.
//
// Supported instructions:
//   integer  ADDU/ADD SUBU/SUB AND OR XOR NOR SLT SLTU SLL SRL SRA SLLV SRLV
//            SRAV MUL MUH MULU MUHU SELEQZ SELNEZ ADDIU SLTI SLTIU ANDI ORI
//            XORI AUI (LUI)
//   memory   LB LBU LH LHU LW SB SH SW LWC1 SWC1
//   control  the R6 compact branches BC BALC BEQC BNEC BLTC BGEC BLTUC BGEUC
//            BEQZC BNEZC BLEZC BGEZC BGTZC BLTZC, the *ALC linking forms of
//            the compare-with-zero branches, JIC and JIALC
//   FP       ADD SUB MUL DIV SQRT ABS MOV NEG MADDF MSUBF .S, CVT.S.W, CVT.W.S,
//            TRUNC.W.S, CMP.AF/EQ/LT/LE.S, MFC1, MTC1
// Anything else decodes to a micro-op with no unit, which retires without
// effect (the core has no reserved-instruction exception). ADD/SUB do not
// trap on overflow. Branches with a delay slot are not supported: code must
// be compiled for compact branches only.
//
// Each micro-op names its execution unit, a unit operation code, up to two
// source registers and one destination, each tagged integer or FP. Compare-
// with-zero branches use register 0 as the second operand, so the branch
// unit only needs two-register compares.
//
// Handshake: the stage takes an instruction when in_valid && in_ready, and
// offers it downstream until out_ready. flush empties the stage.
module decoder
  import lagarto_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         in_valid,
  input  fetch_entry_t in_entry,
  output logic         in_ready,
  output logic         out_valid,
  output uop_t         out_uop,
  input  logic         out_ready
);
  uop_t u;

  function automatic reg_ref_t gpr(input logic [4:0] i);
    return '{en: 1'b1, fp: 1'b0, idx: i};
  endfunction
  function automatic reg_ref_t fpr(input logic [4:0] i);
    return '{en: 1'b1, fp: 1'b1, idx: i};
  endfunction

  always_comb begin
    logic [31:0] ins;
    logic [5:0] opc, fn;
    logic [4:0] rs, rt, rd, sa;
    logic [31:0] simm, zimm, boff16, boff21, boff26;
    ins  = in_entry.instr;
    opc  = ins[31:26]; rs = ins[25:21]; rt = ins[20:16]; rd = ins[15:11];
    sa   = ins[10:6];  fn = ins[5:0];
    simm = {{16{ins[15]}}, ins[15:0]};
    zimm = {16'd0, ins[15:0]};
    boff16 = {{14{ins[15]}}, ins[15:0], 2'b00};
    boff21 = {{9{ins[20]}}, ins[20:0], 2'b00};
    boff26 = {{4{ins[25]}}, ins[25:0], 2'b00};

    u = '0;
    u.valid       = 1'b1;
    u.pc          = in_entry.pc;
    u.pred_taken  = in_entry.pred_taken;
    u.pred_target = in_entry.pred_target;
    u.unit        = U_NONE;

    unique case (opc)
      6'b000000: begin                                    // SPECIAL
        u.unit = U_ALU; u.d = gpr(rd);
        u.s1 = gpr(rs); u.s2 = gpr(rt);
        unique case (fn)
          6'b000000, 6'b000010, 6'b000011: begin          // SLL SRL SRA by sa
            u.s1 = gpr(rt); u.s2 = '0; u.use_imm = 1'b1; u.imm = {27'd0, sa};
            u.op = (fn == 6'b000000) ? ALU_SLL : (fn == 6'b000010) ? ALU_SRL : ALU_SRA;
          end
          6'b000100, 6'b000110, 6'b000111: begin          // SLLV SRLV SRAV
            u.s1 = gpr(rt); u.s2 = gpr(rs);
            u.op = (fn == 6'b000100) ? ALU_SLL : (fn == 6'b000110) ? ALU_SRL : ALU_SRA;
          end
          6'b100000, 6'b100001: u.op = ALU_ADD;
          6'b100010, 6'b100011: u.op = ALU_SUB;
          6'b100100: u.op = ALU_AND;
          6'b100101: u.op = ALU_OR;
          6'b100110: u.op = ALU_XOR;
          6'b100111: u.op = ALU_NOR;
          6'b101010: u.op = ALU_SLT;
          6'b101011: u.op = ALU_SLTU;
          6'b110101: u.op = ALU_SELEQZ;
          6'b110111: u.op = ALU_SELNEZ;
          6'b011000: u.op = (sa == 5'd3) ? ALU_MUH  : ALU_MUL;    // SOP30
          6'b011001: u.op = (sa == 5'd3) ? ALU_MUHU : ALU_MULU;   // SOP31
          default: begin u.unit = U_NONE; u.d = '0; u.s1 = '0; u.s2 = '0; end
        endcase
      end
      6'b001001, 6'b001010, 6'b001011, 6'b001100, 6'b001101, 6'b001110, 6'b001111: begin
        u.unit = U_ALU; u.d = gpr(rt); u.s1 = gpr(rs); u.use_imm = 1'b1;
        u.imm = simm;
        unique case (opc)
          6'b001001: u.op = ALU_ADD;                      // ADDIU
          6'b001010: u.op = ALU_SLT;                      // SLTI
          6'b001011: u.op = ALU_SLTU;                     // SLTIU
          6'b001100: begin u.op = ALU_AND; u.imm = zimm; end
          6'b001101: begin u.op = ALU_OR;  u.imm = zimm; end
          6'b001110: begin u.op = ALU_XOR; u.imm = zimm; end
          default:   begin u.op = ALU_ADD; u.imm = {ins[15:0], 16'd0}; end   // AUI / LUI
        endcase
      end
      // loads and stores: s1 = base, s2 = store data, d = load destination
      6'b100000, 6'b100100, 6'b100001, 6'b100101, 6'b100011, 6'b110001: begin
        u.unit = U_LSU; u.s1 = gpr(rs); u.imm = simm;
        u.d = (opc == 6'b110001) ? fpr(rt) : gpr(rt);
        unique case (opc)
          6'b100000: u.op = LS_LB;
          6'b100100: u.op = LS_LBU;
          6'b100001: u.op = LS_LH;
          6'b100101: u.op = LS_LHU;
          default:   u.op = LS_LW;
        endcase
      end
      6'b101000, 6'b101001, 6'b101011, 6'b111001: begin
        u.unit = U_LSU; u.s1 = gpr(rs); u.imm = simm;
        u.s2 = (opc == 6'b111001) ? fpr(rt) : gpr(rt);
        u.op = (opc == 6'b101000) ? LS_SB : (opc == 6'b101001) ? LS_SH : LS_SW;
      end
      // compact branches
      6'b110010, 6'b111010: begin                         // BC, BALC
        u.unit = U_BR; u.op = BR_ALWAYS; u.imm = boff26;
        if (opc == 6'b111010) begin u.link = 1'b1; u.d = gpr(5'd31); end
      end
      6'b110110, 6'b111110: begin                         // POP66 / POP76
        u.unit = U_BR;
        if (rs == 0) begin                                // JIC / JIALC
          u.op = BR_JIC; u.s1 = gpr(rt); u.imm = simm;
          if (opc == 6'b111110) begin u.link = 1'b1; u.d = gpr(5'd31); end
        end else begin                                    // BEQZC / BNEZC
          u.op = (opc == 6'b110110) ? BR_EQ : BR_NE;
          u.s1 = gpr(rs); u.s2 = gpr(5'd0); u.imm = boff21;
        end
      end
      6'b010110, 6'b010111, 6'b000110, 6'b000111: begin   // POP26 POP27 POP06 POP07
        u.unit = U_BR; u.imm = boff16;
        if (rt == 0) u.unit = U_NONE;                     // delay-slot BLEZ/BGTZ
        else if (rs == 0) begin                           // BLEZ(AL)C / BGTZ(AL)C rt
          u.s1 = gpr(5'd0); u.s2 = gpr(rt);
          u.op = (opc == 6'b010110 || opc == 6'b000110) ? BR_GE : BR_LT;
        end else if (rs == rt) begin                      // BGEZ(AL)C / BLTZ(AL)C rt
          u.s1 = gpr(rt); u.s2 = gpr(5'd0);
          u.op = (opc == 6'b010110 || opc == 6'b000110) ? BR_GE : BR_LT;
        end else begin                                    // BGEC BLTC BGEUC BLTUC rs, rt
          u.s1 = gpr(rs); u.s2 = gpr(rt);
          unique case (opc)
            6'b010110: u.op = BR_GE;
            6'b010111: u.op = BR_LT;
            6'b000110: u.op = BR_GEU;
            default:   u.op = BR_LTU;
          endcase
        end
        if ((opc == 6'b000110 || opc == 6'b000111) && (rs == 0 || rs == rt)) begin
          u.link = 1'b1; u.d = gpr(5'd31);                // BLEZALC BGEZALC BGTZALC BLTZALC
        end
      end
      6'b001000, 6'b011000: begin                         // POP10 / POP30
        u.unit = U_BR; u.imm = boff16;
        u.op = (opc == 6'b001000) ? BR_EQ : BR_NE;
        if (rs == 0 && rt != 0) begin                     // BEQZALC / BNEZALC
          u.s1 = gpr(rt); u.s2 = gpr(5'd0); u.link = 1'b1; u.d = gpr(5'd31);
        end else if (rs != 0 && rs < rt) begin            // BEQC / BNEC
          u.s1 = gpr(rs); u.s2 = gpr(rt);
        end else u.unit = U_NONE;                         // BOVC / BNVC
      end
      6'b010001: begin                                    // COP1
        if (rs == 5'b00000) begin                         // MFC1 rt, fs
          u.unit = U_ALU; u.op = ALU_PASSA; u.s1 = fpr(rd); u.d = gpr(rt);
        end else if (rs == 5'b00100) begin                // MTC1 rt, fs
          u.unit = U_FPS; u.op = FPS_MTC1; u.s1 = gpr(rt); u.d = fpr(rd);
        end else if (rs == 5'b10000) begin                // fmt S
          u.s1 = fpr(rd); u.s2 = fpr(rt); u.d = fpr(sa);
          unique case (fn)
            6'b000000: begin u.unit = U_FP4;  u.op = FP4_ADD; end
            6'b000001: begin u.unit = U_FP4;  u.op = FP4_SUB; end
            6'b000010: begin u.unit = U_FP4;  u.op = FP4_MUL; end
            6'b000011: begin u.unit = U_FP12; u.op = FP12_DIV; end
            6'b000100: begin u.unit = U_FP12; u.op = FP12_SQRT; u.s2 = '0; end
            6'b000101: begin u.unit = U_FPS;  u.op = FPS_ABS; u.s2 = '0; end
            6'b000110: begin u.unit = U_FPS;  u.op = FPS_MOV; u.s2 = '0; end
            6'b000111: begin u.unit = U_FPS;  u.op = FPS_NEG; u.s2 = '0; end
            6'b001101: begin u.unit = U_FP4;  u.op = FP4_TRUNC_W_S; u.s2 = '0; end
            6'b100100: begin u.unit = U_FP4;  u.op = FP4_CVT_W_S; u.s2 = '0; end
            6'b011000: begin u.unit = U_FP4;  u.op = FP4_MADDF; u.acc = 1'b1; end
            6'b011001: begin u.unit = U_FP4;  u.op = FP4_MSUBF; u.acc = 1'b1; end
            default:   begin u.unit = U_NONE; u.s1 = '0; u.s2 = '0; u.d = '0; end
          endcase
        end else if (rs == 5'b10100) begin                // fmt W: CVT.S.W, CMP.cond.S
          u.s1 = fpr(rd); u.s2 = fpr(rt); u.d = fpr(sa);
          unique case (fn)
            6'b100000: begin u.unit = U_FP4; u.op = FP4_CVT_S_W; u.s2 = '0; end
            6'b000000: begin u.unit = U_FPS; u.op = FPS_CMP_AF; end
            6'b000010: begin u.unit = U_FPS; u.op = FPS_CMP_EQ; end
            6'b000100: begin u.unit = U_FPS; u.op = FPS_CMP_LT; end
            6'b000110: begin u.unit = U_FPS; u.op = FPS_CMP_LE; end
            default:   begin u.unit = U_NONE; u.s1 = '0; u.s2 = '0; u.d = '0; end
          endcase
        end
      end
      default: u.unit = U_NONE;
    endcase
    // writes to integer register 0 are dropped
    if (u.d.en && !u.d.fp && u.d.idx == 0) u.d = '0;
    if (u.unit == U_NONE) begin u.s1 = '0; u.s2 = '0; u.d = '0; u.link = 1'b0; end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_uop   <= '0;
    end else if (flush) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_uop <= u;
    end
  end
endmodule
