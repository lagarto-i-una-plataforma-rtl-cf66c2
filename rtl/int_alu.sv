// Integer execution unit: one execute stage, result registered into the
// integer write-back port.
//
// Implements the MIPS32 R6 integer register/immediate operations: add and
// subtract (no overflow trap), logic, set-less-than, shifts, the R6 multiply
// family MUL/MUH/MULU/MUHU, SELEQZ/SELNEZ, and a pass-through used to move an
// FP register to an integer register (MFC1). The single-stage latency follows
// the design's unit table; the multiplier sharing that one stage is this
// design's choice (the description does not say where multiplies execute).
//
// Interface: in_valid qualifies uop (already routed to this unit) and the
// bypassed operand values a (rs or rt) and b (second register). The result
// appears on wb one cycle later; stall freezes the output register.
module int_alu
  import lagarto_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        in_valid,
  input  uop_t        uop,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output wb_port_t    wb
);
  logic [31:0] bv, res;
  logic [63:0] ps, pu;
  alu_op_e op;

  assign op = alu_op_e'(uop.op);
  assign bv = uop.use_imm ? uop.imm : b;
  assign ps = $signed(a) * $signed(bv);
  assign pu = a * bv;

  always_comb begin
    unique case (op)
      ALU_ADD:    res = a + bv;
      ALU_SUB:    res = a - bv;
      ALU_AND:    res = a & bv;
      ALU_OR:     res = a | bv;
      ALU_XOR:    res = a ^ bv;
      ALU_NOR:    res = ~(a | bv);
      ALU_SLT:    res = {31'd0, $signed(a) < $signed(bv)};
      ALU_SLTU:   res = {31'd0, a < bv};
      ALU_SLL:    res = a << bv[4:0];
      ALU_SRL:    res = a >> bv[4:0];
      ALU_SRA:    res = $signed(a) >>> bv[4:0];
      ALU_MUL:    res = ps[31:0];
      ALU_MUH:    res = ps[63:32];
      ALU_MULU:   res = pu[31:0];
      ALU_MUHU:   res = pu[63:32];
      ALU_SELEQZ: res = (bv == 0) ? a : 32'd0;
      ALU_SELNEZ: res = (bv != 0) ? a : 32'd0;
      ALU_PASSA:  res = a;
      default:    res = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb <= '0;
    else if (!stall) begin
      wb.en   <= in_valid && uop.d.en && !(uop.d.idx == 0 && !uop.d.fp);
      wb.fp   <= uop.d.fp;
      wb.idx  <= uop.d.idx;
      wb.data <= res;
    end
  end
endmodule
