// Branch unit: one execute stage that resolves MIPS32 R6 compact branches
// and jumps, checks the fetch-time prediction and produces the link value.
//
// Conditional branches compare the two bypassed operands (equal, not equal,
// signed and unsigned less-than / greater-or-equal; the decoder maps the
// compare-with-zero forms onto these with register 0). PC-relative targets
// are PC+4+imm; JIC/JIALC jump to a+imm. Compact branches have no delay slot,
// so a misprediction redirects fetch to the correct next PC and the pipeline
// discards everything younger. Link values (PC+4) are registered onto the
// integer write-back port one cycle later, like an integer result.
//
// resolve is combinational in the execute cycle so fetch can restart in the
// following cycle. Restricting the core to compact branches is this design's
// choice; the single-stage latency comes from the unit table.
module branch_unit
  import lagarto_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        in_valid,
  input  uop_t        uop,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output br_resolve_t resolve,
  output wb_port_t    wb
);
  logic taken;
  logic [31:0] target, next_pc;
  br_op_e op;

  assign op = br_op_e'(uop.op);

  always_comb begin
    unique case (op)
      BR_ALWAYS, BR_JIC: taken = 1'b1;
      BR_EQ:  taken = (a == b);
      BR_NE:  taken = (a != b);
      BR_LT:  taken = $signed(a) < $signed(b);
      BR_GE:  taken = $signed(a) >= $signed(b);
      BR_LTU: taken = a < b;
      BR_GEU: taken = a >= b;
      default: taken = 1'b0;
    endcase
    target  = (op == BR_JIC) ? a + uop.imm : uop.pc + 32'd4 + uop.imm;
    next_pc = taken ? target : uop.pc + 32'd4;
    resolve.valid       = in_valid && !stall;
    resolve.pc          = uop.pc;
    resolve.taken       = taken;
    resolve.target      = target;
    resolve.redirect_pc = next_pc;
    // fetch followed pred_target when pred_taken, otherwise PC+4
    resolve.mispredict  = in_valid && !stall &&
                          ((taken != uop.pred_taken) || (taken && uop.pred_target != target));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb <= '0;
    else if (!stall) begin
      wb.en   <= in_valid && uop.link && uop.d.en && uop.d.idx != 0;
      wb.fp   <= 1'b0;
      wb.idx  <= uop.d.idx;
      wb.data <= uop.pc + 32'd4;
    end
  end
endmodule
