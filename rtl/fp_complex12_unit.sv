// Twelve-stage floating-point unit: DIV.S and SQRT.S, fully pipelined,
// IEEE 754 single precision with round-to-nearest-even.
//
// The quotient or root is computed in the first execute stage (a 64/24-bit
// integer division with a 40-bit quotient, or a 32-bit restoring integer
// square root, see lagarto_fp_pkg) and then moves through STAGES-1 further
// registers to the FP3 write-back port. The 12-stage latency is the
// design's; which operations belong to this unit, and computing them in one
// stage followed by a register chain, are this implementation's choices.
//
// stall freezes every stage.
module fp_complex12_unit
  import lagarto_pkg::*;
  import lagarto_fp_pkg::*;
#(
  parameter int unsigned STAGES = LAT_FP12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        in_valid,
  input  uop_t        uop,
  input  logic [31:0] a,      // fs
  input  logic [31:0] b,      // ft
  output wb_port_t    wb
);
  wb_port_t pipe [STAGES];
  logic [31:0] res;
  fp12_op_e op;

  assign op = fp12_op_e'(uop.op);
  assign res = (op == FP12_SQRT) ? fsqrt(a) : fdiv(a, b);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < STAGES; i++) pipe[i] <= '0;
    end else if (!stall) begin
      pipe[0].en   <= in_valid && uop.d.en;
      pipe[0].fp   <= 1'b1;
      pipe[0].idx  <= uop.d.idx;
      pipe[0].data <= res;
      for (int i = 1; i < STAGES; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign wb = pipe[STAGES-1];
endmodule
