// Four-stage floating-point unit: ADD.S, SUB.S, MUL.S, the fused multiply-
// adds MADDF.S (fd + fs*ft) and MSUBF.S (fd - fs*ft) with a single rounding,
// and the conversions CVT.S.W, CVT.W.S and TRUNC.W.S, fully pipelined (one
// new operation per cycle), IEEE 754 single precision with
// round-to-nearest-even. Operand c is the old value of fd, read as a third
// operand for the fused operations.
//
// The arithmetic is done in the first execute stage (functions of
// lagarto_fp_pkg) and the result then moves through STAGES-1 further
// registers; the last register drives the FP2 write-back port. The latency
// of 4 stages is the design's; placing the whole computation in the first
// stage, rather than splitting it, is this implementation's simplification
// (a retiming tool can spread the logic over the registers). The design's
// unit is a 64-bit fused multiply-add; this one does the fused operation in
// single precision only.
//
// stall freezes every stage.
module fp_complex4_unit
  import lagarto_pkg::*;
  import lagarto_fp_pkg::*;
#(
  parameter int unsigned STAGES = LAT_FP4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        in_valid,
  input  uop_t        uop,
  input  logic [31:0] a,      // fs (GPR-sourced value in the FP file for CVT.S.W)
  input  logic [31:0] b,      // ft
  input  logic [31:0] c,      // fd before the operation (MADDF/MSUBF addend)
  output wb_port_t    wb
);
  wb_port_t pipe [STAGES];
  logic [31:0] res;
  fp4_op_e op;

  assign op = fp4_op_e'(uop.op);

  always_comb begin
    unique case (op)
      FP4_ADD:       res = fadd(a, b);
      FP4_SUB:       res = fadd(a, {~b[31], b[30:0]});
      FP4_MUL:       res = fmul(a, b);
      FP4_CVT_S_W:   res = cvt_s_w(a);
      FP4_CVT_W_S:   res = cvt_w_s(a, 1'b0);
      FP4_TRUNC_W_S: res = cvt_w_s(a, 1'b1);
      FP4_MADDF:     res = ffma(a, b, c, 1'b0);
      FP4_MSUBF:     res = ffma(a, b, c, 1'b1);
      default:       res = 32'd0;
    endcase
  end

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
