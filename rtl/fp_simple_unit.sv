// Simple floating-point unit: one execute stage, result registered onto the
// FP write-back port.
//
// Executes the operations that need no rounding: MOV.S, ABS.S, NEG.S (sign
// bit manipulation, so NaN payloads pass unchanged), the Release 6 compares
// CMP.AF/EQ/LT/LE.S, which write all ones (true) or all zeros (false) to the
// destination FP register, and MTC1, which copies an integer register into
// an FP register. Which operations count as "simple" is this design's
// reading of the unit table; the one-stage latency is from that table.
module fp_simple_unit
  import lagarto_pkg::*;
  import lagarto_fp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        in_valid,
  input  uop_t        uop,
  input  logic [31:0] a,      // fs (or GPR rt for MTC1)
  input  logic [31:0] b,      // ft
  output wb_port_t    wb
);
  logic [31:0] res;
  logic unord, eq, lt;
  fps_op_e op;

  assign op = fps_op_e'(uop.op);

  always_comb begin
    unord = is_nan(a) || is_nan(b);
    if (is_zero(a) && is_zero(b)) begin
      eq = 1'b1; lt = 1'b0;                      // +0 == -0
    end else begin
      eq = (a == b) || (is_zero(a) && is_zero(b));
      if (a[31] != b[31]) lt = a[31] && !(is_zero(a) && is_zero(b));
      else if (a[31])     lt = a[30:0] > b[30:0];
      else                lt = a[30:0] < b[30:0];
    end
    unique case (op)
      FPS_MOV:    res = a;
      FPS_ABS:    res = {1'b0, a[30:0]};
      FPS_NEG:    res = {~a[31], a[30:0]};
      FPS_CMP_AF: res = 32'd0;
      FPS_CMP_EQ: res = {32{!unord && eq}};
      FPS_CMP_LT: res = {32{!unord && lt}};
      FPS_CMP_LE: res = {32{!unord && (lt || eq)}};
      FPS_MTC1:   res = a;
      default:    res = 32'd0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wb <= '0;
    else if (!stall) begin
      wb.en   <= in_valid && uop.d.en;
      wb.fp   <= 1'b1;
      wb.idx  <= uop.d.idx;
      wb.data <= res;
    end
  end
endmodule
