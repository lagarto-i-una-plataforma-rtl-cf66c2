// Self-checking testbench for fp_complex4_unit: one random ADD.S / SUB.S /
// MUL.S / MADDF.S / MSUBF.S / CVT.S.W / CVT.W.S / TRUNC.W.S per cycle, fully
// pipelined, each result compared with a reference computed through
// double-precision reals and required to appear exactly 4 cycles after
// issue. Fused operations are also tried with the addend close to minus the
// product (deep cancellation). A list of special cases (infinities, NaN,
// signed zeros, overflow, ties in the conversions, a fused result that a
// separate multiply and add would lose) follows, and finally a stall must
// hold a result back by exactly the stalled cycles.
module fp_complex4_unit_tb;
  import lagarto_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, in_valid = 0;
  uop_t uop;
  logic [31:0] a, b, c;
  wb_port_t wb;
  int checks = 0, failures = 0;
  int cycle = 0;
  logic [31:0] exp_q [$];
  logic [4:0]  idx_q [$];
  int          due_q [$];

  fp_complex4_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference fused multiply-add. x*y is exact in double precision; the sum
  // s = p + z is rounded once in double, and its exact error e is recovered
  // with the two-sum identity. Rounding s to single then equals rounding the
  // exact p + z, except when s lies exactly halfway between two singles and
  // e is not zero: s is then moved one double step towards e.
  function automatic logic [31:0] ref_fma(input logic [31:0] x, input logic [31:0] y,
                                          input logic [31:0] z, input logic neg);
    real p, zz, s, bb, e;
    logic [63:0] d;
    p = to_real(x) * to_real(y);
    if (neg) p = -p;
    zz = to_real(z);
    s = p + zz;
    bb = s - p;
    e = (p - (s - bb)) + (zz - bb);
    d = $realtobits(s);
    if (e != 0.0 && d[28] && d[27:0] == 0 && d[62:0] != 0) begin
      if ((e > 0.0) == (d[63] == 1'b0)) d = d + 1; else d = d - 1;
      s = $bitstoreal(d);
    end
    return to_bits(s);
  endfunction

  function automatic logic [31:0] ref_op(input fp4_op_e op, input logic [31:0] x, input logic [31:0] y,
                                         input logic [31:0] z);
    real r;
    case (op)
      FP4_MADDF: return ref_fma(x, y, z, 1'b0);
      FP4_MSUBF: return ref_fma(x, y, z, 1'b1);
      FP4_ADD: return to_bits(to_real(x) + to_real(y));
      FP4_SUB: return to_bits(to_real(x) - to_real(y));
      FP4_MUL: return to_bits(to_real(x) * to_real(y));
      FP4_CVT_S_W: return to_bits(real'($signed(x)));
      FP4_TRUNC_W_S: begin r = to_real(x); return 32'($rtoi(r)); end
      FP4_CVT_W_S: begin
        r = to_real(x);
        // round half to even
        if (r - $floor(r) == 0.5) return 32'(longint'($floor(r)) + (longint'($floor(r)) % 2 != 0 ? 1 : 0));
        return 32'(longint'($floor(r + 0.5)));
      end
      default: return 0;
    endcase
  endfunction

  // checker: compare every output against the queued expectation
  always @(negedge clk) if (rst_n && !stall) begin
    if (wb.en) begin
      checks++;
      if (exp_q.size() == 0 || due_q[0] != cycle || wb.data != exp_q[0] || wb.idx != idx_q[0]) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d got %h exp %h due %0d", cycle, wb.data,
                                    exp_q.size() ? exp_q[0] : 0, due_q.size() ? due_q[0] : -1);
      end
      if (exp_q.size()) begin void'(exp_q.pop_front()); void'(idx_q.pop_front()); void'(due_q.pop_front()); end
    end else if (due_q.size() && due_q[0] == cycle) begin
      failures++; checks++;
      $display("FAIL: no result at cycle %0d", cycle);
      void'(exp_q.pop_front()); void'(idx_q.pop_front()); void'(due_q.pop_front());
    end
  end

  task automatic issue(input fp4_op_e op, input logic [31:0] x, input logic [31:0] y,
                       input logic [31:0] z = 0);
    @(negedge clk);
    uop = '0; uop.unit = U_FP4; uop.op = op;
    uop.d = '{en: 1'b1, fp: 1'b1, idx: 5'($urandom)};
    a = x; b = y; c = z; in_valid = 1;
    exp_q.push_back(ref_op(op, x, y, z)); idx_q.push_back(uop.d.idx);
    due_q.push_back(cycle + 4);
  endtask

  initial begin
    fp4_op_e op;
    logic [31:0] x, y;
    uop = '0; a = 0; b = 0; c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      op = fp4_op_e'($urandom % 8);
      if (op == FP4_CVT_S_W) issue(op, $urandom >> ($urandom % 32), 0);
      else if (op == FP4_CVT_W_S || op == FP4_TRUNC_W_S) issue(op, rand_float(100, 156), 0);
      else if (op == FP4_MADDF || op == FP4_MSUBF) begin
        x = rand_float(100, 150); y = rand_float(100, 150);
        case (i % 4)
          0: issue(op, x, y, rand_float(60, 190));
          1: issue(op, x, y, rand_float(190, 230));
          // addend close to minus (MADDF) or plus (MSUBF) the product
          2: issue(op, x, y, to_bits((op == FP4_MADDF ? -1.0 : 1.0) * to_real(x) * to_real(y)) ^ 32'($urandom % 4));
          default: issue(op, x, y, to_bits(to_real(x) * to_real(y) * (0.25 + 0.5 * ($urandom % 4))));
        endcase
      end
      else if (i % 3 == 0) issue(op, rand_float(120, 135), rand_float(120, 135));   // close exponents
      else issue(op, rand_float(60, 190), rand_float(60, 190));
    end
    // special values
    @(negedge clk); in_valid = 0;
    issue(FP4_ADD, 32'h7F80_0000, 32'hFF80_0000);  exp_q[$] = 32'h7FC0_0000;   // inf - inf
    issue(FP4_MUL, 32'h7F80_0000, 32'h0000_0000);  exp_q[$] = 32'h7FC0_0000;   // inf * 0
    issue(FP4_ADD, 32'h3F80_0000, 32'hBF80_0000);  exp_q[$] = 32'h0000_0000;   // x - x = +0
    issue(FP4_ADD, 32'h8000_0000, 32'h8000_0000);  exp_q[$] = 32'h8000_0000;   // -0 + -0
    issue(FP4_MUL, 32'h7F00_0000, 32'h7F00_0000);  exp_q[$] = 32'h7F80_0000;   // overflow
    issue(FP4_ADD, 32'h7FC0_0001, 32'h3F80_0000);  exp_q[$] = 32'h7FC0_0000;   // NaN
    issue(FP4_CVT_S_W, 32'h8000_0000, 0);          exp_q[$] = 32'hCF00_0000;   // -2^31
    issue(FP4_CVT_S_W, 32'd640320, 0);             exp_q[$] = 32'h491C_5400;   // 640320.0
    issue(FP4_CVT_W_S, 32'h4020_0000, 0);          exp_q[$] = 32'd2;           // 2.5 -> 2
    issue(FP4_CVT_W_S, 32'h4060_0000, 0);          exp_q[$] = 32'd4;           // 3.5 -> 4
    issue(FP4_TRUNC_W_S, 32'hC060_0000, 0);        exp_q[$] = -32'sd3;         // -3.5 -> -3
    issue(FP4_MADDF, 32'h4000_0000, 32'h4040_0000, 32'h3F80_0000); exp_q[$] = 32'h40E0_0000; // 1 + 2*3 = 7
    issue(FP4_MSUBF, 32'h4000_0000, 32'h4040_0000, 32'h3F80_0000); exp_q[$] = 32'hC0A0_0000; // 1 - 2*3 = -5
    issue(FP4_MADDF, 32'h7F80_0000, 32'h3F80_0000, 32'hFF80_0000); exp_q[$] = 32'h7FC0_0000; // inf - inf
    issue(FP4_MADDF, 32'h0000_0000, 32'h3F80_0000, 32'h4120_0000); exp_q[$] = 32'h4120_0000; // 10 + 0*1
    issue(FP4_MSUBF, 32'h3F80_0000, 32'h3F80_0000, 32'h3F80_0000); exp_q[$] = 32'h0000_0000; // 1 - 1*1 = +0
    // (1 + 2^-23)^2 - (1 + 2^-22) = 2^-46 exactly; a separate multiply would round it away
    issue(FP4_MADDF, 32'h3F80_0001, 32'h3F80_0001, 32'hBF80_0002); exp_q[$] = 32'h2880_0000;
    @(negedge clk); in_valid = 0;
    repeat (6) @(negedge clk);
    // stall: an issued operation waits while stalled
    issue(FP4_MUL, 32'h4000_0000, 32'h4040_0000);  exp_q[$] = 32'h40C0_0000;
    @(negedge clk); in_valid = 0; stall = 1;
    repeat (5) @(negedge clk);
    checks++; if (wb.en) failures++;
    stall = 0; due_q[$] = due_q[$] + 5;
    repeat (8) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
