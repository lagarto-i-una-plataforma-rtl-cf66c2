// Self-checking testbench for fp_complex12_unit: one random ADD.S / SUB.S /
// MUL.S / CVT.S.W / CVT.W.S / TRUNC.W.S per cycle, fully pipelined, each
// result compared with a reference computed through double-precision reals
// and required to appear exactly 4 cycles after issue. Also checks special
// values (infinities, NaN, signed zero, cancellation) and the stall hold.
module fp_complex12_unit_tb;
  import lagarto_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, in_valid = 0;
  uop_t uop;
  logic [31:0] a, b;
  wb_port_t wb;
  int checks = 0, failures = 0;
  int cycle = 0;
  logic [31:0] exp_q [$];
  logic [4:0]  idx_q [$];
  int          due_q [$];

  fp_complex12_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_op(input fp12_op_e op, input logic [31:0] x, input logic [31:0] y);
    if (op == FP12_SQRT) return to_bits($sqrt(to_real(x)));
    return to_bits(to_real(x) / to_real(y));
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

  task automatic issue(input fp12_op_e op, input logic [31:0] x, input logic [31:0] y);
    @(negedge clk);
    uop = '0; uop.unit = U_FP12; uop.op = op;
    uop.d = '{en: 1'b1, fp: 1'b1, idx: 5'($urandom)};
    a = x; b = y; in_valid = 1;
    exp_q.push_back(ref_op(op, x, y)); idx_q.push_back(uop.d.idx);
    due_q.push_back(cycle + 12);
  endtask

  initial begin
    fp12_op_e op;
    uop = '0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      op = fp12_op_e'($urandom % 2);
      if (op == FP12_SQRT) issue(op, rand_float(1, 254) & 32'h7FFF_FFFF, 0);
      else issue(op, rand_float(70, 180), rand_float(70, 180));
    end
    // special values
    @(negedge clk); in_valid = 0;
    issue(FP12_DIV, 32'h0000_0000, 32'h0000_0000);  exp_q[$] = 32'h7FC0_0000;   // 0/0
    issue(FP12_DIV, 32'h3F80_0000, 32'h8000_0000);  exp_q[$] = 32'hFF80_0000;   // 1/-0
    issue(FP12_DIV, 32'h7F80_0000, 32'h7F80_0000);  exp_q[$] = 32'h7FC0_0000;   // inf/inf
    issue(FP12_DIV, 32'h3F80_0000, 32'h7F80_0000);  exp_q[$] = 32'h0000_0000;   // 1/inf
    issue(FP12_SQRT, 32'hBF80_0000, 0);             exp_q[$] = 32'h7FC0_0000;   // sqrt(-1)
    issue(FP12_SQRT, 32'h8000_0000, 0);             exp_q[$] = 32'h8000_0000;   // sqrt(-0)
    issue(FP12_SQRT, 32'h7F80_0000, 0);             exp_q[$] = 32'h7F80_0000;   // sqrt(inf)
    issue(FP12_SQRT, 32'h4080_0000, 0);             exp_q[$] = 32'h4000_0000;   // sqrt(4) = 2
    issue(FP12_DIV, 32'h40C0_0000, 32'h4040_0000);  exp_q[$] = 32'h4000_0000;   // 6/3 = 2
    @(negedge clk); in_valid = 0;
    repeat (14) @(negedge clk);
    // stall: an issued operation waits while stalled
    issue(FP12_DIV, 32'h40C0_0000, 32'h4000_0000);  exp_q[$] = 32'h4040_0000;
    @(negedge clk); in_valid = 0; stall = 1;
    repeat (5) @(negedge clk);
    checks++; if (wb.en) failures++;
    stall = 0; due_q[$] = due_q[$] + 5;
    repeat (16) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
