// Self-checking testbench for fp_simple_unit: MOV/ABS/NEG, the R6 compares
// (all-ones / all-zeros results, +0 == -0, unordered NaN) and MTC1, each
// result checked one cycle after issue against values computed here through
// reals.
module fp_simple_unit_tb;
  import lagarto_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, in_valid = 0;
  uop_t uop;
  logic [31:0] a, b;
  wb_port_t wb;
  int checks = 0, failures = 0;

  fp_simple_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input fps_op_e op, input logic [31:0] x, input logic [31:0] y, input logic [31:0] expv);
    @(negedge clk);
    uop = '0; uop.unit = U_FPS; uop.op = op;
    uop.d = '{en: 1'b1, fp: 1'b1, idx: 5'($urandom)};
    a = x; b = y; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!(wb.en && wb.fp && wb.idx == uop.d.idx && wb.data == expv)) begin
      failures++;
      if (failures < 10) $display("FAIL %s %h %h got %h exp %h", op.name(), x, y, wb.data, expv);
    end
  endtask

  initial begin
    logic [31:0] x, y;
    real rx, ry;
    uop = '0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      x = rand_float(120, 130);
      y = (i % 4 == 0) ? x : rand_float(120, 130);
      rx = to_real(x); ry = to_real(y);
      run(FPS_MOV, x, y, x);
      run(FPS_ABS, x, y, {1'b0, x[30:0]});
      run(FPS_NEG, x, y, {~x[31], x[30:0]});
      run(FPS_CMP_EQ, x, y, (rx == ry) ? 32'hFFFF_FFFF : 32'h0);
      run(FPS_CMP_LT, x, y, (rx <  ry) ? 32'hFFFF_FFFF : 32'h0);
      run(FPS_CMP_LE, x, y, (rx <= ry) ? 32'hFFFF_FFFF : 32'h0);
      run(FPS_CMP_AF, x, y, 32'h0);
      run(FPS_MTC1, x, y, x);
    end
    run(FPS_CMP_EQ, 32'h0000_0000, 32'h8000_0000, 32'hFFFF_FFFF);   // +0 == -0
    run(FPS_CMP_LT, 32'h8000_0000, 32'h0000_0000, 32'h0);           // -0 < +0 is false
    run(FPS_CMP_LE, 32'h7FC0_0000, 32'h3F80_0000, 32'h0);           // unordered
    run(FPS_CMP_EQ, 32'h7FC0_0000, 32'h7FC0_0000, 32'h0);
    run(FPS_CMP_LT, 32'hFF80_0000, 32'h7F80_0000, 32'hFFFF_FFFF);   // -inf < +inf
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
