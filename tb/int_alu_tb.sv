// Self-checking testbench for int_alu: random operations against a
// reference model written here, result checked exactly one cycle after the
// operation is presented (the unit's one-stage latency), plus the stall hold
// and the rule that register 0 is never written.
module int_alu_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, in_valid = 0;
  uop_t uop;
  logic [31:0] a, b;
  wb_port_t wb;
  int checks = 0, failures = 0;

  int_alu dut (.*);
  always #5 clk = ~clk;

  function automatic logic [31:0] ref_alu(input alu_op_e op, input logic [31:0] x, input logic [31:0] y);
    longint sx, sy;
    logic [63:0] p;
    sx = longint'($signed(x)); sy = longint'($signed(y));
    case (op)
      ALU_ADD: return x + y;
      ALU_SUB: return x - y;
      ALU_AND: return x & y;
      ALU_OR:  return x | y;
      ALU_XOR: return x ^ y;
      ALU_NOR: return ~(x | y);
      ALU_SLT: return (sx < sy) ? 1 : 0;
      ALU_SLTU: return ({32'd0, x} < {32'd0, y}) ? 1 : 0;
      ALU_SLL: return x << (y % 32);
      ALU_SRL: return x >> (y % 32);
      ALU_SRA: return 32'(sx >>> (y % 32));
      ALU_MUL: begin p = 64'(sx * sy); return p[31:0]; end
      ALU_MUH: begin p = 64'(sx * sy); return p[63:32]; end
      ALU_MULU: begin p = {32'd0, x} * {32'd0, y}; return p[31:0]; end
      ALU_MUHU: begin p = {32'd0, x} * {32'd0, y}; return p[63:32]; end
      ALU_SELEQZ: return (y == 0) ? x : 0;
      ALU_SELNEZ: return (y != 0) ? x : 0;
      ALU_PASSA: return x;
      default: return 0;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alu_op_e op;
    logic [31:0] exp_v;
    logic [4:0] exp_d;
    uop = '0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      op = alu_op_e'($urandom % 18);
      uop = '0;
      uop.unit = U_ALU; uop.op = op;
      uop.d = '{en: 1'b1, fp: 1'b0, idx: 5'($urandom % 31 + 1)};
      uop.use_imm = ($urandom % 4 == 0);
      uop.imm = $urandom;
      a = (i % 7 == 0) ? 32'h8000_0000 : $urandom;
      b = (i % 5 == 0) ? 0 : $urandom;
      in_valid = 1;
      exp_v = ref_alu(op, a, uop.use_imm ? uop.imm : b);
      exp_d = uop.d.idx;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!(wb.en && !wb.fp && wb.idx == exp_d && wb.data == exp_v)) begin
        failures++;
        if (failures < 10) $display("FAIL op=%s a=%h b=%h got %h exp %h", op.name(), a, b, wb.data, exp_v);
      end
    end
    // stall holds the output register
    @(negedge clk); stall = 1; in_valid = 1; uop.op = ALU_ADD; uop.use_imm = 0; a = 1; b = 2;
    @(negedge clk); checks++; if (wb.en) failures++;          // previous bubble kept
    stall = 0;
    @(negedge clk); checks++; if (!(wb.en && wb.data == 3)) failures++;
    // register 0 destination is not written
    uop.d.idx = 0;
    @(negedge clk); checks++; if (wb.en) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
