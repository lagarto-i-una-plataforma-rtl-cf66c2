// Self-checking testbench for branch_unit: random conditional branches,
// BC/BALC and JIC/JIALC with random fetch predictions; checks the resolved
// direction, target, redirect PC and misprediction flag in the execute
// cycle, and the link value on the write-back port one cycle later.
module branch_unit_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, in_valid = 0;
  uop_t uop;
  logic [31:0] a, b;
  br_resolve_t resolve;
  wb_port_t wb;
  int checks = 0, failures = 0;

  branch_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    br_op_e op;
    logic t;
    logic [31:0] tgt, nxt;
    logic mis;
    uop = '0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      op = br_op_e'($urandom % 8);
      uop = '0; uop.unit = U_BR; uop.op = op;
      uop.pc = {$urandom, 2'b00};
      uop.imm = {{14{1'($urandom)}}, 16'($urandom), 2'b00};
      a = $urandom; b = (i % 3 == 0) ? a : ((i % 3 == 1) ? -a : $urandom);
      uop.link = ($urandom % 3 == 0);
      uop.d = uop.link ? '{en: 1'b1, fp: 1'b0, idx: 5'd31} : '0;
      uop.pred_taken = $urandom % 2;
      uop.pred_target = ($urandom % 4 == 0) ? $urandom : 32'(uop.pc + 4 + uop.imm);
      case (op)
        BR_ALWAYS, BR_JIC: t = 1;
        BR_EQ:  t = a == b;
        BR_NE:  t = a != b;
        BR_LT:  t = int'(a) < int'(b);
        BR_GE:  t = int'(a) >= int'(b);
        BR_LTU: t = longint'(a) < longint'(b);
        BR_GEU: t = longint'(a) >= longint'(b);
        default: t = 0;
      endcase
      tgt = (op == BR_JIC) ? a + uop.imm : uop.pc + 4 + uop.imm;
      nxt = t ? tgt : uop.pc + 4;
      mis = (t != uop.pred_taken) || (t && uop.pred_target != tgt);
      in_valid = 1;
      #1;
      checks++;
      if (!(resolve.valid && resolve.taken == t && (!t || resolve.target == tgt) &&
            resolve.redirect_pc == nxt && resolve.mispredict == mis && resolve.pc == uop.pc)) begin
        failures++;
        if (failures < 10) $display("FAIL %s a=%h b=%h taken=%b exp %b mis=%b exp %b", op.name(), a, b,
                                    resolve.taken, t, resolve.mispredict, mis);
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (wb.en != uop.link || (uop.link && (wb.idx != 31 || wb.data != uop.pc + 4))) failures++;
    end
    #1; checks++; if (resolve.valid || resolve.mispredict) failures++;    // idle: no resolution
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
