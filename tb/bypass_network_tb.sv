// Self-checking testbench for bypass_network: random tags for all three operands and
// write-back port contents; each operand must come from the port writing the
// same register of the same file, from the issue-time value otherwise, and
// never from a port for integer register 0 or for a disabled operand.
module bypass_network_tb;
  import lagarto_pkg::*;
  reg_ref_t s1, s2, s3;
  logic [31:0] s1_read, s2_read, s3_read, op1, op2, op3;
  logic hit1, hit2, hit3;
  wb_port_t wb [NWB];
  int checks = 0, failures = 0;

  bypass_network dut (.*);

  function automatic logic [32:0] expect_op(input reg_ref_t s, input logic [31:0] rd);
    logic [32:0] v;
    v = {1'b0, rd};
    if (s.en && !(s.idx == 0 && !s.fp))
      for (int p = 0; p < NWB; p++)
        if (wb[p].en && wb[p].fp == s.fp && wb[p].idx == s.idx) v = {1'b1, wb[p].data};
    return v;
  endfunction

  initial begin
    logic [32:0] e1, e2, e3;
    for (int i = 0; i < 20000; i++) begin
      s1 = '{en: 1'($urandom % 8 != 0), fp: 1'($urandom), idx: 5'($urandom % 8)};
      s2 = '{en: 1'($urandom % 8 != 0), fp: 1'($urandom), idx: 5'($urandom % 8)};
      s3 = '{en: 1'($urandom % 8 != 0), fp: 1'($urandom), idx: 5'($urandom % 8)};
      s1_read = $urandom; s2_read = $urandom; s3_read = $urandom;
      // distinct registers per port, as the scoreboard guarantees
      for (int p = 0; p < NWB; p++) begin
        wb[p] = '{en: 1'($urandom), fp: 1'($urandom), idx: 5'($urandom % 8), data: $urandom};
        for (int q = 0; q < p; q++)
          if (wb[q].en && wb[q].fp == wb[p].fp && wb[q].idx == wb[p].idx) wb[p].en = 0;
      end
      #1;
      e1 = expect_op(s1, s1_read); e2 = expect_op(s2, s2_read); e3 = expect_op(s3, s3_read);
      checks += 3;
      if ({hit3, op3} != e3) failures++;
      if ({hit1, op1} != e1) failures++;
      if ({hit2, op2} != e2) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
