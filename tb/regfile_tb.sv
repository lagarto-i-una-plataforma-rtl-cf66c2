// Self-checking testbench for regfile (all three read ports): random writes on all six write-back
// ports (never two to the same register), reads compared with a shadow
// array, write-through of same-cycle writes, filtering of writes meant for
// the other file, and register 0 of the integer file reading as zero.
module regfile_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0;
  wb_port_t wr [NWB];
  logic [4:0] ra1, ra2, ra3;
  logic [31:0] i_rd1, i_rd2, i_rd3, f_rd1, f_rd2, f_rd3;
  logic [31:0] shadow [2][32];
  int checks = 0, failures = 0;

  regfile #(.IS_FP(1'b0)) u_int (.clk, .rst_n, .wr, .ra1, .ra2, .ra3, .rd1(i_rd1), .rd2(i_rd2), .rd3(i_rd3));
  regfile #(.IS_FP(1'b1)) u_fp  (.clk, .rst_n, .wr, .ra1, .ra2, .ra3, .rd1(f_rd1), .rd2(f_rd2), .rd3(f_rd3));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expect_rd(input int f, input logic [4:0] r);
    logic [31:0] v;
    v = shadow[f][r];
    for (int p = 0; p < NWB; p++) if (wr[p].en && wr[p].fp == f[0] && wr[p].idx == r) v = wr[p].data;
    if (f == 0 && r == 0) v = 0;
    return v;
  endfunction

  initial begin
    logic [63:0] used;
    for (int p = 0; p < NWB; p++) wr[p] = '0;
    ra1 = 0; ra2 = 0; ra3 = 0;
    for (int f = 0; f < 2; f++) for (int r = 0; r < 32; r++) shadow[f][r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      used = 0;
      for (int p = 0; p < NWB; p++) begin
        wr[p].en = $urandom % 2; wr[p].fp = $urandom % 2; wr[p].idx = $urandom; wr[p].data = $urandom;
        if (used[{wr[p].fp, wr[p].idx}]) wr[p].en = 0;
        if (wr[p].en) used[{wr[p].fp, wr[p].idx}] = 1;
      end
      ra1 = $urandom; ra2 = (i % 4 == 0) ? wr[0].idx : $urandom;
      ra3 = (i % 4 == 1) ? wr[1].idx : $urandom;
      #1;
      checks += 6;
      if (i_rd3 != expect_rd(0, ra3)) failures++;
      if (f_rd3 != expect_rd(1, ra3)) failures++;
      if (i_rd1 != expect_rd(0, ra1)) failures++;
      if (i_rd2 != expect_rd(0, ra2)) failures++;
      if (f_rd1 != expect_rd(1, ra1)) failures++;
      if (f_rd2 != expect_rd(1, ra2)) failures++;
      @(posedge clk);
      for (int p = 0; p < NWB; p++) if (wr[p].en) shadow[wr[p].fp][wr[p].idx] = wr[p].data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
