// Workload testbench: the Chudnovsky series for pi on the whole core, at its
// default parameters.
//
// The program follows the structure of the classic single-precision
// Chudnovsky test program: a main loop over the terms k = 0 and k = 1 that
// calls a factorial routine for (6k)!, (3k)! and k!, and a power routine
// for 640320^(3k), both reached with BALC and left with JIC. Each term
//
//   (-1)^k (6k)! (13591409 + 545140134 k) / ((3k)! (k!)^3 640320^(3k) 640320^1.5)
//
// is added to or subtracted from a running sum in $f28 (chosen by a
// compact branch on the parity of k), and pi = 1 / (12 * sum) ends in $f8.
// Integer-to-float conversions, moves between the register files, the
// 4- and 12-stage FP units and many back-to-back dependences are all used.
//
// The testbench repeats the same single-precision operations, in the same
// order, with reals rounded to single precision after each step (exact for
// +, -, *, / and sqrt, since a double holds more than twice the bits of a
// single), and checks $f8, the stored pi and the stored sum bit for bit. It
// also checks that pi is within 1e-6 of the true value (the first six
// decimals) and that the calls and the sign branch really ran.
module lagarto_chudnovsky_tb;
  import lagarto_pkg::*;
  import mips_asm_pkg::*;
  import fp_ref_pkg::*;

  localparam int unsigned LW_ = 4;
  logic clk = 0, rst_n = 0;
  logic mem_req, mem_we, mem_ready;
  logic [31:0] mem_addr, mem_wdata;
  logic [3:0] mem_wstrb;
  logic [LW_*32-1:0] mem_rline;
  wb_port_t wb [NWB];
  logic ev_branch, ev_mispredict, ev_bypass, ev_dep_stall, ev_mem_stall,
        ev_ic_miss, ev_dc_miss, ev_l2_miss, ev_ifq_full;
  int checks = 0, failures = 0;
  int cycles = 0, n_branch = 0, n_mispredict = 0, n_returns = 0;

  lagarto_top dut (.*);
  main_memory_model #(.WORDS(16384), .LINE_WORDS(LW_), .LATENCY(4)) u_mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .wstrb(mem_wstrb),
    .rline(mem_rline), .ready(mem_ready)
  );
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_branch     += int'(ev_branch);
    n_mispredict += int'(ev_mispredict);
    n_returns    += int'(ev_branch && dut.u_br.uop.op == BR_JIC);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] expv);
    checks++;
    if (got !== expv) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, expv);
    end else $display("ok   %s = %h", what, got);
  endtask

  // single-precision operations of the reference
  function automatic logic [31:0] fmul(input logic [31:0] a, input logic [31:0] b);
    return to_bits(to_real(a) * to_real(b));
  endfunction
  function automatic logic [31:0] fdiv(input logic [31:0] a, input logic [31:0] b);
    return to_bits(to_real(a) / to_real(b));
  endfunction
  function automatic int fact(input int n);
    int r;
    r = 1;
    for (int i = 2; i <= n; i++) r *= i;
    return r;
  endfunction

  logic [31:0] prog [$];
  initial begin
    logic [31:0] c, c15, sum, num, den, pw, f24, term, pi_ref;
    real pi_r;
    prog = '{
      /*  0 */ lui(10, 16'h0009),
      /*  1 */ ori(10, 10, 16'hC540),           // r10 = 640320
      /*  2 */ lui(11, 16'h00CF),
      /*  3 */ ori(11, 11, 16'h6371),           // r11 = 13591409
      /*  4 */ lui(17, 16'h207E),
      /*  5 */ ori(17, 17, 16'h2DA6),           // r17 = 545140134
      /*  6 */ mtc1(10, 1),
      /*  7 */ cvt_s_w(1, 1),                   // f1 = 640320.0
      /*  8 */ sqrt_s(2, 1),
      /*  9 */ mul_s(3, 1, 2),                  // f3 = 640320^1.5
      /* 10 */ lui(5, 16'h3F80),
      /* 11 */ mtc1(5, 31),                     // f31 = 1.0
      /* 12 */ mtc1(0, 28),                     // f28 = sum = 0
      /* 13 */ addiu(16, 0, 0),                 // k = 0
      /* 14 */ addiu(18, 0, 2),                 // number of terms
      // loop:
      /* 15 */ addiu(19, 0, 6),
      /* 16 */ mul(1, 16, 19),
      /* 17 */ balc(60 - 18),                   // r2 = (6k)!
      /* 18 */ mtc1(2, 20),
      /* 19 */ cvt_s_w(20, 20),
      /* 20 */ mul(9, 17, 16),
      /* 21 */ addu(9, 9, 11),                  // 13591409 + 545140134 k
      /* 22 */ mtc1(9, 21),
      /* 23 */ cvt_s_w(21, 21),
      /* 24 */ mul_s(22, 20, 21),               // numerator
      /* 25 */ addiu(19, 0, 3),
      /* 26 */ mul(1, 16, 19),
      /* 27 */ balc(60 - 28),                   // r2 = (3k)!
      /* 28 */ mtc1(2, 23),
      /* 29 */ cvt_s_w(23, 23),
      /* 30 */ addu(1, 16, 0),
      /* 31 */ balc(60 - 32),                   // r2 = k!
      /* 32 */ mtc1(2, 24),
      /* 33 */ cvt_s_w(24, 24),
      /* 34 */ mul_s(25, 24, 24),
      /* 35 */ mul_s(25, 25, 24),               // (k!)^3
      /* 36 */ mul_s(26, 23, 25),
      /* 37 */ mov_s(12, 1),
      /* 38 */ mul(4, 16, 19),
      /* 39 */ balc(66 - 40),                   // f0 = 640320^(3k)
      /* 40 */ mul_s(26, 26, 0),
      /* 41 */ mul_s(26, 26, 3),                // denominator
      /* 42 */ div_s(27, 22, 26),               // term
      /* 43 */ andi(5, 16, 1),
      /* 44 */ beqzc(5, 47 - 45),
      /* 45 */ sub_s(28, 28, 27),               // odd k
      /* 46 */ bc(48 - 47),
      /* 47 */ add_s(28, 28, 27),               // even k
      /* 48 */ addiu(16, 16, 1),
      /* 49 */ bnec(16, 18, 15 - 50),
      /* 50 */ addiu(5, 0, 12),
      /* 51 */ mtc1(5, 29),
      /* 52 */ cvt_s_w(29, 29),
      /* 53 */ mul_s(30, 29, 28),
      /* 54 */ div_s(8, 31, 30),                // f8 = pi
      /* 55 */ swc1(8, 16'h104, 0),
      /* 56 */ swc1(28, 16'h108, 0),
      /* 57 */ addiu(20, 0, 1),
      /* 58 */ sw(20, 16'h200, 0),              // done flag
      /* 59 */ bc(-1),
      // fact(r1) -> r2
      /* 60 */ addiu(2, 0, 1),
      /* 61 */ beqzc(1, 65 - 62),
      /* 62 */ mul(2, 2, 1),
      /* 63 */ addiu(1, 1, -1),
      /* 64 */ bc(61 - 65),
      /* 65 */ jic(31, 0),
      // pow(f12, r4) -> f0
      /* 66 */ mov_s(0, 31),
      /* 67 */ beqzc(4, 71 - 68),
      /* 68 */ mul_s(0, 0, 12),
      /* 69 */ addiu(4, 4, -1),
      /* 70 */ bc(67 - 71),
      /* 71 */ jic(31, 0)
    };
    for (int i = 0; i < 16384; i++) u_mem.mem[i] = 0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];

    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (u_mem.mem[16'h200 >> 2] == 1);
    repeat (5) @(posedge clk);
    $display("program finished after %0d cycles", cycles);

    // reference, operation by operation
    c = to_bits(640320.0);
    c15 = fmul(c, to_bits($sqrt(to_real(c))));
    sum = 32'd0;
    for (int k = 0; k < 2; k++) begin
      num = fmul(to_bits(real'(fact(6 * k))), to_bits(real'(13591409 + 545140134 * k)));
      f24 = to_bits(real'(fact(k)));
      den = fmul(to_bits(real'(fact(3 * k))), fmul(fmul(f24, f24), f24));
      pw = to_bits(1.0);
      for (int i = 0; i < 3 * k; i++) pw = fmul(pw, c);
      den = fmul(fmul(den, pw), c15);
      term = fdiv(num, den);
      sum = (k % 2) ? to_bits(to_real(sum) - to_real(term)) : to_bits(to_real(sum) + to_real(term));
    end
    pi_ref = fdiv(to_bits(1.0), fmul(to_bits(12.0), sum));

    check("$f8 = pi", dut.u_fp_rf.regs[8], pi_ref);
    check("pi stored", u_mem.mem[16'h104 >> 2], pi_ref);
    check("series sum", u_mem.mem[16'h108 >> 2], sum);
    pi_r = to_real(u_mem.mem[16'h104 >> 2]);
    $display("pi = %.9f", pi_r);
    checks++;
    if (pi_r - 3.14159265358979 > 1e-6 || 3.14159265358979 - pi_r > 1e-6) begin
      failures++; $display("FAIL pi not within 1e-6");
    end
    // 3 factorial calls and 1 power call per term
    checks++; if (n_returns != 8) begin failures++; $display("FAIL %0d returns, expected 8", n_returns); end
    checks++; if (n_mispredict == 0) failures++;
    $display("     branches %0d, mispredictions %0d", n_branch, n_mispredict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
