// End-to-end testbench for lagarto_top at its default parameters.
//
// Loads a program into the main-memory model and runs it from reset. The
// program evaluates the first term of the Chudnovsky series for pi in single
// precision, pi ~= 640320 * sqrt(640320) / (12 * 13591409), calling an
// iterative factorial routine (BALC / JIC return) and a power loop on the
// way, stores its results, reads one back through LWC1/MFC1, runs a fused
// multiply-add whose addend comes over the bypass network, and finally
// raises a done flag. The testbench then checks the stored values against
// values computed here (and the pi bits against 0x40490FDA), and requires
// each pipeline mechanism to have happened at least once: branch
// resolution, correct taken prediction, misprediction with redirect,
// bypassing, dependence stalls, data-cache stalls, instruction, data and L2
// cache misses, a full fetch queue, and a write on every write-back port.
module lagarto_top_tb;
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
  int cycles = 0;

  lagarto_top dut (.*);
  main_memory_model #(.WORDS(16384), .LINE_WORDS(LW_), .LATENCY(4)) u_mem (
    .clk, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .wstrb(mem_wstrb),
    .rline(mem_rline), .ready(mem_ready)
  );
  always #5 clk = ~clk;

  // event counters
  int n_branch = 0, n_mispredict = 0, n_pred_ok_taken = 0, n_bypass = 0, n_acc_bypass = 0, n_dep_stall = 0,
      n_mem_stall = 0, n_ic_miss = 0, n_dc_miss = 0, n_l2_miss = 0, n_ifq_full = 0;
  int n_wb [NWB];
  initial for (int p = 0; p < NWB; p++) n_wb[p] = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_branch     += int'(ev_branch);
    n_mispredict += int'(ev_mispredict);
    n_pred_ok_taken += int'(ev_branch && !ev_mispredict && dut.resolve.taken);
    n_bypass     += int'(ev_bypass);
    n_acc_bypass += int'(dut.ex_valid && !dut.stall && dut.hit3);   // fused multiply-add addend
    n_dep_stall  += int'(ev_dep_stall);
    n_mem_stall  += int'(ev_mem_stall);
    n_ic_miss    += int'(ev_ic_miss);
    n_dc_miss    += int'(ev_dc_miss);
    n_l2_miss    += int'(ev_l2_miss);
    n_ifq_full   += int'(ev_ifq_full);
    for (int p = 0; p < NWB; p++) n_wb[p] += int'(wb[p].en && !ev_mem_stall);
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  task automatic happened(input string what, input int n);
    checks++;
    $display("     %-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  logic [31:0] prog [$];
  initial begin
    logic [31:0] c, s, c15, d, pi_ref;
    // ---------------- program ----------------
    prog = '{
      /*  0 */ lui(10, 16'h0009),
      /*  1 */ ori(10, 10, 16'hC540),          // r10 = 640320
      /*  2 */ lui(11, 16'h00CF),
      /*  3 */ ori(11, 11, 16'h6371),          // r11 = 13591409
      /*  4 */ addiu(12, 0, 12),
      /*  5 */ mul(13, 11, 12),                // r13 = 12 * 13591409
      /*  6 */ addiu(1, 0, 5),
      /*  7 */ balc(40 - 8),                   // r2 = fact(5)
      /*  8 */ sw(2, 16'h100, 0),
      /*  9 */ mtc1(10, 1),
      /* 10 */ cvt_s_w(1, 1),                  // f1 = 640320.0
      /* 11 */ sqrt_s(2, 1),                   // f2 = sqrt(f1)
      /* 12 */ mul_s(3, 1, 2),                 // f3 = 640320^1.5
      /* 13 */ mtc1(13, 4),
      /* 14 */ cvt_s_w(4, 4),                  // f4 = 163096908.0
      /* 15 */ div_s(8, 3, 4),                 // f8 = pi
      /* 16 */ swc1(8, 16'h104, 0),
      /* 17 */ lwc1(9, 16'h104, 0),
      /* 18 */ mfc1(5, 9),
      /* 19 */ sw(5, 16'h108, 0),
      /* 20 */ addiu(6, 0, 1),
      /* 21 */ addiu(7, 0, 4),
      /* 22 */ addiu(8, 0, 3),
      /* 23 */ mul(6, 6, 8),                   // loop: r6 *= 3
      /* 24 */ addiu(7, 7, -1),
      /* 25 */ bnezc(7, 23 - 26),
      /* 26 */ sw(6, 16'h10C, 0),              // 3^4
      /* 27 */ cmp_lt_s(10, 9, 1),             // pi < 640320 -> all ones
      /* 28 */ mfc1(9, 10),
      /* 29 */ sw(9, 16'h110, 0),
      /* 30 */ mov_s(11, 2),                  // f11 = sqrt(640320)
      /* 31 */ maddf_s(11, 1, 2),              // f11 += 640320 * f2 (fused, f11 bypassed)
      /* 32 */ swc1(11, 16'h114, 0),
      /* 33 */ lw(21, 16'h100, 0),              // 120, used right away
      /* 34 */ addiu(20, 21, -119),
      /* 35 */ sw(20, 16'h200, 0),             // done flag = 1
      /* 36 */ bc(-1),                         // spin
      nop(), nop(), nop(),
      // fact(r1) -> r2
      /* 40 */ addiu(2, 0, 1),
      /* 41 */ beqzc(1, 45 - 42),
      /* 42 */ mul(2, 2, 1),
      /* 43 */ addiu(1, 1, -1),
      /* 44 */ bc(41 - 45),
      /* 45 */ jic(31, 0)
    };
    for (int i = 0; i < 16384; i++) u_mem.mem[i] = 0;
    foreach (prog[i]) u_mem.mem[i] = prog[i];

    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (u_mem.mem[16'h200 >> 2] == 1);
    repeat (5) @(posedge clk);
    $display("program finished after %0d cycles", cycles);

    c = to_bits(640320.0);
    s = to_bits($sqrt(to_real(c)));
    c15 = to_bits(to_real(c) * to_real(s));
    d = to_bits(163096908.0);
    pi_ref = to_bits(to_real(c15) / to_real(d));
    check("fact(5)", u_mem.mem[16'h100 >> 2], 32'd120);
    check("pi (reference)", u_mem.mem[16'h104 >> 2], pi_ref);
    check("pi (published bits)", u_mem.mem[16'h104 >> 2], 32'h40490FDA);
    check("pi reloaded", u_mem.mem[16'h108 >> 2], pi_ref);
    check("3^4", u_mem.mem[16'h10C >> 2], 32'd81);
    check("cmp.lt.s", u_mem.mem[16'h110 >> 2], 32'hFFFF_FFFF);
    // s + c*s is exact in double precision (48 significant bits), so one
    // rounding to single gives the fused result
    check("maddf.s", u_mem.mem[16'h114 >> 2], to_bits(to_real(s) + to_real(c) * to_real(s)));
    check("f2 = sqrt(640320)", dut.u_fp_rf.regs[2], s);
    check("f3 = 640320^1.5", dut.u_fp_rf.regs[3], c15);

    happened("branches resolved", n_branch);
    happened("taken, predicted correctly", n_pred_ok_taken);
    happened("mispredictions", n_mispredict);
    happened("bypassed operands", n_bypass);
    happened("bypassed FMA addends", n_acc_bypass);
    happened("dependence stall cycles", n_dep_stall);
    happened("memory stall cycles", n_mem_stall);
    happened("L1I misses", n_ic_miss);
    happened("L1D misses", n_dc_miss);
    happened("L2 misses", n_l2_miss);
    happened("fetch queue full cycles", n_ifq_full);
    happened("WB INT writes", n_wb[WB_INT]);
    happened("WB INT_LD writes", n_wb[WB_INT_LD]);
    happened("WB FP_LD writes", n_wb[WB_FP_LD]);
    happened("WB FP writes", n_wb[WB_FP]);
    happened("WB FP2 writes", n_wb[WB_FP2]);
    happened("WB FP3 writes", n_wb[WB_FP3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
