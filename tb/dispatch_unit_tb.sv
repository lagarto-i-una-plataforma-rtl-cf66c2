// Self-checking testbench for dispatch_unit. A stream of random micro-ops
// (all units, random integer/FP registers, so there are many dependences)
// is offered back to back, with random global stall cycles. A model computes
// the cycle each micro-op must issue: one after the previous issue, and not
// before every source and the destination are ready, where a result of a
// unit with latency L issued at cycle c is ready at c+L (latencies 1, 1, 2,
// 1, 4, 12 from the unit table). Cycles are counted only when not stalled.
// Each issue is checked for its cycle, its micro-op and the operand values
// read from the register-file models (including the third, FP-only read of
// a fused multiply-add's destination). Finally a flush must drop the held
// micro-op.
module dispatch_unit_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, flush = 0, in_valid = 0, in_ready, ex_valid, dep_stall;
  uop_t in_uop, ex_uop;
  logic [4:0] ra1, ra2, ra3;
  logic [31:0] int_rd1, int_rd2, fp_rd1, fp_rd2, fp_rd3, ex_s1, ex_s2, ex_s3;
  int checks = 0, failures = 0;

  dispatch_unit dut (.*);
  always #5 clk = ~clk;

  assign int_rd1 = {24'h11, 3'd0, ra1};
  assign int_rd2 = {24'h22, 3'd0, ra2};
  assign fp_rd1  = {24'h33, 3'd0, ra1};
  assign fp_rd2  = {24'h44, 3'd0, ra2};
  assign fp_rd3  = {24'h55, 3'd0, ra3};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lat(input unit_e u);
    case (u)
      U_LSU: return 2;
      U_FP4: return 4;
      U_FP12: return 12;
      default: return 1;
    endcase
  endfunction

  function automatic reg_ref_t rnd_ref();
    reg_ref_t r;
    r.en = $urandom % 4 != 0; r.fp = $urandom; r.idx = 5'($urandom % 6 + 1);
    return r;
  endfunction

  uop_t stream [$];
  int tick = 0;
  int ready_at [2][32];
  int last_issue = -1;
  int n_issued = 0, n_dep = 0;
  logic stall_at_edge;

  function automatic int rdy(input reg_ref_t r);
    return (!r.en) ? 0 : ready_at[r.fp][r.idx];
  endfunction

  // issue monitor: ex_valid just after a non-stalled edge means an issue at
  // the tick before that edge
  always @(posedge clk) begin
    stall_at_edge <= stall;
    if (rst_n && !stall) tick <= tick + 1;
  end

  always @(negedge clk) if (rst_n) begin
    n_dep += int'(dep_stall);
    if (!stall_at_edge && ex_valid && n_issued < stream.size()) begin
      uop_t u;
      int exp_t, t;
      u = stream[n_issued];
      t = tick - 1;
      exp_t = last_issue + 1;
      if (rdy(u.s1) > exp_t) exp_t = rdy(u.s1);
      if (rdy(u.s2) > exp_t) exp_t = rdy(u.s2);
      if (rdy(u.d)  > exp_t) exp_t = rdy(u.d);
      if (n_issued == 0) exp_t = t;        // the first issue defines the time origin
      checks++;
      if (t != exp_t || ex_uop != u ||
          (u.s1.en && ex_s1 != (u.s1.fp ? {24'h33, 3'd0, u.s1.idx} : {24'h11, 3'd0, u.s1.idx})) ||
          (u.s2.en && ex_s2 != (u.s2.fp ? {24'h44, 3'd0, u.s2.idx} : {24'h22, 3'd0, u.s2.idx})) ||
          (u.acc && ex_s3 != {24'h55, 3'd0, u.d.idx})) begin
        failures++;
        if (failures < 10) $display("FAIL uop %0d issued at tick %0d, expected %0d", n_issued, t, exp_t);
        if (failures < 3) for (int j = n_issued - 3; j <= n_issued; j++) $display("  %0d unit %0d s1 %b s2 %b d %b acc %b", j, stream[j].unit, stream[j].s1, stream[j].s2, stream[j].d, stream[j].acc);
      end
      if (u.d.en) ready_at[u.d.fp][u.d.idx] = t + lat(u.unit);
      last_issue = t;
      n_issued++;
    end
  end

  initial begin
    int k;
    for (int f = 0; f < 2; f++) for (int r = 0; r < 32; r++) ready_at[f][r] = 0;
    for (int i = 0; i < 3000; i++) begin
      uop_t u;
      u = '0;
      u.valid = 1; u.pc = i * 4;
      k = int'($urandom % 6) + 1;
      u.unit = unit_e'(k);
      u.op = $urandom;
      u.s1 = rnd_ref(); u.s2 = rnd_ref(); u.d = rnd_ref();
      if (u.unit == U_FP4 && u.d.en && u.d.fp && $urandom % 2 == 0) u.acc = 1'b1;
      stream.push_back(u);
    end
    in_uop = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    k = 0;
    while (k < stream.size()) begin
      @(negedge clk);
      stall = ($urandom % 10 == 0);
      in_valid = 1; in_uop = stream[k];
      @(posedge clk);
      if (in_ready) k++;
    end
    @(negedge clk); in_valid = 0; stall = 0;
    repeat (40) @(negedge clk);
    checks++; if (n_issued != stream.size()) begin failures++; $display("FAIL issued %0d", n_issued); end
    checks++; if (n_dep == 0) failures++;
    // flush drops the held micro-op: make it wait on a 12-cycle result, then flush
    in_valid = 1; in_uop = '0; in_uop.valid = 1; in_uop.unit = U_FP12; in_uop.d = '{en: 1, fp: 1, idx: 20};
    @(negedge clk);
    in_uop.unit = U_ALU; in_uop.s1 = '{en: 1, fp: 1, idx: 20}; in_uop.d = '{en: 1, fp: 0, idx: 21};
    @(negedge clk);
    in_valid = 0;
    @(negedge clk);
    flush = 1;
    @(negedge clk);
    flush = 0;
    n_issued = stream.size() + 10;      // stop the monitor
    repeat (20) begin
      @(negedge clk);
      checks++; if (ex_valid && ex_uop.d.idx == 21) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
