// Register read / issue stage ("Dispatch"): holds one decoded micro-op,
// waits until it may issue, reads its operands and issues it to its unit.
//
// Issue is in order, one instruction per cycle. A scoreboard keeps, for each
// of the 64 registers (32 integer, 32 FP), the number of cycles until its
// pending result reaches a write-back port. Issuing a producer of latency L
// sets the count to L-1; a consumer issues once the count is zero, so it
// reaches execute exactly when the result is on the bypass network (back to
// back for one-stage units). The same rule on the destination keeps writes
// to one register in order. The latencies come from the design's unit table;
// the scoreboard is this implementation's way of enforcing them.
//
// A fused multiply-add also reads its destination (acc): ra3/fp_rd3 read it
// from the FP file into ex_s3, and since the destination must be ready
// before issue anyway, the scoreboard needs no extra check for it.
//
// The issue register (ex_*) is the input of the first execute stage and is
// shared by all units. stall (a load/store waiting on the data cache) freezes
// the stage, the scoreboard and the issue register; flush (a mispredicted
// branch in execute) discards the held micro-op and issues nothing.
module dispatch_unit
  import lagarto_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,
  input  logic        flush,
  // from decode
  input  logic        in_valid,
  input  uop_t        in_uop,
  output logic        in_ready,
  // register file read ports (integer and FP files, two reads each)
  output logic [4:0]  ra1,
  output logic [4:0]  ra2,
  input  logic [31:0] int_rd1,
  input  logic [31:0] int_rd2,
  input  logic [31:0] fp_rd1,
  input  logic [31:0] fp_rd2,
  output logic [4:0]  ra3,          // FP file third read: old fd of a fused multiply-add
  input  logic [31:0] fp_rd3,
  // issue register
  output logic        ex_valid,
  output uop_t        ex_uop,
  output logic [31:0] ex_s1,
  output logic [31:0] ex_s2,
  output logic [31:0] ex_s3,
  // event for statistics
  output logic        dep_stall     // held back by a dependence this cycle
);
  logic       rr_valid;
  uop_t       rr_uop;
  logic [3:0] cnt [2][NREGS];
  logic       can_issue, ready1, ready2, readyd;

  function automatic logic reg_ready(input reg_ref_t r, input logic [3:0] c);
    return !r.en || (!r.fp && r.idx == 0) || c == 0;
  endfunction

  function automatic logic [3:0] latency(input unit_e u);
    unique case (u)
      U_LSU:   return 4'(LAT_LSU);
      U_FP4:   return 4'(LAT_FP4);
      U_FP12:  return 4'(LAT_FP12);
      default: return 4'(LAT_INT);
    endcase
  endfunction

  assign ready1 = reg_ready(rr_uop.s1, cnt[rr_uop.s1.fp][rr_uop.s1.idx]);
  assign ready2 = reg_ready(rr_uop.s2, cnt[rr_uop.s2.fp][rr_uop.s2.idx]);
  assign readyd = reg_ready(rr_uop.d,  cnt[rr_uop.d.fp][rr_uop.d.idx]);
  assign can_issue = rr_valid && ready1 && ready2 && readyd && !stall && !flush;
  assign dep_stall = rr_valid && !stall && !flush && !(ready1 && ready2 && readyd);
  assign in_ready  = (!rr_valid || can_issue) && !stall;

  assign ra1 = rr_uop.s1.idx;
  assign ra2 = rr_uop.s2.idx;
  assign ra3 = rr_uop.d.idx;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_valid <= 1'b0;
      rr_uop   <= '0;
      ex_valid <= 1'b0;
      ex_uop   <= '0;
      ex_s1    <= '0;
      ex_s2    <= '0;
      ex_s3    <= '0;
      for (int f = 0; f < 2; f++)
        for (int r = 0; r < NREGS; r++) cnt[f][r] <= '0;
    end else if (!stall) begin
      for (int f = 0; f < 2; f++)
        for (int r = 0; r < NREGS; r++)
          if (cnt[f][r] != 0) cnt[f][r] <= cnt[f][r] - 4'd1;
      if (can_issue && rr_uop.d.en)
        cnt[rr_uop.d.fp][rr_uop.d.idx] <= latency(rr_uop.unit) - 4'd1;

      ex_valid <= can_issue && rr_uop.unit != U_NONE;
      if (can_issue) begin
        ex_uop <= rr_uop;
        ex_s1  <= rr_uop.s1.fp ? fp_rd1 : int_rd1;
        ex_s2  <= rr_uop.s2.fp ? fp_rd2 : int_rd2;
        ex_s3  <= fp_rd3;
      end

      if (flush)          rr_valid <= 1'b0;
      else if (in_ready) begin
        rr_valid <= in_valid;
        if (in_valid) rr_uop <= in_uop;
      end
    end
  end
endmodule
