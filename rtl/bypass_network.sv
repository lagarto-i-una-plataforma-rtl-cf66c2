// Bypass network: supplies the operands of the instruction in the first
// execute stage (two, plus the old destination value of a fused multiply-
// add), taking each from a write-back port when that port is
// writing the operand's register in the same cycle and from the value read
// at issue otherwise.
//
// Because results stay on their write-back port for exactly one cycle and
// dispatch issues a consumer no earlier than the cycle before its producer
// reaches write-back, this single comparison point covers every
// producer-consumer distance: a dependent instruction runs back to back with
// a one-stage producer, and the register file's write-through read covers
// the cycle after. Forwarding between all units (integer, load/store and FP)
// follows the design's "complete bypass network"; forwarding only into the
// first execute stage is this implementation's choice. Purely combinational.
module bypass_network
  import lagarto_pkg::*;
(
  input  reg_ref_t    s1,
  input  reg_ref_t    s2,
  input  reg_ref_t    s3,        // third operand (old fd of a fused multiply-add)
  input  logic [31:0] s1_read,   // value captured at issue
  input  logic [31:0] s2_read,
  input  logic [31:0] s3_read,
  input  wb_port_t    wb [NWB],
  output logic [31:0] op1,
  output logic [31:0] op2,
  output logic [31:0] op3,
  output logic        hit1,      // operand came from a write-back port
  output logic        hit2,
  output logic        hit3
);
  always_comb begin
    op1 = s1_read; op2 = s2_read; op3 = s3_read;
    hit1 = 1'b0;   hit2 = 1'b0;   hit3 = 1'b0;
    for (int p = 0; p < NWB; p++) begin
      if (s1.en && wb[p].en && wb[p].fp == s1.fp && wb[p].idx == s1.idx &&
          !(s1.idx == 0 && !s1.fp)) begin
        op1 = wb[p].data; hit1 = 1'b1;
      end
      if (s2.en && wb[p].en && wb[p].fp == s2.fp && wb[p].idx == s2.idx &&
          !(s2.idx == 0 && !s2.fp)) begin
        op2 = wb[p].data; hit2 = 1'b1;
      end
      if (s3.en && wb[p].en && wb[p].fp == s3.fp && wb[p].idx == s3.idx &&
          !(s3.idx == 0 && !s3.fp)) begin
        op3 = wb[p].data; hit3 = 1'b1;
      end
    end
  end
endmodule
