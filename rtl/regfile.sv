// Register file: 32 registers of 32 bits, three read ports, NWB write ports.
//
// One instance is the integer file (IS_FP=0, register 0 reads as zero) and
// one the floating-point file (IS_FP=1). Every write-back port of the core
// reaches both files; a file takes a write when the port's fp flag matches
// IS_FP. The scoreboard in dispatch guarantees that two ports never write
// the same register in the same cycle. Reads are combinational and see a
// write of the same cycle (write-through), so a result in write-back is
// visible to the instruction being issued. One write port per write-back
// path follows the separate INT, INT_LD, FP_LD, FP, FP2 and FP3 write-back
// signals of the design; the rest is conventional. The third read port
// serves the old destination value of a fused multiply-add in the FP file;
// the integer file leaves it unconnected.
module regfile
  import lagarto_pkg::*;
#(
  parameter bit          IS_FP = 1'b0,
  parameter int unsigned NW    = NWB
) (
  input  logic        clk,
  input  logic        rst_n,
  input  wb_port_t    wr [NW],
  input  logic [4:0]  ra1,
  input  logic [4:0]  ra2,
  input  logic [4:0]  ra3,
  output logic [31:0] rd1,
  output logic [31:0] rd2,
  output logic [31:0] rd3
);
  logic [31:0] regs [NREGS];

  function automatic logic [31:0] rd(input logic [4:0] a, input logic [31:0] stored, input wb_port_t w [NW]);
    logic [31:0] v;
    v = stored;
    for (int p = 0; p < NW; p++)
      if (w[p].en && w[p].fp == IS_FP && w[p].idx == a) v = w[p].data;
    if (!IS_FP && a == 0) v = 32'd0;
    return v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
    end else begin
      for (int p = 0; p < NW; p++)
        if (wr[p].en && wr[p].fp == IS_FP) regs[wr[p].idx] <= wr[p].data;
    end
  end

  assign rd1 = rd(ra1, regs[ra1], wr);
  assign rd2 = rd(ra2, regs[ra2], wr);
  assign rd3 = rd(ra3, regs[ra3], wr);

  // two ports must never write the same register of this file at once
  always_ff @(posedge clk) begin
    for (int p = 0; p < NW; p++)
      for (int q = p + 1; q < NW; q++)
        assert (!(rst_n && wr[p].en && wr[q].en && wr[p].fp == IS_FP && wr[q].fp == IS_FP &&
                  wr[p].idx == wr[q].idx))
          else $error("regfile: ports %0d and %0d write register %0d together", p, q, wr[p].idx);
  end
endmodule
