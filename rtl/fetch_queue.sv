// Instruction fetch queue: a DEPTH-entry first-in first-out buffer of
// fetched instructions (PC, instruction word, prediction) between fetch and
// decode, so that fetch can run ahead while the back end is held.
//
// Push when push && !full; pop when pop && !empty; both may happen in the
// same cycle. head is the oldest entry and is valid while !empty. flush
// (after a mispredicted branch) empties the queue. The queue is named in the
// design's block diagram; its depth and the ready/valid handshake are this
// implementation's choices.
module fetch_queue
  import lagarto_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         flush,
  input  logic         push,
  input  fetch_entry_t din,
  output logic         full,
  input  logic         pop,
  output fetch_entry_t head,
  output logic         empty
);
  localparam int unsigned AW = $clog2(DEPTH);
  fetch_entry_t mem [DEPTH];
  logic [AW:0] count;
  logic [AW-1:0] rp, wp;
  logic do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == 0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign head    = mem[rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0; rp <= '0; wp <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (flush) begin
      count <= '0; rp <= '0; wp <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

endmodule
