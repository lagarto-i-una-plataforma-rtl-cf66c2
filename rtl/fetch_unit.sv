// Fetch stage: keeps the program counter, reads the L1 instruction cache and
// pushes each instruction, with its PC and its prediction, into the fetch
// queue.
//
// Every cycle the PC is presented to the instruction cache and to the branch
// predictor. When the cache hits and the queue has room, the instruction is
// pushed and the PC moves to the predicted target if the predictor says
// taken, otherwise to PC+4. A redirect from the branch unit (misprediction)
// replaces the PC in the same cycle the queue is flushed; an instruction
// cache miss simply holds the PC until the line arrives. One instruction is
// fetched per cycle. The reset PC is a parameter (0 by default; the core has
// no MMU or boot ROM to require the MIPS reset vector).
module fetch_unit
  import lagarto_pkg::*;
#(
  parameter logic [31:0] RESET_PC = 32'h0000_0000
) (
  input  logic         clk,
  input  logic         rst_n,
  // redirect from the branch unit
  input  logic         redirect,
  input  logic [31:0]  redirect_pc,
  // L1 instruction cache, read only
  output logic         ic_req,
  output logic [31:0]  ic_addr,
  input  logic [31:0]  ic_rdata,
  input  logic         ic_ready,
  // branch predictor
  output logic [31:0]  bp_pc,
  input  logic         bp_taken,
  input  logic [31:0]  bp_target,
  // fetch queue
  output logic         q_push,
  output fetch_entry_t q_data,
  input  logic         q_full
);
  logic [31:0] pc;

  assign ic_req  = 1'b1;
  assign ic_addr = pc;
  assign bp_pc   = pc;
  assign q_push  = ic_ready && !q_full && !redirect;
  assign q_data  = '{pc: pc, instr: ic_rdata, pred_taken: bp_taken, pred_target: bp_target};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        pc <= RESET_PC;
    else if (redirect) pc <= redirect_pc;
    else if (q_push)   pc <= bp_taken ? bp_target : pc + 32'd4;
  end
endmodule
