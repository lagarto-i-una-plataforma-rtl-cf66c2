// Dynamic branch predictor: a direct-mapped branch target buffer whose
// entries each hold a tag, a target and a 2-bit saturating counter.
//
// Lookup (combinational, at fetch): the entry indexed by PC[IDX+1:2] hits
// when valid and its tag matches the rest of the PC; the branch is predicted
// taken to the stored target when the counter is 2 or 3. Update (at the end of
// the cycle in which the branch unit resolves a branch): a taken branch with no entry
// allocates one with counter 2; an existing entry counts up when taken,
// down when not taken, and takes the new target when taken. Not-taken
// branches without an entry allocate nothing. The design says only that the
// predictor is dynamic; the BTB with 2-bit counters and its size are this
// implementation's choices.
module branch_predictor
  import lagarto_pkg::*;
#(
  parameter int unsigned ENTRIES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] lookup_pc,
  output logic        pred_taken,
  output logic [31:0] pred_target,
  input  br_resolve_t update
);
  localparam int unsigned IW = $clog2(ENTRIES);
  localparam int unsigned TW = 30 - IW;

  typedef struct packed {
    logic          valid;
    logic [TW-1:0] tag;
    logic [31:0]   target;
    logic [1:0]    ctr;
  } btb_entry_t;

  btb_entry_t btb [ENTRIES];
  btb_entry_t e, ue;
  logic [IW-1:0] li, ui;

  assign li = lookup_pc[IW+1:2];
  assign e  = btb[li];
  assign pred_taken  = e.valid && e.tag == lookup_pc[31:IW+2] && e.ctr[1];
  assign pred_target = e.target;

  assign ui = update.pc[IW+1:2];
  assign ue = btb[ui];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) btb[i] <= '0;
    end else if (update.valid) begin
      if (ue.valid && ue.tag == update.pc[31:IW+2]) begin
        if (update.taken) begin
          btb[ui].ctr    <= (ue.ctr == 2'd3) ? 2'd3 : ue.ctr + 2'd1;
          btb[ui].target <= update.target;
        end else begin
          btb[ui].ctr    <= (ue.ctr == 2'd0) ? 2'd0 : ue.ctr - 2'd1;
        end
      end else if (update.taken) begin
        btb[ui] <= '{valid: 1'b1, tag: update.pc[31:IW+2], target: update.target, ctr: 2'd2};
      end
    end
  end
endmodule
