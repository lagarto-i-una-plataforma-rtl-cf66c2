// Shared types and constants of the Lagarto I core.
//
// The core is a scalar, in-order, 32-bit pipeline for the MIPS32 Release 6
// integer and single-precision floating-point instructions. Its five stages
// are fetch, decode, register read / issue, execute and write-back. Execution
// units have fixed latencies (integer 1, branch 1, load/store 2, simple FP 1,
// complex FP 4 and 12 stages), and each unit owns its write-back port.
//
// This package holds the micro-op format that the decoder produces and the
// rest of the pipeline consumes, the per-unit operation codes, and the
// write-back port record used by the register files and the bypass network.
package lagarto_pkg;

  localparam int unsigned XLEN = 32;
  localparam int unsigned NREGS = 32;

  // Unit latencies in execute stages (Table 1 of the design description).
  localparam int unsigned LAT_INT   = 1;
  localparam int unsigned LAT_BR    = 1;
  localparam int unsigned LAT_LSU   = 2;
  localparam int unsigned LAT_FPS   = 1;
  localparam int unsigned LAT_FP4   = 4;
  localparam int unsigned LAT_FP12  = 12;

  typedef enum logic [2:0] {
    U_NONE = 3'd0, U_ALU = 3'd1, U_BR = 3'd2, U_LSU = 3'd3,
    U_FPS  = 3'd4, U_FP4 = 3'd5, U_FP12 = 3'd6
  } unit_e;

  typedef enum logic [4:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOR, ALU_SLT, ALU_SLTU,
    ALU_SLL, ALU_SRL, ALU_SRA, ALU_MUL, ALU_MUH, ALU_MULU, ALU_MUHU,
    ALU_SELEQZ, ALU_SELNEZ, ALU_PASSA
  } alu_op_e;

  typedef enum logic [4:0] {
    BR_ALWAYS, BR_EQ, BR_NE, BR_LT, BR_GE, BR_LTU, BR_GEU, BR_JIC
  } br_op_e;

  typedef enum logic [4:0] {
    LS_LB, LS_LBU, LS_LH, LS_LHU, LS_LW, LS_SB, LS_SH, LS_SW
  } ls_op_e;

  typedef enum logic [4:0] {
    FPS_MOV, FPS_ABS, FPS_NEG, FPS_CMP_AF, FPS_CMP_EQ, FPS_CMP_LT, FPS_CMP_LE,
    FPS_MTC1
  } fps_op_e;

  typedef enum logic [4:0] {
    FP4_ADD, FP4_SUB, FP4_MUL, FP4_CVT_S_W, FP4_CVT_W_S, FP4_TRUNC_W_S,
    FP4_MADDF, FP4_MSUBF
  } fp4_op_e;

  typedef enum logic [4:0] {
    FP12_DIV, FP12_SQRT
  } fp12_op_e;

  // Register reference: which file and which register.
  typedef struct packed {
    logic       en;   // operand / destination used
    logic       fp;   // 1: floating-point file, 0: integer file
    logic [4:0] idx;
  } reg_ref_t;

  typedef struct packed {
    logic        valid;
    logic [31:0] pc;
    unit_e       unit;
    logic [4:0]  op;          // alu_op_e / br_op_e / ls_op_e / fp*_op_e
    reg_ref_t    s1;
    reg_ref_t    s2;
    reg_ref_t    d;
    logic        use_imm;     // second operand of the ALU is imm
    logic [31:0] imm;
    logic        link;        // branch writes PC+4 to its destination
    logic        acc;         // destination is also read (fused multiply-add)
    logic        pred_taken;  // fetch followed a predicted-taken branch
    logic [31:0] pred_target;
  } uop_t;

  // One write-back port: a register write that is also visible on the
  // bypass network during the same cycle.
  typedef struct packed {
    logic        en;
    logic        fp;
    logic [4:0]  idx;
    logic [31:0] data;
  } wb_port_t;

  // Write-back ports, named after the write-back paths of the design.
  localparam int unsigned WB_INT    = 0;  // integer unit and branch links
  localparam int unsigned WB_INT_LD = 1;  // loads into the integer file
  localparam int unsigned WB_FP_LD  = 2;  // loads into the FP file
  localparam int unsigned WB_FP     = 3;  // simple FP unit
  localparam int unsigned WB_FP2    = 4;  // 4-stage FP unit
  localparam int unsigned WB_FP3    = 5;  // 12-stage FP unit
  localparam int unsigned NWB       = 6;

  // Fetch-to-decode record.
  typedef struct packed {
    logic [31:0] pc;
    logic [31:0] instr;
    logic        pred_taken;
    logic [31:0] pred_target;
  } fetch_entry_t;

  // Branch resolution sent back to fetch and to the predictor.
  typedef struct packed {
    logic        valid;       // a branch resolved this cycle
    logic [31:0] pc;
    logic        taken;
    logic [31:0] target;
    logic        mispredict;  // fetch must restart at redirect_pc
    logic [31:0] redirect_pc;
  } br_resolve_t;

endpackage
