// Lagarto I core: a scalar, in-order, five-stage MIPS32 Release 6 pipeline
// with integer and single-precision floating-point units, a dynamic branch
// predictor, a full bypass network and a two-level cache hierarchy.
//
//   fetch ──► fetch queue ──► decode ──► register read / issue ──► execute ──► write-back
//     ▲  └─ branch predictor                     (dispatch)          │
//     └───────────── redirect on misprediction ◄── branch unit ◄─────┘
//
// Execute units and their stage counts: integer 1, branch 1, load/store 2,
// simple FP 1, complex FP 4 (add, subtract, multiply, conversions) and 12
// (divide, square root). Each unit has its own write-back port (INT, INT_LD,
// FP_LD, FP, FP2, FP3); the ports write the register files and feed the
// bypass network. L1 instruction and data caches share the unified L2 cache
// through the cache controller; the L2 talks to main memory through the
// mem_* port (whole-line reads, single-word writes with byte strobes, each
// answered by one mem_ready pulse).
//
// The wb output mirrors the six write-back ports for observation; the ev_*
// outputs pulse once per event for performance counting. Everything the
// design leaves open (cache organisation and sizes, predictor organisation,
// queue depth, reset PC) is a parameter of this module.
module lagarto_top
  import lagarto_pkg::*;
#(
  parameter logic [31:0] RESET_PC    = 32'h0000_0000,
  parameter int unsigned L1I_SETS    = 256,
  parameter int unsigned L1D_SETS    = 256,
  parameter int unsigned L2_SETS     = 1024,
  parameter int unsigned LINE_WORDS  = 4,
  parameter int unsigned BTB_ENTRIES = 64,
  parameter int unsigned IFQ_DEPTH   = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // main memory
  output logic                     mem_req,
  output logic                     mem_we,
  output logic [31:0]              mem_addr,
  output logic [31:0]              mem_wdata,
  output logic [3:0]               mem_wstrb,
  input  logic [LINE_WORDS*32-1:0] mem_rline,
  input  logic                     mem_ready,
  // observation
  output wb_port_t                 wb [NWB],
  output logic                     ev_branch,
  output logic                     ev_mispredict,
  output logic                     ev_bypass,
  output logic                     ev_dep_stall,
  output logic                     ev_mem_stall,
  output logic                     ev_ic_miss,
  output logic                     ev_dc_miss,
  output logic                     ev_l2_miss,
  output logic                     ev_ifq_full
);
  // ---------------- fetch ----------------
  logic         ic_req, ic_ready, bp_taken, q_push, q_full, q_empty;
  logic [31:0]  ic_addr, ic_rdata, bp_pc, bp_target;
  fetch_entry_t q_din, q_head;
  br_resolve_t  resolve;
  logic         flush;

  assign flush = resolve.mispredict;

  fetch_unit #(.RESET_PC(RESET_PC)) u_fetch (
    .clk, .rst_n,
    .redirect(flush), .redirect_pc(resolve.redirect_pc),
    .ic_req, .ic_addr, .ic_rdata, .ic_ready,
    .bp_pc, .bp_taken, .bp_target,
    .q_push, .q_data(q_din), .q_full
  );

  branch_predictor #(.ENTRIES(BTB_ENTRIES)) u_bp (
    .clk, .rst_n, .lookup_pc(bp_pc), .pred_taken(bp_taken), .pred_target(bp_target),
    .update(resolve)
  );

  // ---------------- fetch queue and decode ----------------
  logic dec_in_ready, dec_valid, disp_in_ready;
  uop_t dec_uop;

  fetch_queue #(.DEPTH(IFQ_DEPTH)) u_ifq (
    .clk, .rst_n, .flush, .push(q_push), .din(q_din), .full(q_full),
    .pop(dec_in_ready), .head(q_head), .empty(q_empty)
  );

  decoder u_dec (
    .clk, .rst_n, .flush,
    .in_valid(!q_empty), .in_entry(q_head), .in_ready(dec_in_ready),
    .out_valid(dec_valid), .out_uop(dec_uop), .out_ready(disp_in_ready)
  );

  // ---------------- register read / issue ----------------
  logic        stall, ex_valid, dep_stall;
  uop_t        ex_uop;
  logic [4:0]  ra1, ra2, ra3;
  logic [31:0] int_rd1, int_rd2, fp_rd1, fp_rd2, fp_rd3, ex_s1, ex_s2, ex_s3;

  dispatch_unit u_disp (
    .clk, .rst_n, .stall, .flush,
    .in_valid(dec_valid), .in_uop(dec_uop), .in_ready(disp_in_ready),
    .ra1, .ra2, .int_rd1, .int_rd2, .fp_rd1, .fp_rd2, .ra3, .fp_rd3,
    .ex_valid, .ex_uop, .ex_s1, .ex_s2, .ex_s3, .dep_stall
  );

  regfile #(.IS_FP(1'b0)) u_int_rf (
    .clk, .rst_n, .wr(wb), .ra1, .ra2, .ra3, .rd1(int_rd1), .rd2(int_rd2), .rd3()
  );
  regfile #(.IS_FP(1'b1)) u_fp_rf (
    .clk, .rst_n, .wr(wb), .ra1, .ra2, .ra3, .rd1(fp_rd1), .rd2(fp_rd2), .rd3(fp_rd3)
  );

  // ---------------- execute ----------------
  logic [31:0] op1, op2, op3;
  logic        hit1, hit2, hit3;
  wb_port_t    wb_alu, wb_br, wb_ld_int, wb_ld_fp, wb_fps, wb_fp4, wb_fp12;

  bypass_network u_bypass (
    .s1(ex_uop.s1), .s2(ex_uop.s2), .s3(ex_uop.acc ? ex_uop.d : '0),
    .s1_read(ex_s1), .s2_read(ex_s2), .s3_read(ex_s3),
    .wb, .op1, .op2, .op3, .hit1, .hit2, .hit3
  );

  int_alu u_alu (
    .clk, .rst_n, .stall, .in_valid(ex_valid && ex_uop.unit == U_ALU),
    .uop(ex_uop), .a(op1), .b(op2), .wb(wb_alu)
  );

  branch_unit u_br (
    .clk, .rst_n, .stall, .in_valid(ex_valid && ex_uop.unit == U_BR),
    .uop(ex_uop), .a(op1), .b(op2), .resolve, .wb(wb_br)
  );

  logic        dc_req, dc_we, dc_ready;
  logic [31:0] dc_addr, dc_wdata, dc_rdata;
  logic [3:0]  dc_wstrb;

  lsu u_lsu (
    .clk, .rst_n, .stall, .in_valid(ex_valid && ex_uop.unit == U_LSU),
    .uop(ex_uop), .a(op1), .b(op2),
    .dc_req, .dc_we, .dc_addr, .dc_wdata, .dc_wstrb, .dc_rdata, .dc_ready,
    .stall_req(stall), .wb_int(wb_ld_int), .wb_fp(wb_ld_fp)
  );

  fp_simple_unit u_fps (
    .clk, .rst_n, .stall, .in_valid(ex_valid && ex_uop.unit == U_FPS),
    .uop(ex_uop), .a(op1), .b(op2), .wb(wb_fps)
  );

  fp_complex4_unit u_fp4 (
    .clk, .rst_n, .stall, .in_valid(ex_valid && ex_uop.unit == U_FP4),
    .uop(ex_uop), .a(op1), .b(op2), .c(op3), .wb(wb_fp4)
  );

  fp_complex12_unit u_fp12 (
    .clk, .rst_n, .stall, .in_valid(ex_valid && ex_uop.unit == U_FP12),
    .uop(ex_uop), .a(op1), .b(op2), .wb(wb_fp12)
  );

  // ---------------- write-back ----------------
  // the integer unit and branch links share the INT port: both take one
  // stage and only one instruction issues per cycle
  assign wb[WB_INT]    = wb_alu.en ? wb_alu : wb_br;
  assign wb[WB_INT_LD] = wb_ld_int;
  assign wb[WB_FP_LD]  = wb_ld_fp;
  assign wb[WB_FP]     = wb_fps;
  assign wb[WB_FP2]    = wb_fp4;
  assign wb[WB_FP3]    = wb_fp12;

  // ---------------- caches ----------------
  logic [LINE_WORDS*32-1:0] i_rline, d_rline, l2_rline;
  logic        icm_req, icm_we, icm_ready, dcm_req, dcm_we, dcm_ready;
  logic [31:0] icm_addr, icm_wdata, dcm_addr, dcm_wdata;
  logic [3:0]  icm_wstrb, dcm_wstrb;
  logic        l2_req, l2_we, l2_ready;
  logic [31:0] l2_addr, l2_wdata;
  logic [3:0]  l2_wstrb;

  cache #(.SETS(L1I_SETS), .LINE_WORDS(LINE_WORDS), .UP_WORDS(1)) u_l1i (
    .clk, .rst_n,
    .cpu_req(ic_req), .cpu_we(1'b0), .cpu_addr(ic_addr), .cpu_wdata('0), .cpu_wstrb('0),
    .cpu_rdata(ic_rdata), .cpu_ready(ic_ready),
    .mem_req(icm_req), .mem_we(icm_we), .mem_addr(icm_addr), .mem_wdata(icm_wdata),
    .mem_wstrb(icm_wstrb), .mem_rline(i_rline), .mem_ready(icm_ready),
    .miss_start(ev_ic_miss)
  );

  cache #(.SETS(L1D_SETS), .LINE_WORDS(LINE_WORDS), .UP_WORDS(1)) u_l1d (
    .clk, .rst_n,
    .cpu_req(dc_req), .cpu_we(dc_we), .cpu_addr(dc_addr), .cpu_wdata(dc_wdata),
    .cpu_wstrb(dc_wstrb), .cpu_rdata(dc_rdata), .cpu_ready(dc_ready),
    .mem_req(dcm_req), .mem_we(dcm_we), .mem_addr(dcm_addr), .mem_wdata(dcm_wdata),
    .mem_wstrb(dcm_wstrb), .mem_rline(d_rline), .mem_ready(dcm_ready),
    .miss_start(ev_dc_miss)
  );

  cache_controller #(.LINE_WORDS(LINE_WORDS)) u_cc (
    .clk, .rst_n,
    .i_req(icm_req), .i_addr(icm_addr), .i_rline, .i_ready(icm_ready),
    .d_req(dcm_req), .d_we(dcm_we), .d_addr(dcm_addr), .d_wdata(dcm_wdata),
    .d_wstrb(dcm_wstrb), .d_rline, .d_ready(dcm_ready),
    .l2_req, .l2_we, .l2_addr, .l2_wdata, .l2_wstrb, .l2_rline, .l2_ready
  );

  cache #(.SETS(L2_SETS), .LINE_WORDS(LINE_WORDS), .UP_WORDS(LINE_WORDS)) u_l2 (
    .clk, .rst_n,
    .cpu_req(l2_req), .cpu_we(l2_we), .cpu_addr(l2_addr), .cpu_wdata(l2_wdata),
    .cpu_wstrb(l2_wstrb), .cpu_rdata(l2_rline), .cpu_ready(l2_ready),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_wstrb, .mem_rline, .mem_ready,
    .miss_start(ev_l2_miss)
  );

  // ---------------- events ----------------
  assign ev_branch     = resolve.valid;
  assign ev_mispredict = resolve.mispredict;
  assign ev_bypass     = ex_valid && !stall && (hit1 || hit2 || hit3);
  assign ev_dep_stall  = dep_stall;
  assign ev_mem_stall  = stall;
  assign ev_ifq_full   = q_full;
endmodule
