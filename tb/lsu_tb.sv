// Self-checking testbench for lsu. A data-cache model answers from a word
// array, sometimes at once and sometimes after random waiting cycles; the
// unit's stall request is fed back as the global stall, as in the core.
// Random loads and stores of every size and sign are issued one per cycle;
// loads are checked against a shadow memory on the INT_LD or FP_LD port,
// with the result due exactly two (non-stalled) cycles after issue, and
// stores are checked in the array. Address = base + sign-extended offset.
module lsu_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic stall, stall_req;
  uop_t uop;
  logic [31:0] a, b;
  logic dc_req, dc_we, dc_ready;
  logic [31:0] dc_addr, dc_wdata, dc_rdata;
  logic [3:0] dc_wstrb;
  wb_port_t wb_int, wb_fp;
  int checks = 0, failures = 0;
  logic [31:0] dmem [256], shadow [256];
  int wait_left = 0;

  lsu dut (.*);
  always #5 clk = ~clk;
  assign stall = stall_req;

  // data cache model
  assign dc_rdata = dmem[dc_addr[9:2]];
  assign dc_ready = dc_req && wait_left == 0;
  always @(posedge clk) begin
    if (dc_req && dc_ready && dc_we)
      for (int k = 0; k < 4; k++) if (dc_wstrb[k]) dmem[dc_addr[9:2]][8*k +: 8] <= dc_wdata[8*k +: 8];
  end
  // an access entering the cache stage waits 0..3 cycles (0 three times in four)
  always @(posedge clk) begin
    if (!stall) wait_left <= (in_valid && $urandom % 4 == 0) ? int'($urandom % 4) : 0;
    else if (wait_left > 0) wait_left <= wait_left - 1;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results: value, register, fp flag and due tick
  logic [31:0] e_val [$];
  logic [4:0]  e_idx [$];
  logic        e_fp  [$];
  int          e_due [$];
  int tick = 0;
  logic stall_at_edge = 0;
  int n_stall = 0;
  always @(posedge clk) begin
    n_stall += int'(stall);
    stall_at_edge <= stall;
    if (rst_n && !stall) tick <= tick + 1;
  end

  // a write-back register holds its value through stalled cycles: look at
  // it only after an edge that moved the pipeline
  always @(negedge clk) if (rst_n && !stall_at_edge) begin
    if (wb_int.en || wb_fp.en) begin
      wb_port_t w;
      w = wb_int.en ? wb_int : wb_fp;
      checks++;
      if (e_val.size() == 0 || w.data != e_val[0] || w.idx != e_idx[0] || w.fp != e_fp[0] ||
          tick != e_due[0] || (wb_int.en && wb_fp.en)) begin
        failures++;
        if (failures < 10) $display("FAIL load got %h exp %h tick %0d due %0d", w.data,
                                    e_val.size() ? e_val[0] : 0, tick, e_due.size() ? e_due[0] : -1);
      end
      if (e_val.size()) begin
        void'(e_val.pop_front()); void'(e_idx.pop_front()); void'(e_fp.pop_front()); void'(e_due.pop_front());
      end
    end
  end

  initial begin
    ls_op_e op;
    logic [31:0] addr, w;
    logic [1:0] bo;
    for (int i = 0; i < 256; i++) begin dmem[i] = $urandom; shadow[i] = dmem[i]; end
    uop = '0; a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      while (stall) @(negedge clk);
      op = ls_op_e'($urandom % 8);
      uop = '0; uop.unit = U_LSU; uop.op = op;
      a = 32'h100 + ($urandom % 64) * 4;
      uop.imm = {{16{1'b1}}, 16'hFF00} + 32'(($urandom % 64) * 4);   // -256 .. +0
      addr = a + uop.imm;
      case (op)
        LS_LH, LS_LHU, LS_SH: addr[1:0] = 2'($urandom % 2) << 1;
        LS_LW, LS_SW:         addr[1:0] = 0;
        default:              addr[1:0] = 2'($urandom);
      endcase
      uop.imm = addr - a;
      b = $urandom;
      bo = addr[1:0];
      w = shadow[addr[9:2]];
      if (op inside {LS_SB, LS_SH, LS_SW}) begin
        case (op)
          LS_SB: shadow[addr[9:2]][8*bo +: 8] = b[7:0];
          LS_SH: shadow[addr[9:2]][16*bo[1] +: 16] = b[15:0];
          default: shadow[addr[9:2]] = b;
        endcase
      end else begin
        uop.d = '{en: 1, fp: ($urandom % 2 == 0) && op == LS_LW, idx: 5'($urandom % 31 + 1)};
        case (op)
          LS_LB:  e_val.push_back({{24{w[8*bo+7]}}, w[8*bo +: 8]});
          LS_LBU: e_val.push_back({24'd0, w[8*bo +: 8]});
          LS_LH:  e_val.push_back({{16{w[16*bo[1]+15]}}, w[16*bo[1] +: 16]});
          LS_LHU: e_val.push_back({16'd0, w[16*bo[1] +: 16]});
          default: e_val.push_back(w);
        endcase
        e_idx.push_back(uop.d.idx); e_fp.push_back(uop.d.fp); e_due.push_back(tick + 2);
      end
      in_valid = 1;
      @(negedge clk);
      while (stall) @(negedge clk);
      in_valid = 0;
    end
    repeat (10) @(negedge clk);
    checks++; if (e_val.size() != 0) failures++;
    checks++; if (n_stall == 0) failures++;
    for (int i = 0; i < 256; i++) begin checks++; if (dmem[i] != shadow[i]) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
