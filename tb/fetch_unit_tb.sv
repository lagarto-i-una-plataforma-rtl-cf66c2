// Self-checking testbench for fetch_unit with a random-latency instruction
// cache model, a predictor model (PCs with bits [5:2] == 3 predicted taken
// to PC+0x40), a randomly full queue and random redirects. Every pushed
// entry is checked against the PC sequence a model computes: the reset PC,
// then PC+4 or the predicted target after each push, and the redirect PC
// after a redirect; the word and prediction must belong to that PC.
module fetch_unit_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0, redirect = 0;
  logic [31:0] redirect_pc, ic_addr, ic_rdata, bp_pc, bp_target;
  logic ic_req, ic_ready, bp_taken, q_push, q_full;
  fetch_entry_t q_data;
  int checks = 0, failures = 0;

  fetch_unit #(.RESET_PC(32'h0000_0400)) dut (.*);
  always #5 clk = ~clk;

  assign ic_rdata  = ic_addr ^ 32'hA5A5_0000;
  assign bp_taken  = bp_pc[5:2] == 4'd3;
  assign bp_target = bp_pc + 32'h40;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp_pc;
    int pushes = 0;
    ic_ready = 0; q_full = 0; redirect_pc = 0;
    exp_pc = 32'h0000_0400;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      ic_ready = $urandom % 4 != 0;
      q_full = $urandom % 5 == 0;
      redirect = $urandom % 17 == 0;
      redirect_pc = {16'd0, 14'($urandom), 2'b00};
      #1;
      checks++;
      if (ic_addr != exp_pc || bp_pc != exp_pc) failures++;
      checks++;
      if (q_push != (ic_ready && !q_full && !redirect)) failures++;
      if (q_push) begin
        pushes++;
        checks++;
        if (q_data.pc != exp_pc || q_data.instr != (exp_pc ^ 32'hA5A5_0000) ||
            q_data.pred_taken != (exp_pc[5:2] == 3) ||
            (q_data.pred_taken && q_data.pred_target != exp_pc + 32'h40)) failures++;
      end
      @(posedge clk);
      if (redirect) exp_pc = redirect_pc;
      else if (ic_ready && !q_full) exp_pc = (exp_pc[5:2] == 3) ? exp_pc + 32'h40 : exp_pc + 4;
    end
    checks++; if (pushes < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
