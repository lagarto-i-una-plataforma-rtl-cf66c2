// Self-checking testbench for branch_predictor: a reference model of the
// direct-mapped BTB with 2-bit counters is updated with random branch
// outcomes (a few hot branch PCs plus aliasing ones), and every cycle the
// prediction for a random PC is compared with the model. Also checks that a
// loop branch becomes predicted taken after one taken outcome and is
// predicted not taken after two not-taken outcomes.
module branch_predictor_tb;
  import lagarto_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic [31:0] lookup_pc, pred_target;
  logic pred_taken;
  br_resolve_t update;
  logic        m_valid [N];
  logic [23:0] m_tag [N];
  logic [31:0] m_tgt [N];
  logic [1:0]  m_ctr [N];
  int checks = 0, failures = 0;

  branch_predictor #(.ENTRIES(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] pick_pc();
    return {22'h1, 4'($urandom % 3), 4'($urandom), 2'b00};   // aliasing on the index
  endfunction

  task automatic model_update();
    int i;
    i = int'(update.pc[7:2]);
    if (!update.valid) return;
    if (m_valid[i] && m_tag[i] == update.pc[31:8]) begin
      if (update.taken) begin
        if (m_ctr[i] != 3) m_ctr[i]++;
        m_tgt[i] = update.target;
      end else if (m_ctr[i] != 0) m_ctr[i]--;
    end else if (update.taken) begin
      m_valid[i] = 1; m_tag[i] = update.pc[31:8]; m_tgt[i] = update.target; m_ctr[i] = 2;
    end
  endtask

  initial begin
    int i;
    logic et;
    for (int k = 0; k < N; k++) begin m_valid[k] = 0; m_tag[k] = 0; m_tgt[k] = 0; m_ctr[k] = 0; end
    update = '0; lookup_pc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      update = '0;
      update.valid = $urandom % 2;
      update.pc = pick_pc();
      update.taken = $urandom % 3 != 0;
      update.target = {$urandom, 2'b00};
      lookup_pc = pick_pc();
      #1;
      i = int'(lookup_pc[7:2]);
      et = m_valid[i] && m_tag[i] == lookup_pc[31:8] && m_ctr[i][1];
      checks++;
      if (pred_taken != et || (et && pred_target != m_tgt[i])) failures++;
      @(posedge clk);
      model_update();
    end
    // loop-branch behaviour at a fresh PC
    @(negedge clk);
    update = '{valid: 1, pc: 32'h0000_8000, taken: 1, target: 32'h0000_7F00, mispredict: 1, redirect_pc: 0};
    lookup_pc = 32'h0000_8000;
    #1; checks++; if (pred_taken) failures++;              // unknown: not taken
    @(negedge clk); update.valid = 0;
    #1; checks++; if (!(pred_taken && pred_target == 32'h0000_7F00)) failures++;
    update.valid = 1; update.taken = 0;
    @(negedge clk); #1; checks++; if (pred_taken) failures++;  // counter 2 -> 1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
