// Self-checking testbench for fetch_queue: random pushes and pops against a
// queue model, checking the head entry, the full and empty flags (a push to
// a full queue is dropped), and that flush empties the queue.
module fetch_queue_tb;
  import lagarto_pkg::*;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop = 0, full, empty;
  fetch_entry_t din, head;
  fetch_entry_t model [$];
  int checks = 0, failures = 0;

  fetch_queue #(.DEPTH(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nfull = 0;
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      // bias the traffic so that the queue fills and drains
      push = ((i / 500) % 2 == 0) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      pop  = $urandom % 2;
      flush = ($urandom % 997 == 0);
      din = '{pc: $urandom, instr: $urandom, pred_taken: 1'($urandom), pred_target: $urandom};
      #1;
      checks += 2;
      if (full != (model.size() == 8)) failures++;
      if (empty != (model.size() == 0)) failures++;
      if (full) nfull++;
      if (!empty) begin
        checks++;
        if (head != model[0]) failures++;
      end
      @(posedge clk);
      if (flush) model.delete();
      else begin
        if (pop && model.size() > 0) void'(model.pop_front());
        if (push && !full) model.push_back(din);
      end
    end
    checks++; if (nfull == 0) failures++;     // the full case was reached
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
