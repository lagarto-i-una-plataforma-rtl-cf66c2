// Self-checking testbench for cache_controller: an instruction-side and a
// data-side requester issue random line reads (and, on the data side, word
// writes) at random times to a memory model standing in for the L2. Every
// read must return the memory line, every write must land, each side must
// get exactly one ready per request, the data side must win when both ask
// while the port is free, and a granted request must keep the port (same
// address and direction seen by the L2) until answered.
module cache_controller_tb;
  localparam int LW = 4;
  logic clk = 0, rst_n = 0;
  logic i_req = 0, i_ready, d_req = 0, d_we = 0, d_ready;
  logic [31:0] i_addr = 0, d_addr = 0, d_wdata = 0;
  logic [3:0] d_wstrb = 0;
  logic [LW*32-1:0] i_rline, d_rline, l2_rline;
  logic l2_req, l2_we, l2_ready;
  logic [31:0] l2_addr, l2_wdata;
  logic [3:0] l2_wstrb;
  int checks = 0, failures = 0;
  logic [31:0] shadow [1024];

  cache_controller #(.LINE_WORDS(LW)) dut (.*);
  main_memory_model #(.WORDS(1024), .LINE_WORDS(LW), .LATENCY(2)) l2 (
    .clk, .req(l2_req), .we(l2_we), .addr(l2_addr), .wdata(l2_wdata), .wstrb(l2_wstrb),
    .rline(l2_rline), .ready(l2_ready)
  );
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic line_ok(input logic [LW*32-1:0] line, input logic [31:0] a);
    for (int k = 0; k < LW; k++)
      if (line[32*k +: 32] != shadow[((a >> 2) & ~(LW - 1)) + k]) return 0;
    return 1;
  endfunction

  int i_done = 0, d_done = 0, d_first = 0, both_free = 0;

  // instruction side: random reads, held until ready
  initial begin
    wait (rst_n);
    repeat (800) begin
      @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      i_req = 1; i_addr = {22'd0, 8'($urandom), 2'b00};
      #1;
      while (!i_ready) begin @(negedge clk); #1; end
      checks++; if (!line_ok(i_rline, i_addr)) failures++;
      @(posedge clk); #1 i_req = 0;
      i_done++;
    end
  end

  // data side: reads and writes
  initial begin
    logic [31:0] wd;
    wait (rst_n);
    repeat (800) begin
      @(negedge clk);
      repeat ($urandom % 3) @(negedge clk);
      d_req = 1; d_we = $urandom % 2; d_addr = {22'd0, 8'($urandom), 2'b00};
      d_wdata = $urandom; d_wstrb = 4'($urandom);
      #1;
      while (!d_ready) begin @(negedge clk); #1; end
      if (!d_we) begin checks++; if (!line_ok(d_rline, d_addr)) failures++; end
      else for (int b = 0; b < 4; b++) if (d_wstrb[b]) shadow[d_addr >> 2][8*b +: 8] = d_wdata[8*b +: 8];
      @(posedge clk); #1 d_req = 0;
      d_done++;
    end
  end

  // protocol monitor. busy/g_addr/g_we follow the L2 port only: once a
  // request appears there, its address and direction must stay the same
  // until the L2 answers.
  logic busy = 0, g_we = 0;
  logic [31:0] g_addr = 0;
  int held_checks = 0;
  always @(negedge clk) if (rst_n) begin
    #2;
    if (l2_req) begin
      if (!busy) begin busy = 1; g_addr = l2_addr; g_we = l2_we; end
      else begin
        checks++; held_checks++;
        if (l2_addr != g_addr || l2_we != g_we) failures++;
      end
      if (l2_ready) busy = 0;
    end
    if (i_ready && d_ready) begin checks++; failures++; end
    if (dut.own == dut.FREE && i_req && d_req) begin
      both_free++;
      checks++;
      if (l2_addr != d_addr) failures++;          // data side first
    end
    if (dut.own == dut.OWN_I) begin checks++; if (l2_addr != i_addr) failures++; end
    if (dut.own == dut.OWN_D) begin checks++; if (l2_addr != d_addr || l2_we != d_we) failures++; end
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin shadow[i] = $urandom; l2.mem[i] = shadow[i]; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (i_done == 800 && d_done == 800);
    for (int i = 0; i < 1024; i++) begin checks++; if (l2.mem[i] != shadow[i]) failures++; end
    checks++; if (both_free == 0) failures++;
    checks++; if (held_checks == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
