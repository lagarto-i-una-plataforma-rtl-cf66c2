// Self-checking testbench for cache, in the two shapes the core uses: a
// one-word-per-read L1 (16 sets, to force conflict misses) and a line-per-
// read L2, each in front of a main-memory model. Random reads and byte-
// strobed writes over a small address range are compared with a shadow
// memory; the test also checks that a read that hits answers in the same
// cycle, that a miss costs the memory latency, that writes reach memory
// (write-through) and that hits and misses both occurred.
module cache_tb;
  localparam int LW = 4;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  // L1-shaped cache
  logic        c_req = 0, c_we = 0, c_ready;
  logic [31:0] c_addr = 0, c_wdata = 0, c_rdata;
  logic [3:0]  c_wstrb = 0;
  logic        m_req, m_we, m_ready, miss;
  logic [31:0] m_addr, m_wdata;
  logic [3:0]  m_wstrb;
  logic [LW*32-1:0] m_rline;

  cache #(.SETS(16), .LINE_WORDS(LW), .UP_WORDS(1)) dut (
    .clk, .rst_n, .cpu_req(c_req), .cpu_we(c_we), .cpu_addr(c_addr), .cpu_wdata(c_wdata),
    .cpu_wstrb(c_wstrb), .cpu_rdata(c_rdata), .cpu_ready(c_ready),
    .mem_req(m_req), .mem_we(m_we), .mem_addr(m_addr), .mem_wdata(m_wdata), .mem_wstrb(m_wstrb),
    .mem_rline(m_rline), .mem_ready(m_ready), .miss_start(miss)
  );
  main_memory_model #(.WORDS(4096), .LINE_WORDS(LW), .LATENCY(3)) mem1 (
    .clk, .req(m_req), .we(m_we), .addr(m_addr), .wdata(m_wdata), .wstrb(m_wstrb),
    .rline(m_rline), .ready(m_ready)
  );

  // L2-shaped cache (whole line per read)
  logic        l_req = 0, l_ready;
  logic [31:0] l_addr = 0;
  logic [LW*32-1:0] l_rdata, n_rline;
  logic        n_req, n_we, n_ready, l_miss;
  logic [31:0] n_addr, n_wdata;
  logic [3:0]  n_wstrb;

  cache #(.SETS(8), .LINE_WORDS(LW), .UP_WORDS(LW)) dut_l2 (
    .clk, .rst_n, .cpu_req(l_req), .cpu_we(1'b0), .cpu_addr(l_addr), .cpu_wdata(32'd0),
    .cpu_wstrb(4'd0), .cpu_rdata(l_rdata), .cpu_ready(l_ready),
    .mem_req(n_req), .mem_we(n_we), .mem_addr(n_addr), .mem_wdata(n_wdata), .mem_wstrb(n_wstrb),
    .mem_rline(n_rline), .mem_ready(n_ready), .miss_start(l_miss)
  );
  main_memory_model #(.WORDS(4096), .LINE_WORDS(LW), .LATENCY(2)) mem2 (
    .clk, .req(n_req), .we(n_we), .addr(n_addr), .wdata(n_wdata), .wstrb(n_wstrb),
    .rline(n_rline), .ready(n_ready)
  );

  logic [31:0] shadow [1024];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one access; returns the number of cycles until ready
  task automatic access(input logic we, input logic [31:0] addr, input logic [31:0] wd,
                        input logic [3:0] st, output logic [31:0] rd, output int wait_cycles);
    @(negedge clk);
    c_req = 1; c_we = we; c_addr = addr; c_wdata = wd; c_wstrb = st;
    wait_cycles = 0;
    #1;
    while (!c_ready) begin
      @(negedge clk); #1;
      wait_cycles++;
    end
    rd = c_rdata;
    @(posedge clk);
    #1 c_req = 0;
  endtask

  initial begin
    int hits = 0, misses = 0, w;
    logic [31:0] rd, a, wd;
    logic [3:0] st;
    for (int i = 0; i < 1024; i++) begin
      shadow[i] = $urandom;
      mem1.mem[i] = shadow[i];
      mem2.mem[i] = ~shadow[i];
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000; i++) begin
      a = {22'd0, 8'($urandom % 160), 2'b00};       // 160 words over 16 sets of 4 words
      if ($urandom % 3 == 0) begin
        wd = $urandom; st = 4'($urandom);
        access(1, a, wd, st, rd, w);
        for (int b = 0; b < 4; b++) if (st[b]) shadow[a >> 2][8*b +: 8] = wd[8*b +: 8];
      end else begin
        access(0, a, 0, 0, rd, w);
        checks++;
        if (rd != shadow[a >> 2]) begin
          failures++;
          if (failures < 10) $display("FAIL read %h got %h exp %h", a, rd, shadow[a >> 2]);
        end
        if (w == 0) hits++;
        else begin
          misses++;
          checks++;
          if (w != 3 + 2) begin failures++; if (failures < 5) $display("miss took %0d", w); end  // request, memory latency, refill write
        end
      end
    end
    // write-through: memory holds every written value
    for (int i = 0; i < 160; i++) begin
      checks++;
      if (mem1.mem[i] != shadow[i]) failures++;
    end
    checks += 2;
    if (hits == 0) failures++;
    if (misses == 0) failures++;
    // L2 shape: whole-line reads
    for (int i = 0; i < 500; i++) begin
      a = {22'd0, 8'($urandom % 64), 2'b00};
      @(negedge clk);
      l_req = 1; l_addr = a;
      #1;
      while (!l_ready) begin @(negedge clk); #1; end
      checks++;
      for (int k = 0; k < LW; k++)
        if (l_rdata[32*k +: 32] != mem2.mem[((a >> 2) & ~(LW - 1)) + k]) begin
          failures++;
          break;
        end
      @(posedge clk);
      #1 l_req = 0;
    end
    $display("hits %0d misses %0d", hits, misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
