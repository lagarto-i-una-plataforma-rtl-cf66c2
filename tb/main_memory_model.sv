// Behavioural main memory for simulation (not synthesizable design logic).
// Answers a held request after LATENCY cycles with one ready pulse: a read
// returns the whole LINE_WORDS-word line holding addr, a write stores one
// word under its byte strobes. WORDS words, addresses wrap. Testbenches load
// programs and data by writing the mem array directly.
module main_memory_model #(
  parameter int unsigned WORDS      = 16384,
  parameter int unsigned LINE_WORDS = 4,
  parameter int unsigned LATENCY    = 4
) (
  input  logic                     clk,
  input  logic                     req,
  input  logic                     we,
  input  logic [31:0]              addr,
  input  logic [31:0]              wdata,
  input  logic [3:0]               wstrb,
  output logic [LINE_WORDS*32-1:0] rline,
  output logic                     ready
);
  logic [31:0] mem [WORDS];
  int wait_cnt = 0;
  int unsigned reads = 0, writes = 0;

  always_comb begin
    int unsigned base;
    base = (addr >> 2) & ~(LINE_WORDS - 1);
    for (int w = 0; w < LINE_WORDS; w++) rline[32*w +: 32] = mem[(base + w) % WORDS];
  end

  assign ready = req && wait_cnt == LATENCY;

  always @(posedge clk) begin
    if (!req || ready) wait_cnt <= 0;
    else wait_cnt <= wait_cnt + 1;
    if (ready) begin
      if (we) begin
        writes++;
        for (int b = 0; b < 4; b++)
          if (wstrb[b]) mem[(addr >> 2) % WORDS][8*b +: 8] <= wdata[8*b +: 8];
      end else reads++;
    end
  end
endmodule
