// Cache controller: connects the lower sides of the L1 instruction and L1
// data caches to the single upper port of the unified L2 cache.
//
// When the L2 port is free, a data-side request wins over an instruction-
// side request; the winner keeps the port until the L2 answers (l2_ready),
// even if the other side asks meanwhile. Requests and answers pass through
// combinationally, so a grant costs no cycle. Responses (the refill line and
// the ready pulse) go only to the owner. The design shows a controller on
// each L1-L2 path; here both paths share one arbiter, and the data-first
// priority is this implementation's choice.
module cache_controller #(
  parameter int unsigned LINE_WORDS = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // L1 instruction cache (reads only)
  input  logic                     i_req,
  input  logic [31:0]              i_addr,
  output logic [LINE_WORDS*32-1:0] i_rline,
  output logic                     i_ready,
  // L1 data cache
  input  logic                     d_req,
  input  logic                     d_we,
  input  logic [31:0]              d_addr,
  input  logic [31:0]              d_wdata,
  input  logic [3:0]               d_wstrb,
  output logic [LINE_WORDS*32-1:0] d_rline,
  output logic                     d_ready,
  // L2 upper port
  output logic                     l2_req,
  output logic                     l2_we,
  output logic [31:0]              l2_addr,
  output logic [31:0]              l2_wdata,
  output logic [3:0]               l2_wstrb,
  input  logic [LINE_WORDS*32-1:0] l2_rline,
  input  logic                     l2_ready
);
  typedef enum logic [1:0] {FREE, OWN_I, OWN_D} own_e;
  own_e own, sel;

  always_comb begin
    if (own != FREE)  sel = own;
    else if (d_req)   sel = OWN_D;
    else if (i_req)   sel = OWN_I;
    else              sel = FREE;
  end

  always_comb begin
    l2_req   = 1'b0;
    l2_we    = 1'b0;
    l2_addr  = i_addr;
    l2_wdata = d_wdata;
    l2_wstrb = d_wstrb;
    if (sel == OWN_D) begin
      l2_req  = d_req;
      l2_we   = d_we;
      l2_addr = d_addr;
    end else if (sel == OWN_I) begin
      l2_req  = i_req;
    end
  end

  assign i_rline = l2_rline;
  assign d_rline = l2_rline;
  assign i_ready = (sel == OWN_I) && l2_ready;
  assign d_ready = (sel == OWN_D) && l2_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      own <= FREE;
    else if (l2_req && l2_ready)     own <= FREE;
    else if (l2_req)                 own <= sel;
  end
endmodule
