// Direct-mapped, write-through, no-write-allocate cache, used for the L1
// instruction cache, the L1 data cache and the unified L2 cache.
//
// Geometry: SETS lines of LINE_WORDS 32-bit words. The upper (cpu) side
// returns UP_WORDS words per read: 1 for an L1 serving the pipeline, or a
// whole line (UP_WORDS = LINE_WORDS) for the L2 serving L1 refills. The
// lower (mem) side reads whole lines and writes single words with byte
// strobes.
//
// Reads: tag and data arrays are read combinationally; on a hit cpu_ready is
// high in the same cycle with the data. On a miss the cache latches the line
// address and requests the line below (mem_req held until mem_ready), writes
// it into the arrays, and the next lookup hits. Writes: the word goes below
// at once (mem_req/mem_we follow the cpu request combinationally), the line
// is updated too if it is present, and cpu_ready follows mem_ready. The
// requester must hold its request until cpu_ready.
//
// The design names its caches and lets their sizes be changed; the
// direct-mapped write-through organisation and the default sizes are this
// implementation's choices.
module cache #(
  parameter int unsigned SETS       = 256,
  parameter int unsigned LINE_WORDS = 4,
  parameter int unsigned UP_WORDS   = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // upper side
  input  logic                       cpu_req,
  input  logic                       cpu_we,
  input  logic [31:0]                cpu_addr,
  input  logic [31:0]                cpu_wdata,
  input  logic [3:0]                 cpu_wstrb,
  output logic [UP_WORDS*32-1:0]     cpu_rdata,
  output logic                       cpu_ready,
  // lower side
  output logic                       mem_req,
  output logic                       mem_we,
  output logic [31:0]                mem_addr,
  output logic [31:0]                mem_wdata,
  output logic [3:0]                 mem_wstrb,
  input  logic [LINE_WORDS*32-1:0]   mem_rline,
  input  logic                       mem_ready,
  // statistics
  output logic                       miss_start   // a read miss began this cycle
);
  localparam int unsigned OW = $clog2(LINE_WORDS);   // word offset bits
  localparam int unsigned IW = $clog2(SETS);
  localparam int unsigned TW = 32 - IW - OW - 2;

  logic [LINE_WORDS*32-1:0] data [SETS];
  logic [TW-1:0]            tags [SETS];
  logic [SETS-1:0]          valid;

  typedef enum logic {IDLE, FILL} state_e;
  state_e state;
  logic [31:0] fill_addr;

  logic [IW-1:0] idx, fidx;
  logic [TW-1:0] tag;
  logic [OW-1:0] woff;
  logic hit;
  logic [LINE_WORDS*32-1:0] line;

  assign idx  = cpu_addr[IW+OW+1:OW+2];
  assign tag  = cpu_addr[31:IW+OW+2];
  assign woff = cpu_addr[OW+1:2];
  assign hit  = valid[idx] && tags[idx] == tag;
  assign line = data[idx];
  assign fidx = fill_addr[IW+OW+1:OW+2];

  // the UP_WORDS-word group that holds the addressed word
  always_comb begin
    logic [OW-1:0] grp;
    grp = woff & ~OW'(UP_WORDS - 1);
    cpu_rdata = line[32*grp +: UP_WORDS*32];
  end

  always_comb begin
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = cpu_addr;
    mem_wdata = cpu_wdata;
    mem_wstrb = cpu_wstrb;
    cpu_ready = 1'b0;
    if (state == FILL) begin
      mem_req  = 1'b1;
      mem_addr = fill_addr;
    end else if (cpu_req && cpu_we) begin
      mem_req   = 1'b1;
      mem_we    = 1'b1;
      cpu_ready = mem_ready;
    end else if (cpu_req) begin
      cpu_ready = hit;
    end
  end

  assign miss_start = state == IDLE && cpu_req && !cpu_we && !hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      fill_addr <= '0;
      valid     <= '0;
    end else begin
      unique case (state)
        IDLE: if (miss_start) begin
          state     <= FILL;
          fill_addr <= {cpu_addr[31:OW+2], {(OW+2){1'b0}}};
        end
        FILL: if (mem_ready) begin
          state       <= IDLE;
          valid[fidx] <= 1'b1;
        end
      endcase
    end
  end

  // arrays: no reset, written on refill and on write hits
  always_ff @(posedge clk) begin
    if (state == FILL && mem_ready) begin
      data[fidx] <= mem_rline;
      tags[fidx] <= fill_addr[31:IW+OW+2];
    end else if (state == IDLE && cpu_req && cpu_we && mem_ready && hit) begin
      for (int b = 0; b < 4; b++)
        if (cpu_wstrb[b]) data[idx][32*woff + 8*b +: 8] <= cpu_wdata[8*b +: 8];
    end
  end

  // a line fill is never interrupted by a write from above
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == FILL |-> !(cpu_req && cpu_we))
    else $error("cache: write request during a line fill");
endmodule
