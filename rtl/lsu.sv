// Load/store unit: two execute stages.
//
// Stage 1 (AGU) adds the base register and the sign-extended offset and
// registers the access. Stage 2 presents it to the L1 data cache: byte,
// halfword and word loads (sign or zero extended) and stores with byte
// strobes, little-endian. A load result is registered onto the INT_LD or
// FP_LD write-back port (LWC1 goes to the FP file), so a dependent
// instruction can start two cycles after the load issued. While the cache
// has not answered (a read miss, or a store waiting for the write-through
// path) the unit raises stall, which freezes the whole back end. The two-
// stage latency follows the design's unit table; the stall-on-miss policy
// and requiring naturally aligned addresses are this implementation's
// choices (misaligned accesses are performed at the aligned address).
module lsu
  import lagarto_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        stall,        // global stall (includes this unit's own)
  input  logic        in_valid,
  input  uop_t        uop,
  input  logic [31:0] a,            // base
  input  logic [31:0] b,            // store data
  // L1 data cache
  output logic        dc_req,
  output logic        dc_we,
  output logic [31:0] dc_addr,
  output logic [31:0] dc_wdata,
  output logic [3:0]  dc_wstrb,
  input  logic [31:0] dc_rdata,
  input  logic        dc_ready,
  output logic        stall_req,
  output wb_port_t    wb_int,       // INT_LD
  output wb_port_t    wb_fp         // FP_LD
);
  logic        m_valid;
  ls_op_e      m_op;
  logic [31:0] m_addr, m_data;
  reg_ref_t    m_d;
  logic [31:0] ld;
  logic [1:0]  bo;
  logic        is_store;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0; m_op <= LS_LW; m_addr <= '0; m_data <= '0; m_d <= '0;
    end else if (!stall) begin
      m_valid <= in_valid;
      m_op    <= ls_op_e'(uop.op);
      m_addr  <= a + uop.imm;
      m_data  <= b;
      m_d     <= uop.d;
    end
  end

  assign bo       = m_addr[1:0];
  assign is_store = m_op inside {LS_SB, LS_SH, LS_SW};
  assign dc_req   = m_valid;
  assign dc_we    = is_store;
  assign dc_addr  = {m_addr[31:2], 2'b00};

  always_comb begin
    unique case (m_op)
      LS_SB:   begin dc_wdata = {4{m_data[7:0]}};  dc_wstrb = 4'b0001 << bo; end
      LS_SH:   begin dc_wdata = {2{m_data[15:0]}}; dc_wstrb = bo[1] ? 4'b1100 : 4'b0011; end
      default: begin dc_wdata = m_data;            dc_wstrb = 4'b1111; end
    endcase
    unique case (m_op)
      LS_LB:   ld = {{24{dc_rdata[8*bo+7]}}, dc_rdata[8*bo +: 8]};
      LS_LBU:  ld = {24'd0, dc_rdata[8*bo +: 8]};
      LS_LH:   ld = {{16{dc_rdata[16*bo[1]+15]}}, dc_rdata[16*bo[1] +: 16]};
      LS_LHU:  ld = {16'd0, dc_rdata[16*bo[1] +: 16]};
      default: ld = dc_rdata;
    endcase
  end

  assign stall_req = m_valid && !dc_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb_int <= '0; wb_fp <= '0;
    end else if (!stall) begin
      wb_int.en   <= m_valid && !is_store && m_d.en && !m_d.fp && m_d.idx != 0;
      wb_int.fp   <= 1'b0;
      wb_int.idx  <= m_d.idx;
      wb_int.data <= ld;
      wb_fp.en    <= m_valid && !is_store && m_d.en && m_d.fp;
      wb_fp.fp    <= 1'b1;
      wb_fp.idx   <= m_d.idx;
      wb_fp.data  <= ld;
    end
  end
endmodule
