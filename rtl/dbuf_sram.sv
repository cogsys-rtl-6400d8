// dbuf_sram: double-buffered on-chip SRAM.
//
// Two banks of DEPTH rows x W bits. The compute side (port c_*) always
// accesses the active bank and the DMA side (port d_*) the other one, so the
// memory controller can fill or empty one buffer while the array works on
// the other; a one-cycle swap pulse exchanges the roles. Each bank has one
// read and one write port (a two-port SRAM), so a side can read one row and
// write another in the same cycle, as the result drain does when it
// accumulates; reads return data on the next clock edge (one-cycle
// latency). The chip has three of these: SRAM A
// (shared by all cells, 32 lanes), SRAM B (one slice per cell, 32 lanes per
// slice) and SRAM C (results). Double buffering follows the architecture;
// bank size, the swap pulse and the port arrangement are this design's.
// Memory contents are not reset; the bank-select bit and read registers are.
module dbuf_sram #(
  parameter int W     = 256,
  parameter int DEPTH = 4096,
  parameter int AWD   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           swap,
  output logic           sel_o,
  // compute side: active bank
  input  logic           c_re,
  input  logic [AWD-1:0] c_raddr,
  output logic [W-1:0]   c_rdata,
  input  logic           c_we,
  input  logic [AWD-1:0] c_waddr,
  input  logic [W-1:0]   c_wdata,
  // DMA side: the other bank
  input  logic           d_re,
  input  logic [AWD-1:0] d_raddr,
  output logic [W-1:0]   d_rdata,
  input  logic           d_we,
  input  logic [AWD-1:0] d_waddr,
  input  logic [W-1:0]   d_wdata
);

  logic [W-1:0] bank0 [DEPTH];
  logic [W-1:0] bank1 [DEPTH];
  logic sel_q;    // bank used by the compute side
  logic rsel_q;   // value of sel_q when the last reads were issued

  assign sel_o = sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_q  <= 1'b0;
      rsel_q <= 1'b0;
    end else begin
      rsel_q <= sel_q;
      if (swap) sel_q <= ~sel_q;
    end
  end

  // per-bank port selection: bank 0 belongs to the compute side when sel_q = 0
  logic           re0, re1, we0, we1;
  logic [AWD-1:0] ra0, ra1, wa0, wa1;
  logic [W-1:0]   wd0, wd1;
  always_comb begin
    if (!sel_q) begin
      re0 = c_re; ra0 = c_raddr; we0 = c_we; wa0 = c_waddr; wd0 = c_wdata;
      re1 = d_re; ra1 = d_raddr; we1 = d_we; wa1 = d_waddr; wd1 = d_wdata;
    end else begin
      re0 = d_re; ra0 = d_raddr; we0 = d_we; wa0 = d_waddr; wd0 = d_wdata;
      re1 = c_re; ra1 = c_raddr; we1 = c_we; wa1 = c_waddr; wd1 = c_wdata;
    end
  end

  logic [W-1:0] q0, q1;
  always_ff @(posedge clk) begin
    if (we0) bank0[wa0] <= wd0;
    if (re0) q0 <= bank0[ra0];
    if (we1) bank1[wa1] <= wd1;
    if (re1) q1 <= bank1[ra1];
  end

  assign c_rdata = rsel_q ? q1 : q0;
  assign d_rdata = rsel_q ? q0 : q1;

endmodule
