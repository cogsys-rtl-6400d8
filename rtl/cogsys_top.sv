// cogsys_top: the CogSys neurosymbolic accelerator.
//
// Blocks and how they connect:
//   workload_scheduler  takes host commands (ctrl bus) and dispatches them
//   compute_array       NCELLS cells of ROWS x COLS reconfigurable nsPEs
//                       (16 x 32 x 32), each with a bubble-streaming sequencer
//   SRAM A              one double-buffered SRAM shared by all cells
//                       (stationary operands / weights), COLS INT8 lanes
//   SRAM B              one double-buffered slice per cell (streamed
//                       operands / activations), COLS INT8 lanes each
//   SRAM C              one double-buffered slice per cell (32-bit results)
//   simd_unit           NCELLS*COLS lanes below the array: result drain and
//                       fold accumulation into SRAM C, element-wise and
//                       reduction commands, requantized write-back to SRAM B
//   mem_ctrl            DMA between DRAM (memory bus ports) and the DMA side
//                       of the SRAMs
//   st_map_select       spatial/temporal mapping estimate for the host
// Host SoC and DRAM are outside the chip: their command and memory-bus
// signals are ports. Reset is active low and asynchronous, one clock.
// Default sizes are the chip's: 16 cells of 32 x 32, SRAM A 256 kB
// (2 x 4096 rows of 32 B), SRAM B 4 MB (16 slices of 2 x 4096 rows of
// 32 B). SRAM C has 2 x 1024 rows of 32 x 32-bit per slice (the paper gives
// no size for it; this holds one d = 1024 result per column).
module cogsys_top
  import cogsys_pkg::*;
#(
  parameter int NCELLS  = 16,
  parameter int ROWS    = 32,
  parameter int COLS    = 32,
  parameter int A_DEPTH = 4096,
  parameter int B_DEPTH = 4096,
  parameter int C_DEPTH = 1024,
  parameter int QDEPTH  = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // host control bus
  input  logic                    cmd_valid,
  output logic                    cmd_ready,
  input  cmd_t                    cmd,
  output logic                    idle,
  output logic [31:0]             stall_cycles,
  output logic [31:0]             issued,
  output logic                    sram_a_stall,
  output logic                    red_valid,
  output logic signed [47:0]      red_value,
  output logic [19:0]             red_index,
  // memory bus to DRAM
  output logic                    dram_req_valid,
  input  logic                    dram_req_ready,
  output logic                    dram_req_we,
  output logic [31:0]             dram_req_addr,
  output logic [COLS*ACC_W-1:0]   dram_req_wdata,
  input  logic                    dram_rsp_valid,
  input  logic [COLS*ACC_W-1:0]   dram_rsp_rdata,
  // mapping query
  input  logic                    map_valid_i,
  input  logic [15:0]             map_n,
  input  logic [15:0]             map_m,
  input  logic [15:0]             map_k,
  input  logic [15:0]             map_d,
  output logic                    map_valid_o,
  output logic                    map_use_spatial,
  output logic [63:0]             map_cyc_temporal,
  output logic [63:0]             map_cyc_spatial
);

  localparam int DW  = DATA_W;
  localparam int AW  = ACC_W;
  localparam int AAW = $clog2(A_DEPTH);
  localparam int BAW = $clog2(B_DEPTH);
  localparam int CAW = $clog2(C_DEPTH);

  // scheduler
  logic              cell_start, simd_start, dma_start, swap_a, simd_busy, dma_busy;
  cell_cmd_t         cell_cmd;
  simd_cmd_t         simd_cmd;
  dma_cmd_t          dma_cmd;
  logic [NCELLS-1:0] swap_b, swap_c, cell_busy, cell_done;

  workload_scheduler #(.NCELLS(NCELLS), .QDEPTH(QDEPTH)) u_sched (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .cell_start, .cell_cmd, .cell_busy,
    .simd_start, .simd_cmd, .simd_busy,
    .dma_start, .dma_cmd, .dma_busy,
    .swap_a, .swap_b, .swap_c,
    .idle, .stall_cycles, .issued
  );

  // compute array
  logic                                a_en;
  logic [11:0]                         a_addr;
  logic [COLS-1:0][DW-1:0]             a_rdata;
  logic [NCELLS-1:0]                   b_en, out_valid, out_acc;
  logic [NCELLS-1:0][11:0]             b_addr;
  logic [NCELLS-1:0][COLS-1:0][DW-1:0] b_rdata;
  logic [NCELLS-1:0][9:0]              out_row;
  logic [NCELLS-1:0][COLS-1:0][AW-1:0] out_data;

  compute_array #(.NCELLS(NCELLS), .ROWS(ROWS), .COLS(COLS)) u_array (
    .clk, .rst_n, .start(cell_start), .cmd(cell_cmd),
    .a_en, .a_addr, .a_rdata,
    .b_en, .b_addr, .b_rdata,
    .out_valid, .out_row, .out_acc, .out_data,
    .busy(cell_busy), .done(cell_done), .a_stall(sram_a_stall)
  );

  // SIMD unit
  logic [NCELLS-1:0]                   sc_re, sc_we, sb_we;
  logic [NCELLS-1:0][CAW-1:0]          sc_raddr, sc_waddr;
  logic [NCELLS-1:0][COLS-1:0][AW-1:0] sc_rdata, sc_wdata;
  logic [BAW-1:0]                      sb_waddr;
  logic [NCELLS-1:0][COLS-1:0][DW-1:0] sb_wdata;
  logic                                simd_done;

  simd_unit #(.NCELLS(NCELLS), .COLS(COLS), .CAW(CAW), .BAW(BAW)) u_simd (
    .clk, .rst_n, .start(simd_start), .cmd(simd_cmd), .busy(simd_busy), .done(simd_done),
    .red_valid, .red_value, .red_index,
    .in_valid(out_valid), .in_row(out_row), .in_acc(out_acc), .in_data(out_data),
    .c_re(sc_re), .c_raddr(sc_raddr), .c_rdata(sc_rdata),
    .c_we(sc_we), .c_waddr(sc_waddr), .c_wdata(sc_wdata),
    .b_we(sb_we), .b_waddr(sb_waddr), .b_wdata(sb_wdata)
  );

  // memory controller
  logic                                dm_a_re, dm_a_we, dma_done;
  logic [BAW-1:0]                      dm_a_raddr, dm_a_waddr;
  logic [COLS*DW-1:0]                  dm_a_rdata, dm_a_wdata, dm_b_wdata;
  logic [NCELLS-1:0]                   dm_b_re, dm_b_we, dm_c_re, dm_c_we;
  logic [BAW-1:0]                      dm_b_raddr, dm_b_waddr;
  logic [NCELLS-1:0][COLS*DW-1:0]      dm_b_rdata;
  logic [CAW-1:0]                      dm_c_raddr, dm_c_waddr;
  logic [NCELLS-1:0][COLS*AW-1:0]      dm_c_rdata;
  logic [COLS*AW-1:0]                  dm_c_wdata;

  mem_ctrl #(.NCELLS(NCELLS), .COLS(COLS), .ABW(BAW), .CAW(CAW)) u_dma (
    .clk, .rst_n, .start(dma_start), .cmd(dma_cmd), .busy(dma_busy), .done(dma_done),
    .dram_req_valid, .dram_req_ready, .dram_req_we, .dram_req_addr, .dram_req_wdata,
    .dram_rsp_valid, .dram_rsp_rdata,
    .a_re(dm_a_re), .a_raddr(dm_a_raddr), .a_rdata(dm_a_rdata),
    .a_we(dm_a_we), .a_waddr(dm_a_waddr), .a_wdata(dm_a_wdata),
    .b_re(dm_b_re), .b_raddr(dm_b_raddr), .b_rdata(dm_b_rdata),
    .b_we(dm_b_we), .b_waddr(dm_b_waddr), .b_wdata(dm_b_wdata),
    .c_re(dm_c_re), .c_raddr(dm_c_raddr), .c_rdata(dm_c_rdata),
    .c_we(dm_c_we), .c_waddr(dm_c_waddr), .c_wdata(dm_c_wdata)
  );

  // SRAM A (shared)
  logic a_sel;
  dbuf_sram #(.W(COLS*DW), .DEPTH(A_DEPTH)) u_sram_a (
    .clk, .rst_n, .swap(swap_a), .sel_o(a_sel),
    .c_re(a_en), .c_raddr(a_addr[AAW-1:0]), .c_rdata(a_rdata),
    .c_we(1'b0), .c_waddr('0), .c_wdata('0),
    .d_re(dm_a_re), .d_raddr(dm_a_raddr[AAW-1:0]), .d_rdata(dm_a_rdata),
    .d_we(dm_a_we), .d_waddr(dm_a_waddr[AAW-1:0]), .d_wdata(dm_a_wdata)
  );

  // SRAM B and SRAM C slices, one per cell
  for (genvar i = 0; i < NCELLS; i++) begin : g_slice
    logic b_sel, c_sel;

    dbuf_sram #(.W(COLS*DW), .DEPTH(B_DEPTH)) u_sram_b (
      .clk, .rst_n, .swap(swap_b[i]), .sel_o(b_sel),
      .c_re(b_en[i]), .c_raddr(b_addr[i][BAW-1:0]), .c_rdata(b_rdata[i]),
      .c_we(sb_we[i]), .c_waddr(sb_waddr), .c_wdata(sb_wdata[i]),
      .d_re(dm_b_re[i]), .d_raddr(dm_b_raddr), .d_rdata(dm_b_rdata[i]),
      .d_we(dm_b_we[i]), .d_waddr(dm_b_waddr), .d_wdata(dm_b_wdata)
    );

    dbuf_sram #(.W(COLS*AW), .DEPTH(C_DEPTH)) u_sram_c (
      .clk, .rst_n, .swap(swap_c[i]), .sel_o(c_sel),
      .c_re(sc_re[i]), .c_raddr(sc_raddr[i]), .c_rdata(sc_rdata[i]),
      .c_we(sc_we[i]), .c_waddr(sc_waddr[i]), .c_wdata(sc_wdata[i]),
      .d_re(dm_c_re[i]), .d_raddr(dm_c_raddr), .d_rdata(dm_c_rdata[i]),
      .d_we(dm_c_we[i]), .d_waddr(dm_c_waddr), .d_wdata(dm_c_wdata)
    );
  end

  // mapping estimate
  logic [31:0] map_t, map_rd_t, map_rd_s;
  st_map_select #(.W(16)) u_map (
    .clk, .rst_n, .valid_i(map_valid_i),
    .n_arrays(map_n), .m_pes(map_m), .k_ops(map_k), .d_dim(map_d),
    .valid_o(map_valid_o), .use_spatial(map_use_spatial),
    .cyc_temporal(map_cyc_temporal), .cyc_spatial(map_cyc_spatial),
    .t_pass(map_t), .reads_temporal(map_rd_t), .reads_spatial(map_rd_s)
  );

endmodule
