// ns_cell: one ROWS x COLS systolic cell of nsPEs (32 x 32 in the chip).
//
// Each column is a chain of PEs linked through top_in_a (stationary operand,
// then partial sums) and top_in_b (streamed operand); each row is linked
// through left_in (GEMM operand). All PEs of a cell share one mode.
//
// Top-of-column muxes choose where a column's inputs come from:
//   chain_in = 0  the cell's own memories: local_a (SRAM A lane of the
//                 column) in PE_LOAD and zero as partial-sum seed otherwise;
//                 local_b (SRAM B lane of the column) as the streamed input.
//   chain_in = 1  the bottom of the cell above (up_a / up_b), so several cells
//                 form one long column (scale-up).
// The same 32 SRAM B lanes feed the rows (left_in) in GEMM mode; row r is
// delayed by r cycles (input skew) so that a vector enters the array as a
// diagonal wavefront. Column c of the bottom outputs is delayed by COLS-1-c
// cycles in GEMM mode (output deskew), so that all results of one input
// vector appear in the same cycle on out_data. In CONV mode every column
// runs an independent circular convolution with identical timing, and
// out_data is the raw bottom row.
// The grid and the column-top muxes follow the architecture figure; the
// skew/deskew registers are this design's own way of feeding a
// weight-stationary array. Because one set of SRAM B lanes serves both
// columns and rows, the cell must be square (ROWS == COLS). Skew and
// deskew registers advance whenever the mode is not PE_HOLD.
module ns_cell
  import cogsys_pkg::*;
#(
  parameter int ROWS = 32,
  parameter int COLS = 32,
  parameter int DW   = DATA_W,
  parameter int AW   = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  pe_mode_e                 mode,
  input  logic                     chain_in,
  input  logic [COLS-1:0][DW-1:0]  local_a,
  input  logic [COLS-1:0][DW-1:0]  local_b,
  input  logic [COLS-1:0][AW-1:0]  up_a,
  input  logic [COLS-1:0][DW-1:0]  up_b,
  output logic [COLS-1:0][AW-1:0]  bot_a,     // raw bottom row, to the cell below
  output logic [COLS-1:0][DW-1:0]  bot_b,
  output logic [COLS-1:0][AW-1:0]  out_data   // results (deskewed in GEMM mode)
);

  logic [ROWS:0][COLS-1:0][AW-1:0] va;   // vertical A / partial-sum links
  logic [ROWS:0][COLS-1:0][DW-1:0] vb;   // vertical streamed links
  logic [ROWS-1:0][COLS:0][DW-1:0] hz;   // horizontal GEMM links
  logic adv;

  assign adv = (mode != PE_HOLD);

  // the SRAM B lanes feed the columns (CONV) and the rows (GEMM)
  if (ROWS != COLS) begin : g_bad_shape
    $error("ns_cell needs ROWS == COLS");
  end

  // column-top muxes
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      if (chain_in) begin
        va[0][c] = up_a[c];
        vb[0][c] = up_b[c];
      end else begin
        va[0][c] = (mode == PE_LOAD) ? AW'($signed(local_a[c])) : '0;
        vb[0][c] = local_b[c];
      end
    end
  end

  // input skew: row r sees SRAM B lane r delayed by r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign hz[0][0] = local_b[0];
    end else begin : g_delay
      logic [r-1:0][DW-1:0] sk_q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sk_q <= '0;
        else if (adv) begin
          sk_q[0] <= local_b[r];
          for (int i = 1; i < r; i++) sk_q[i] <= sk_q[i-1];
        end
      end
      assign hz[r][0] = sk_q[r-1];
    end
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      ns_pe #(.DW(DW), .AW(AW)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .mode     (mode),
        .top_in_a (va[r][c]),
        .top_in_b (vb[r][c]),
        .left_in  (hz[r][c]),
        .top_out_a(va[r+1][c]),
        .top_out_b(vb[r+1][c]),
        .left_out (hz[r][c+1])
      );
    end
  end

  assign bot_a = va[ROWS];
  assign bot_b = vb[ROWS];

  // output deskew: column c delayed by COLS-1-c cycles in GEMM mode
  for (genvar c = 0; c < COLS; c++) begin : g_deskew
    if (c == COLS - 1) begin : g_direct
      assign out_data[c] = va[ROWS][c];
    end else begin : g_delay
      localparam int DL = COLS - 1 - c;
      logic [DL-1:0][AW-1:0] ds_q;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) ds_q <= '0;
        else if (adv) begin
          ds_q[0] <= va[ROWS][c];
          for (int i = 1; i < DL; i++) ds_q[i] <= ds_q[i-1];
        end
      end
      assign out_data[c] = (mode == PE_GEMM) ? ds_q[DL-1] : va[ROWS][c];
    end
  end

endmodule
