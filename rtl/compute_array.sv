// compute_array: the scalable reconfigurable neuro/symbolic compute array.
//
// NCELLS cells of ROWS x COLS nsPEs (16 cells of 32 x 32 = 16384 PEs in
// the chip), each with its own bs_sequencer. Cell i can take its column
// inputs from the bottom of cell i-1 (chain_in), so a command may run on
// one cell (scale-out) or on a chain of consecutive cells that acts as one
// array of ROWS*chain rows (scale-up); e.g. all 16 cells chained give the
// N=32 columns x M=512 rows arrangement. Cells not named by a command keep
// running whatever they were given, so GEMM and convolution chains run side
// by side (cell-wise partition).
//
// Memories outside this block:
//   SRAM A  one shared read port of COLS lanes (one lane per column). Heads
//           of chains request it for their load phase; a fixed-priority
//           arbiter (lowest cell first) grants it to one head at a time and keeps
//           the grant while the request stays high. A head that is not
//           granted stalls (a_stall).
//   SRAM B  one read port of COLS lanes per cell (its own slice).
//   SRAM C  results leave as one tagged row of COLS partial sums per cell
//           and cycle (out_valid / out_row / out_acc / out_data), taken from
//           the cell at the tail of each chain.
// SRAM read latency is one cycle. The cell count, cell size and shared
// SRAM A / per-cell SRAM B arrangement follow the architecture; the
// arbitration scheme is this design's own.
module compute_array
  import cogsys_pkg::*;
#(
  parameter int NCELLS = 16,
  parameter int ROWS   = 32,
  parameter int COLS   = 32,
  parameter int DW     = DATA_W,
  parameter int AW     = ACC_W
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  input  cell_cmd_t                             cmd,
  output logic                                  a_en,
  output logic [11:0]                           a_addr,
  input  logic [COLS-1:0][DW-1:0]               a_rdata,
  output logic [NCELLS-1:0]                     b_en,
  output logic [NCELLS-1:0][11:0]               b_addr,
  input  logic [NCELLS-1:0][COLS-1:0][DW-1:0]   b_rdata,
  output logic [NCELLS-1:0]                     out_valid,
  output logic [NCELLS-1:0][9:0]                out_row,
  output logic [NCELLS-1:0]                     out_acc,
  output logic [NCELLS-1:0][COLS-1:0][AW-1:0]   out_data,
  output logic [NCELLS-1:0]                     busy,
  output logic [NCELLS-1:0]                     done,
  output logic                                  a_stall
);

  localparam int IW = (NCELLS > 1) ? $clog2(NCELLS) : 1;

  logic [NCELLS-1:0]       a_req, a_gnt, a_en_c, adv, chain_in, a_zero;
  logic [NCELLS-1:0][11:0] a_addr_c;
  pe_mode_e [NCELLS-1:0]   mode;
  logic [NCELLS:0][COLS-1:0][AW-1:0] link_a;
  logic [NCELLS:0][COLS-1:0][DW-1:0] link_b;

  // SRAM A arbiter: the current owner keeps the port while it requests it
  logic [IW-1:0] owner_q;
  logic          owner_v_q;
  always_comb begin
    a_gnt = '0;
    if (owner_v_q && a_req[owner_q]) begin
      a_gnt[owner_q] = 1'b1;
    end else begin
      for (int i = NCELLS - 1; i >= 0; i--)
        if (a_req[i]) a_gnt = NCELLS'(1) << i;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      owner_q   <= '0;
      owner_v_q <= 1'b0;
    end else begin
      owner_v_q <= |a_gnt;
      for (int i = 0; i < NCELLS; i++)
        if (a_gnt[i]) owner_q <= IW'(i);
    end
  end
  assign a_stall = |(a_req & ~a_gnt);

  always_comb begin
    a_en   = 1'b0;
    a_addr = '0;
    for (int i = 0; i < NCELLS; i++)
      if (a_en_c[i]) begin
        a_en   = 1'b1;
        a_addr = a_addr_c[i];
      end
  end

  assign link_a[0] = '0;
  assign link_b[0] = '0;

  for (genvar i = 0; i < NCELLS; i++) begin : g_cell
    logic [COLS-1:0][DW-1:0] local_a;

    bs_sequencer #(.CELL_ID(i), .ROWS(ROWS), .COLS(COLS)) u_seq (
      .clk        (clk),
      .rst_n      (rst_n),
      .start      (start),
      .cmd        (cmd),
      .adv_i      ((i == 0) ? 1'b1 : adv[(i == 0) ? 0 : i-1]),
      .adv_o      (adv[i]),
      .a_req      (a_req[i]),
      .a_gnt      (a_gnt[i]),
      .a_en       (a_en_c[i]),
      .a_addr     (a_addr_c[i]),
      .b_en       (b_en[i]),
      .b_addr     (b_addr[i]),
      .mode_o     (mode[i]),
      .chain_in_o (chain_in[i]),
      .a_zero_o   (a_zero[i]),
      .out_valid_o(out_valid[i]),
      .out_row_o  (out_row[i]),
      .out_acc_o  (out_acc[i]),
      .busy_o     (busy[i]),
      .done_o     (done[i])
    );

    assign local_a = a_zero[i] ? '0 : a_rdata;

    ns_cell #(.ROWS(ROWS), .COLS(COLS), .DW(DW), .AW(AW)) u_cell (
      .clk     (clk),
      .rst_n   (rst_n),
      .mode    (mode[i]),
      .chain_in(chain_in[i]),
      .local_a (local_a),
      .local_b (b_rdata[i]),
      .up_a    (link_a[i]),
      .up_b    (link_b[i]),
      .bot_a   (link_a[i+1]),
      .bot_b   (link_b[i+1]),
      .out_data(out_data[i])
    );
  end

endmodule
