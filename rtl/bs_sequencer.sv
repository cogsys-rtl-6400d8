// bs_sequencer: per-cell controller for the bubble-streaming (BS) dataflow.
//
// Every cell has one sequencer. A cell command names a chain of cells
// (head .. head+chain-1); each sequencer in that range latches it and learns
// its position p in the chain. The chain behaves as one column of
// Mc = ROWS*chain PEs. All sequencers of a chain step a common counter t;
// followers take their advance signal from the cell above (adv_i), so a
// stall of the head stalls the whole chain.
//
// Circular convolution / correlation of dimension d (len), one fold of Mc
// elements of the stationary vector A at a time, ceil(d/Mc) folds:
//   t in [0, Mc)          load: the head reads SRAM A row a_base+idx,
//                         idx = f*Mc + Mc-1-t (zero when idx >= d), so that
//                         PE k ends up holding A[f*Mc + k].
//   t in [Mc-2, 2Mc+d-3)  stream: the head reads SRAM B row b_base+bidx,
//                         element m of the stream is B[(m-(Mc-1)-f*Mc) mod d]
//                         (convolution) or B[(Mc-1-m+f*Mc) mod d]
//                         (correlation). Starting the stream two cycles
//                         before the load ends lets the first operand reach
//                         the streaming register as A settles.
//   t in [3Mc-1, 3Mc+d-1) drain: the tail tags output j = t-(3Mc-1) for
//                         SRAM C row c_base+j, accumulating after fold 0.
// One fold therefore takes T = 3*Mc + d - 1 cycles, the latency the paper
// derives for its BS dataflow, and the whole operation ceil(d/Mc)*T cycles
// (temporal folding). Each of the COLS columns runs its own convolution on
// its own SRAM A / SRAM B lane (column-wise parallelism).
//
// GEMM (len = number of input vectors): the load phase shifts an Mc x COLS
// weight tile in from SRAM A rows a_base..a_base+Mc-1; then every cell p of
// the chain reads its own SRAM B slice, vector v at t = Mc + ROWS*p + v, and
// the tail tags result v at t = 2*Mc + COLS + v. T = 2*Mc + COLS + len.
//
// Interface timing: SRAM reads are issued at t and their data reach the cell
// at t+1; mode, chain_in, a_zero and the output tag are registered so that
// they arrive with that data. The head asks for the shared SRAM A port for
// the whole load phase (a_req) and stalls while a_gnt is low.
// The phase lengths follow the paper's cycle analysis; the command format,
// the stall handshake and the exact address formulas are this design's.
// Lint note: for the last cell the lower bound of the chain-range test is
// always true, so a linter reports a constant comparison; it is intended.
module bs_sequencer
  import cogsys_pkg::*;
#(
  parameter int CELL_ID = 0,
  parameter int ROWS    = 32,
  parameter int COLS    = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cell_cmd_t   cmd,
  input  logic        adv_i,
  output logic        adv_o,
  output logic        a_req,
  input  logic        a_gnt,
  output logic        a_en,
  output logic [11:0] a_addr,
  output logic        b_en,
  output logic [11:0] b_addr,
  output pe_mode_e    mode_o,
  output logic        chain_in_o,
  output logic        a_zero_o,
  output logic        out_valid_o,
  output logic [9:0]  out_row_o,
  output logic        out_acc_o,
  output logic        busy_o,
  output logic        done_o
);

  logic        busy_q;
  cell_op_e    op_q;
  logic [4:0]  p_q, chain_q;
  logic [15:0] len_q;
  logic [11:0] a_base_q, b_base_q;
  logic [9:0]  c_base_q;
  logic        acc_q;
  logic [17:0] mc_q;          // PEs per column of the chain
  logic [17:0] fbase_q;       // f * Mc
  logic [17:0] t_q;
  logic [15:0] bidx_q;

  logic        in_range, is_head, is_tail, gemm, adv, last_t, last_fold;
  logic [17:0] t_len, a_idx, gv, ov, kk;
  logic [15:0] bstart;
  logic        stream_ph, tag;
  logic [17:0] tag_idx;
  pe_mode_e    mode_n;

  assign in_range = ({1'b0, cmd.head} <= 5'(CELL_ID)) &&
                    (6'(CELL_ID) < 6'({1'b0, cmd.head}) + 6'(cmd.chain));

  assign is_head = (p_q == 5'd0);
  assign is_tail = (p_q == chain_q - 5'd1);
  assign gemm    = (op_q == CELL_GEMM);

  assign t_len = gemm ? (18'(2) * mc_q + 18'(COLS) + 18'(len_q))
                      : (18'(3) * mc_q + 18'(len_q) - 18'd1);
  assign last_t    = (t_q == t_len - 18'd1);
  assign last_fold = gemm || (fbase_q + mc_q >= 18'(len_q));

  // SRAM A: stationary operand, head only, during the load phase
  assign a_req = busy_q && is_head && (t_q < mc_q);
  assign adv   = is_head ? !(a_req && !a_gnt) : adv_i;
  assign adv_o = adv;
  assign a_idx = fbase_q + mc_q - 18'd1 - t_q;
  assign a_en  = a_req && a_gnt;
  assign a_addr = a_base_q + a_idx[11:0];

  // SRAM B: streamed operand
  assign stream_ph = (t_q >= mc_q - 18'd2) && (t_q < 18'(2) * mc_q + 18'(len_q) - 18'd3);
  assign gv        = t_q - mc_q - 18'(ROWS) * 18'(p_q);
  always_comb begin
    if (gemm) begin
      b_en   = busy_q && adv && (t_q >= mc_q + 18'(ROWS) * 18'(p_q)) && (gv < 18'(len_q));
      b_addr = b_base_q + gv[11:0];
    end else begin
      b_en   = busy_q && adv && is_head && stream_ph;
      b_addr = b_base_q + bidx_q[11:0];
    end
  end

  // start index of the stream for the current fold
  assign kk     = (fbase_q + mc_q - 18'd1) % 18'(len_q);
  assign bstart = (op_q == CELL_CONV) ? ((kk == 18'd0) ? 16'd0 : len_q - kk[15:0]) : kk[15:0];

  // output tag (tail only)
  assign ov = gemm ? (t_q - 18'(2) * mc_q - 18'(COLS)) : (t_q - (18'(3) * mc_q - 18'd1));
  assign tag = busy_q && adv && is_tail &&
               (gemm ? (t_q >= 18'(2) * mc_q + 18'(COLS)) : (t_q >= 18'(3) * mc_q - 18'd1));
  assign tag_idx = ov;

  always_comb begin
    if (!busy_q || !adv)   mode_n = PE_HOLD;
    else if (t_q < mc_q)   mode_n = PE_LOAD;
    else if (gemm)         mode_n = PE_GEMM;
    else                   mode_n = PE_CONV;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q   <= 1'b0;
      op_q     <= CELL_CONV;
      p_q      <= '0;
      chain_q  <= 5'd1;
      len_q    <= 16'd1;
      a_base_q <= '0;
      b_base_q <= '0;
      c_base_q <= '0;
      acc_q    <= 1'b0;
      mc_q     <= 18'(ROWS);
      fbase_q  <= '0;
      t_q      <= '0;
      bidx_q   <= '0;
      done_o   <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (!busy_q) begin
        if (start && in_range) begin
          busy_q   <= 1'b1;
          op_q     <= cmd.op;
          p_q      <= 5'(CELL_ID) - {1'b0, cmd.head};
          chain_q  <= cmd.chain;
          len_q    <= cmd.len;
          a_base_q <= cmd.a_base;
          b_base_q <= cmd.b_base;
          c_base_q <= cmd.c_base;
          acc_q    <= cmd.acc;
          mc_q     <= 18'(ROWS) * 18'(cmd.chain);
          fbase_q  <= '0;
          t_q      <= '0;
        end
      end else if (adv) begin
        if (t_q == 18'd0) begin
          bidx_q <= bstart;
        end else if (b_en && !gemm) begin
          if (op_q == CELL_CONV) bidx_q <= (bidx_q == len_q - 16'd1) ? 16'd0 : bidx_q + 16'd1;
          else                   bidx_q <= (bidx_q == 16'd0) ? len_q - 16'd1 : bidx_q - 16'd1;
        end
        if (last_t) begin
          t_q <= '0;
          if (last_fold) begin
            busy_q <= 1'b0;
            done_o <= 1'b1;
          end else begin
            fbase_q <= fbase_q + mc_q;
          end
        end else begin
          t_q <= t_q + 18'd1;
        end
      end
    end
  end

  // control that travels with the SRAM data (one cycle later)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_o      <= PE_HOLD;
      chain_in_o  <= 1'b0;
      a_zero_o    <= 1'b0;
      out_valid_o <= 1'b0;
      out_row_o   <= '0;
      out_acc_o   <= 1'b0;
    end else begin
      mode_o      <= mode_n;
      chain_in_o  <= busy_q && !is_head;
      a_zero_o    <= !gemm && (a_idx >= 18'(len_q));
      out_valid_o <= tag;
      out_row_o   <= c_base_q + tag_idx[9:0];
      out_acc_o   <= acc_q || (fbase_q != 18'd0);
    end
  end

  assign busy_o = busy_q || out_valid_o;

endmodule
