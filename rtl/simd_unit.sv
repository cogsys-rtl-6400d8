// simd_unit: custom SIMD unit, LANES = NCELLS*COLS lanes (512 in the chip).
//
// Lane L belongs to cell L/COLS, column L%COLS: it sits below one column of
// the compute array and owns that column's lane of the cell's SRAM C slice.
// The unit has two jobs.
//
// Result drain (always on when no vector command runs): a tagged result row
// from a cell is registered and written to SRAM C one cycle later; when
// the tag asks for accumulation (folds after the first, or a command with
// acc set) the old row is read in the same cycle the result arrives and the
// sum is written. This is how partial results of temporal folds are added.
//
// Vector commands (start/cmd, busy while running), over `rows` consecutive
// rows, all lanes in parallel, one row at a time: read s0, read s1 (binary
// operations only), then write dst or update the reduction.
//   ADD, SUB, MUL, MAX   element-wise, two operands
//   SIGN, RELU, SCALE    element-wise, one operand (SCALE: (x*imm)>>>shift)
//   REQ8                 requantize to INT8 with saturation and write the
//                        row into SRAM B (lane L -> cell L/COLS), feeding
//                        results back as inputs of the next array operation
//   RSUM, RMAX           reduction over all lanes and rows; red_value and
//                        red_index (row_offset*LANES + lane of the maximum)
//                        are valid when red_valid pulses.
// The paper names the SIMD unit's role (element-wise and reduction work,
// moving array results back to the input SRAM) and lists sum, mult/div,
// exp/log/tanh, norm and softmax circuits. This unit builds sum, multiply,
// max, sign, ReLU, scaling, requantization and the reductions; division,
// exp/log/tanh, normalization and softmax are not built. The operation
// encoding, the sequencing and the drain pipeline are this design's own.
// Lint notes: the 16,384-bit lane registers are reset with '0, which a
// linter may flag as a large replication; it is intended.
module simd_unit
  import cogsys_pkg::*;
#(
  parameter int NCELLS = 16,
  parameter int COLS   = 32,
  parameter int DW     = DATA_W,
  parameter int AW     = ACC_W,
  parameter int CAW    = 10,
  parameter int BAW    = 12
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // vector commands
  input  logic                                 start,
  input  simd_cmd_t                            cmd,
  output logic                                 busy,
  output logic                                 done,
  output logic                                 red_valid,
  output logic signed [47:0]                   red_value,
  output logic [19:0]                          red_index,
  // results from the compute array
  input  logic [NCELLS-1:0]                    in_valid,
  input  logic [NCELLS-1:0][9:0]               in_row,
  input  logic [NCELLS-1:0]                    in_acc,
  input  logic [NCELLS-1:0][COLS-1:0][AW-1:0]  in_data,
  // SRAM C, compute side, one slice per cell
  output logic [NCELLS-1:0]                    c_re,
  output logic [NCELLS-1:0][CAW-1:0]           c_raddr,
  input  logic [NCELLS-1:0][COLS-1:0][AW-1:0]  c_rdata,
  output logic [NCELLS-1:0]                    c_we,
  output logic [NCELLS-1:0][CAW-1:0]           c_waddr,
  output logic [NCELLS-1:0][COLS-1:0][AW-1:0]  c_wdata,
  // SRAM B, compute side write, one slice per cell
  output logic [NCELLS-1:0]                    b_we,
  output logic [BAW-1:0]                       b_waddr,
  output logic [NCELLS-1:0][COLS-1:0][DW-1:0]  b_wdata
);

  localparam int LANES = NCELLS * COLS;

  typedef enum logic [1:0] {S_IDLE, S_RD0, S_RD1, S_EXE} state_e;
  state_e      st_q;
  simd_cmd_t   cmd_q;
  logic [9:0]  row_q;              // row offset within the command
  logic [LANES-1:0][AW-1:0] op0_q;
  logic        binary;

  // ---------------- result drain ----------------
  logic [NCELLS-1:0]                   dv_q, dacc_q;
  logic [NCELLS-1:0][9:0]              drow_q;
  logic [NCELLS-1:0][COLS-1:0][AW-1:0] ddata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dv_q    <= '0;
      dacc_q  <= '0;
      drow_q  <= '0;
      ddata_q <= '0;
    end else begin
      dv_q    <= in_valid;
      dacc_q  <= in_acc;
      drow_q  <= in_row;
      ddata_q <= in_data;
    end
  end

  // ---------------- vector commands ----------------
  assign binary = (cmd_q.op == SIMD_ADD) || (cmd_q.op == SIMD_SUB) ||
                  (cmd_q.op == SIMD_MUL) || (cmd_q.op == SIMD_MAX);
  assign busy   = (st_q != S_IDLE);

  function automatic logic [AW-1:0] elem(simd_cmd_t c, logic [AW-1:0] x, logic [AW-1:0] y);
    logic signed [AW-1:0] sx, sy;
    logic signed [AW+15:0] prod;
    sx = $signed(x);
    sy = $signed(y);
    prod = sx * $signed(c.imm);
    unique case (c.op)
      SIMD_ADD:   return AW'(sx + sy);
      SIMD_SUB:   return AW'(sx - sy);
      SIMD_MUL:   return AW'(sx * sy);
      SIMD_MAX:   return (sx > sy) ? x : y;
      SIMD_SIGN:  return (sx >= 0) ? AW'(1) : {AW{1'b1}};
      SIMD_RELU:  return (sx > 0) ? x : '0;
      SIMD_SCALE: return AW'(prod >>> c.shift);
      default:    return x;
    endcase
  endfunction

  function automatic logic [DW-1:0] sat8(logic [AW-1:0] x, logic [4:0] sh);
    logic signed [AW-1:0] v;
    v = $signed(x) >>> sh;
    if (v > 127)       return 8'sd127;
    else if (v < -128) return 8'h80;
    else               return v[DW-1:0];
  endfunction

  logic [LANES-1:0][AW-1:0] cur, res;
  logic [LANES-1:0][DW-1:0] q8;
  logic signed [47:0] row_sum, row_max;
  logic [8:0] row_arg;
  always_comb begin
    cur = c_rdata;
    row_sum = '0;
    row_max = 48'($signed(cur[0]));
    row_arg = '0;
    for (int l = 0; l < LANES; l++) begin
      res[l] = elem(cmd_q, binary ? op0_q[l] : cur[l], cur[l]);
      q8[l]  = sat8(cur[l], cmd_q.shift);
      row_sum = row_sum + 48'($signed(cur[l]));
      if (48'($signed(cur[l])) > row_max) begin
        row_max = 48'($signed(cur[l]));
        row_arg = 9'(l);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= S_IDLE;
      cmd_q     <= '0;
      row_q     <= '0;
      op0_q     <= '0;
      done      <= 1'b0;
      red_valid <= 1'b0;
      red_value <= '0;
      red_index <= '0;
    end else begin
      done      <= 1'b0;
      red_valid <= 1'b0;
      unique case (st_q)
        S_IDLE: if (start) begin
          cmd_q <= cmd;
          row_q <= '0;
          st_q  <= S_RD0;
          if (cmd.op == SIMD_RSUM) red_value <= '0;
          if (cmd.op == SIMD_RMAX) begin
            red_value <= 48'sh8000_0000_0000;
            red_index <= '0;
          end
        end
        S_RD0: st_q <= binary ? S_RD1 : S_EXE;
        S_RD1: begin
          op0_q <= c_rdata;
          st_q  <= S_EXE;
        end
        S_EXE: begin
          if (cmd_q.op == SIMD_RSUM) red_value <= red_value + row_sum;
          if (cmd_q.op == SIMD_RMAX && row_max > red_value) begin
            red_value <= row_max;
            red_index <= 20'(row_q) * 20'(LANES) + 20'(row_arg);
          end
          if (row_q == cmd_q.rows - 10'd1) begin
            st_q <= S_IDLE;
            done <= 1'b1;
            red_valid <= (cmd_q.op == SIMD_RSUM) || (cmd_q.op == SIMD_RMAX);
          end else begin
            row_q <= row_q + 10'd1;
            st_q  <= S_RD0;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- memory ports ----------------
  logic is_red;
  assign is_red = (cmd_q.op == SIMD_RSUM) || (cmd_q.op == SIMD_RMAX);

  always_comb begin
    b_we    = '0;
    b_waddr = BAW'(cmd_q.dst) + BAW'(row_q);
    b_wdata = q8;
    for (int i = 0; i < NCELLS; i++) begin
      if (busy) begin
        c_re[i]    = (st_q == S_RD0) || (st_q == S_RD1);
        c_raddr[i] = (st_q == S_RD0) ? CAW'(cmd_q.s0 + row_q) : CAW'(cmd_q.s1 + row_q);
        c_we[i]    = (st_q == S_EXE) && !is_red && (cmd_q.op != SIMD_REQ8);
        c_waddr[i] = CAW'(cmd_q.dst) + CAW'(row_q);
        c_wdata[i] = res[i*COLS +: COLS];
        b_we[i]    = (st_q == S_EXE) && (cmd_q.op == SIMD_REQ8);
      end else begin
        c_re[i]    = in_valid[i] && in_acc[i];
        c_raddr[i] = CAW'(in_row[i]);
        c_we[i]    = dv_q[i];
        c_waddr[i] = CAW'(drow_q[i]);
        for (int c = 0; c < COLS; c++)
          c_wdata[i][c] = (dacc_q[i] ? c_rdata[i][c] : '0) + ddata_q[i][c];
      end
    end
  end

endmodule
