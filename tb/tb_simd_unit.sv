// tb_simd_unit: SIMD unit with 2 cells x 4 columns = 8 lanes. SRAM C and
// the SRAM B slices are arrays in the testbench (one-cycle read latency).
// Checks the result drain (overwrite and accumulate, back-to-back rows) and
// every vector operation over two rows against values computed here.
// The operations are among those the paper lists for its SIMD unit; their
// encodings and the row-by-row timing are this design's own.
`timescale 1ns/1ps
module tb_simd_unit;
  import cogsys_pkg::*;

  localparam int NC = 2, C = 4, L = NC * C;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, red_valid;
  simd_cmd_t cmd;
  logic signed [47:0] red_value;
  logic [19:0] red_index;
  logic [NC-1:0] in_valid, in_acc, c_re, c_we, b_we;
  logic [NC-1:0][9:0] in_row, c_raddr, c_waddr;
  logic [NC-1:0][C-1:0][31:0] in_data, c_rdata, c_wdata;
  logic [11:0] b_waddr;
  logic [NC-1:0][C-1:0][7:0] b_wdata;

  simd_unit #(.NCELLS(NC), .COLS(C)) dut (.*);

  logic [C-1:0][31:0] memc [NC][1024];
  logic [C-1:0][7:0]  memb [NC][4096];
  always_ff @(posedge clk) begin
    for (int i = 0; i < NC; i++) begin
      if (c_re[i]) c_rdata[i] <= memc[i][c_raddr[i]];
      if (c_we[i]) memc[i][c_waddr[i]] <= c_wdata[i];
      if (b_we[i]) memb[i][b_waddr] <= b_wdata[i];
    end
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lane(int row, int l);
    return int'($signed(memc[l / C][row][l % C]));
  endfunction

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d exp %0d", w, got, exp);
    end
  endtask

  task automatic run(simd_op_e op, int s0, int s1, int dst, int rows, int imm, int sh);
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.s0 = 10'(s0); cmd.s1 = 10'(s1); cmd.dst = 12'(dst); cmd.rows = 10'(rows);
    cmd.imm = 16'(imm); cmd.shift = 5'(sh);
    start = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    int src [2][L];
    start = 0; cmd = '0; in_valid = 0; in_acc = 0; in_row = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // drain: rows 0..1 written, then accumulated, back to back
    for (int pass = 0; pass < 2; pass++)
      for (int r = 0; r < 2; r++) begin
        @(negedge clk);
        in_valid = '1; in_acc = NC'(pass ? '1 : '0);
        for (int i = 0; i < NC; i++) begin
          in_row[i] = 10'(r);
          for (int c = 0; c < C; c++) begin
            in_data[i][c] = 32'($urandom_range(0, 2000)) - 32'd1000;
            src[r][i*C + c] = (pass ? src[r][i*C + c] : 0) + int'($signed(in_data[i][c]));
          end
        end
      end
    @(negedge clk);
    in_valid = 0;
    repeat (2) @(negedge clk);
    for (int r = 0; r < 2; r++) for (int l = 0; l < L; l++) chk("drain", lane(r, l), src[r][l]);
    // vector operations on rows 0..1 and 10..11
    for (int r = 0; r < 2; r++) for (int l = 0; l < L; l++)
      memc[l / C][10 + r][l % C] = 32'($urandom_range(0, 4000)) - 32'd2000;
    run(SIMD_ADD, 0, 10, 20, 2, 0, 0);
    run(SIMD_SUB, 0, 10, 22, 2, 0, 0);
    run(SIMD_MUL, 0, 10, 24, 2, 0, 0);
    run(SIMD_MAX, 0, 10, 26, 2, 0, 0);
    run(SIMD_SIGN, 0, 0, 28, 2, 0, 0);
    run(SIMD_RELU, 10, 0, 30, 2, 0, 0);
    run(SIMD_SCALE, 0, 0, 32, 2, -3, 2);
    run(SIMD_REQ8, 10, 0, 40, 2, 0, 3);
    for (int r = 0; r < 2; r++)
      for (int l = 0; l < L; l++) begin
        automatic int a = lane(r, l), b = lane(10 + r, l);
        int q;
        chk("add", lane(20 + r, l), a + b);
        chk("sub", lane(22 + r, l), a - b);
        chk("mul", lane(24 + r, l), a * b);
        chk("max", lane(26 + r, l), (a > b) ? a : b);
        chk("sign", lane(28 + r, l), (a >= 0) ? 1 : -1);
        chk("relu", lane(30 + r, l), (b > 0) ? b : 0);
        chk("scale", lane(32 + r, l), (a * -3) >>> 2);
        q = b >>> 3;
        q = (q > 127) ? 127 : (q < -128) ? -128 : q;
        chk("req8", int'($signed(memb[l / C][40 + r][l % C])), q);
      end
    // reductions
    begin
      automatic longint s = 0;
      automatic int mx = -2147483647, arg = 0;
      for (int r = 0; r < 2; r++)
        for (int l = 0; l < L; l++) begin
          s += lane(10 + r, l);
          if (lane(10 + r, l) > mx) begin mx = lane(10 + r, l); arg = r * L + l; end
        end
      fork
        run(SIMD_RSUM, 10, 0, 0, 2, 0, 0);
        begin @(posedge red_valid); #1; chk("rsum", red_value, s); end
      join
      fork
        run(SIMD_RMAX, 10, 0, 0, 2, 0, 0);
        begin @(posedge red_valid); #1; chk("rmax", red_value, mx); chk("argmax", red_index, arg); end
      join
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
