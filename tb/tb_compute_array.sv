// tb_compute_array: self-checking test of the compute array with reduced
// sizes (2 cells of 4 x 4 PEs). SRAM A, the SRAM B slices and SRAM C are
// plain arrays in the testbench with one-cycle read latency. It checks
// circular convolution and correlation for d = Mc, d < Mc and d > Mc
// (temporal folding), a scale-up chain of both cells, GEMM on one cell and
// on a chain, concurrent operation of two cells with a stall on the shared
// SRAM A port, and the cycle count ceil(d/Mc) * (3*Mc + d - 1) of every
// convolution.
// Expected values follow the paper's convolution formula and its latency
// T = 3M + d - 1 per fold; the reduced sizes are this testbench's choice.
`timescale 1ns/1ps
module tb_compute_array;
  import cogsys_pkg::*;

  localparam int NC = 2, R = 4, C = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  cell_cmd_t cmd;
  logic a_en;
  logic [11:0] a_addr;
  logic [C-1:0][7:0] a_rdata;
  logic [NC-1:0] b_en;
  logic [NC-1:0][11:0] b_addr;
  logic [NC-1:0][C-1:0][7:0] b_rdata;
  logic [NC-1:0] out_valid, out_acc, busy, done;
  logic [NC-1:0][9:0] out_row;
  logic [NC-1:0][C-1:0][31:0] out_data;
  logic a_stall;

  compute_array #(.NCELLS(NC), .ROWS(R), .COLS(C)) dut (.*);

  logic [C-1:0][7:0]  mem_a [4096];
  logic [C-1:0][7:0]  mem_b [NC][4096];
  logic [C-1:0][31:0] mem_c [NC][1024];

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem_a[a_addr];
    for (int i = 0; i < NC; i++) begin
      if (b_en[i]) b_rdata[i] <= mem_b[i][b_addr[i]];
      if (out_valid[i]) begin
        for (int c = 0; c < C; c++)
          mem_c[i][out_row[i]][c] <= (out_acc[i] ? mem_c[i][out_row[i]][c] : 32'd0) + out_data[i][c];
      end
    end
  end

  int checks = 0, failures = 0, stalls = 0;
  int busy_cnt [NC];
  always_ff @(posedge clk) begin
    if (a_stall) stalls <= stalls + 1;
    for (int i = 0; i < NC; i++) if (busy[i]) busy_cnt[i] <= busy_cnt[i] + 1;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction

  task automatic fill_vectors(int abase, int bbase, int cl, int d);
    for (int k = 0; k < d; k++)
      for (int c = 0; c < C; c++) begin
        mem_a[abase + k][c] = 8'($urandom_range(0, 255));
        mem_b[cl][bbase + k][c] = 8'($urandom_range(0, 255));
      end
  endtask

  task automatic issue(cell_op_e op, int head, int chain, int len, int ab, int bb, int cb);
    @(negedge clk);
    cmd = '0;
    cmd.op = op; cmd.head = 4'(head); cmd.chain = 5'(chain); cmd.len = 16'(len);
    cmd.a_base = 12'(ab); cmd.b_base = 12'(bb); cmd.c_base = 10'(cb);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (|busy) @(negedge clk);
    @(negedge clk);
  endtask

  task automatic check_conv(bit corr, int head, int chain, int d, int ab, int bb, int cb);
    int tail = head + chain - 1;
    for (int c = 0; c < C; c++)
      for (int j = 0; j < d; j++) begin
        int exp = 0;
        for (int k = 0; k < d; k++) begin
          int bi = corr ? ((k - j) % d + d) % d : ((j - k) % d + d) % d;
          exp += sx(mem_a[ab + k][c]) * sx(mem_b[head][bb + bi][c]);
        end
        checks++;
        if (int'($signed(mem_c[tail][cb + j][c])) !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL conv corr=%0b d=%0d col %0d out %0d: got %0d exp %0d",
                                      corr, d, c, j, $signed(mem_c[tail][cb + j][c]), exp);
        end
      end
  endtask

  task automatic run_conv(bit corr, int head, int chain, int d);
    int mc = R * chain, folds = (d + mc - 1) / mc, cyc;
    fill_vectors(100, 200, head, d);
    for (int i = 0; i < NC; i++) busy_cnt[i] = 0;
    issue(corr ? CELL_CORR : CELL_CONV, head, chain, d, 100, 200, 10);
    wait_idle();
    check_conv(corr, head, chain, d, 100, 200, 10);
    // busy covers every cycle of the folds plus the final output cycle
    cyc = busy_cnt[head + chain - 1];
    checks++;
    if (cyc != folds * (3 * mc + d - 1) + 1) begin
      failures++;
      $display("FAIL cycles d=%0d Mc=%0d: %0d, expected %0d", d, mc, cyc, folds * (3 * mc + d - 1) + 1);
    end
  endtask

  task automatic run_gemm(int head, int chain, int nv, int cb);
    int mc = R * chain;
    int tail = head + chain - 1;
    for (int r = 0; r < mc; r++)
      for (int c = 0; c < C; c++) mem_a[300 + r][c] = 8'($urandom_range(0, 255));
    for (int v = 0; v < nv; v++)
      for (int p = 0; p < chain; p++)
        for (int r = 0; r < R; r++) mem_b[head + p][400 + v][r] = 8'($urandom_range(0, 255));
    issue(CELL_GEMM, head, chain, nv, 300, 400, cb);
    wait_idle();
    for (int v = 0; v < nv; v++)
      for (int c = 0; c < C; c++) begin
        int exp = 0;
        for (int r = 0; r < mc; r++)
          exp += sx(mem_a[300 + r][c]) * sx(mem_b[head + r / R][400 + v][r % R]);
        checks++;
        if (int'($signed(mem_c[tail][cb + v][c])) !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL gemm v %0d col %0d: got %0d exp %0d", v, c,
                                      $signed(mem_c[tail][cb + v][c]), exp);
        end
      end
  endtask

  initial begin
    start = 0; cmd = '0;
    for (int i = 0; i < NC; i++) busy_cnt[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_conv(0, 0, 1, 4);    // d = Mc
    run_conv(1, 0, 1, 4);    // correlation
    run_conv(0, 1, 1, 3);    // d < Mc
    run_conv(1, 1, 1, 2);
    run_conv(0, 0, 1, 10);   // d > Mc: three folds
    run_conv(1, 1, 1, 9);
    run_conv(0, 0, 2, 8);    // scale-up chain, Mc = 8
    run_conv(0, 0, 2, 13);   // chain with folds
    run_conv(1, 0, 2, 5);
    run_gemm(1, 1, 5, 20);
    run_gemm(0, 2, 4, 40);
    // two cells at once: the second head waits for SRAM A
    begin
      automatic int st0 = stalls;
      for (int k = 0; k < 6; k++)
        for (int c = 0; c < C; c++) begin
          mem_a[500 + k][c] = 8'($urandom_range(0, 255));
          mem_b[0][600 + k][c] = 8'($urandom_range(0, 255));
          mem_a[700 + k][c] = 8'($urandom_range(0, 255));
          mem_b[1][800 + k][c] = 8'($urandom_range(0, 255));
        end
      issue(CELL_CONV, 0, 1, 6, 500, 600, 50);
      issue(CELL_CORR, 1, 1, 6, 700, 800, 60);
      wait_idle();
      check_conv(0, 0, 1, 6, 500, 600, 50);
      check_conv(1, 1, 1, 6, 700, 800, 60);
      checks++;
      if (stalls == st0) begin
        failures++;
        $display("FAIL no SRAM A stall seen");
      end
    end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
