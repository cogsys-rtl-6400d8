// tb_st_map_select: checks the spatial/temporal mapping estimate against
// the latency and memory-read formulas, for the paper's NVSA and LVRF
// cases (N = 32, M = 512, d = 1024, k = 210 and k = 2575, where temporal
// mapping must win), a low-dimensional case and random cases.
`timescale 1ns/1ps
module tb_st_map_select;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic valid_i, valid_o, use_spatial;
  logic [15:0] n_arrays, m_pes, k_ops, d_dim;
  logic [63:0] cyc_temporal, cyc_spatial;
  logic [31:0] t_pass, reads_temporal, reads_spatial;

  st_map_select dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", w, got, exp);
    end
  endtask

  task automatic query(int n, int m, int k, int d, int want_spatial);
    longint t = 3*m + d - 1;
    longint ct = longint'((k + n - 1) / n) * longint'((d + m - 1) / m) * t;
    longint cs = longint'(k) * longint'((d + n*m - 1) / (n*m)) * t;
    @(negedge clk);
    valid_i = 1; n_arrays = 16'(n); m_pes = 16'(m); k_ops = 16'(k); d_dim = 16'(d);
    @(negedge clk);
    valid_i = 0;
    @(negedge clk);
    chk("valid", longint'(valid_o), 1);
    chk("T", longint'(t_pass), t);
    chk("C_T", longint'(cyc_temporal), ct);
    chk("C_S", longint'(cyc_spatial), cs);
    chk("B_T", longint'(reads_temporal), longint'((d + m) * n));
    chk("B_S", longint'(reads_spatial), longint'(2 * d));
    chk("choice", longint'(use_spatial), (want_spatial >= 0) ? want_spatial : longint'(cs <= ct));
  endtask

  initial begin
    valid_i = 0; n_arrays = 1; m_pes = 1; k_ops = 1; d_dim = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    query(32, 512, 210, 1024, 0);    // NVSA: temporal
    query(32, 512, 2575, 1024, 0);   // LVRF: temporal
    query(32, 32, 64, 64, -1);       // low-dimensional vectors
    query(32, 512, 1, 16384, 1);     // one very long convolution: spatial
    for (int i = 0; i < 20; i++)
      query($urandom_range(1, 64), $urandom_range(1, 600), $urandom_range(1, 3000),
            $urandom_range(1, 20000), -1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
