// tb_ns_cell: drives a 3 x 3 cell cycle by cycle the way a sequencer would.
// Column 0 repeats the paper's d = 3 bubble-streaming example and must give
// (A1B1+A2B2+A3B3, A1B3+A2B1+A3B2, A1B2+A2B3+A3B1); columns 1 and 2 run
// circular convolutions of other vectors at the same time. Then a GEMM
// (weight tile 3 x 3, five input vectors) checks skew, deskew and the
// output cycle 2*M + COLS + 1 + v. Outputs of the convolution are expected
// in cycle 3*M + j of the data timeline.
`timescale 1ns/1ps
module tb_ns_cell;
  import cogsys_pkg::*;

  localparam int R = 3, C = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_mode_e mode;
  logic chain_in;
  logic [C-1:0][7:0]  local_a, local_b, up_b;
  logic [C-1:0][31:0] up_a, bot_a, out_data;
  logic [C-1:0][7:0]  bot_b;

  ns_cell #(.ROWS(R), .COLS(C)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction

  int a [C][R];
  int b [C][R];
  int exp_o [C][R];

  initial begin
    mode = PE_HOLD; chain_in = 0; local_a = 0; local_b = 0; up_a = 0; up_b = 0;
    // column 0: the paper's example with A = (1,2,3), B = (4,5,6): correlation
    for (int k = 0; k < R; k++) begin
      a[0][k] = k + 1;  b[0][k] = k + 4;
      for (int c = 1; c < C; c++) begin
        a[c][k] = $urandom_range(0, 40) - 20;  b[c][k] = $urandom_range(0, 40) - 20;
      end
    end
    exp_o[0][0] = a[0][0]*b[0][0] + a[0][1]*b[0][1] + a[0][2]*b[0][2];  // A1B1+A2B2+A3B3
    exp_o[0][1] = a[0][0]*b[0][2] + a[0][1]*b[0][0] + a[0][2]*b[0][1];  // A1B3+A2B1+A3B2
    exp_o[0][2] = a[0][0]*b[0][1] + a[0][1]*b[0][2] + a[0][2]*b[0][0];  // A1B2+A2B3+A3B1
    for (int c = 1; c < C; c++)
      for (int j = 0; j < R; j++) begin
        exp_o[c][j] = 0;
        for (int k = 0; k < R; k++) exp_o[c][j] += a[c][k] * b[c][((j - k) % R + R) % R];
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // convolution / correlation: data time D = 1 .. 3M + d - 1 (M = d = 3)
    for (int D = 1; D <= 3*R + R - 1; D++) begin
      @(negedge clk);
      mode = (D <= R) ? PE_LOAD : PE_CONV;
      for (int c = 0; c < C; c++) begin
        automatic int m = D - (R - 1);
        local_a[c] = (D <= R) ? 8'(a[c][R - D]) : 8'd0;
        if (m >= 0 && m < 2*R - 1)
          local_b[c] = (c == 0) ? 8'(b[0][(((R - 1 - m) % R) + R) % R])   // correlation order
                                : 8'(b[c][(((m - (R - 1)) % R) + R) % R]); // convolution order
        else
          local_b[c] = 8'($urandom);
      end
      #1;
      if (D >= 3*R) begin
        for (int c = 0; c < C; c++) begin
          checks++;
          if (int'($signed(out_data[c])) != exp_o[c][D - 3*R]) begin
            failures++;
            $display("FAIL conv col %0d out %0d: got %0d exp %0d", c, D - 3*R,
                     $signed(out_data[c]), exp_o[c][D - 3*R]);
          end
        end
      end
    end
    // GEMM: W[r][c] stationary, five vectors x_v
    begin
      int w [R][C];
      int x [5][R];
      @(negedge clk);
      mode = PE_HOLD;
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) w[r][c] = $urandom_range(0, 255) - 128;
      for (int v = 0; v < 5; v++) for (int r = 0; r < R; r++) x[v][r] = $urandom_range(0, 255) - 128;
      for (int D = 1; D <= 2*R + C + 1 + 4; D++) begin
        @(negedge clk);
        mode = (D <= R) ? PE_LOAD : PE_GEMM;
        for (int c = 0; c < C; c++) local_a[c] = (D <= R) ? 8'(w[R - D][c]) : 8'd0;
        for (int r = 0; r < R; r++) begin
          automatic int v = D - (R + 1);
          local_b[r] = (v >= 0 && v < 5) ? 8'(x[v][r]) : 8'd0;
        end
        #1;
        if (D >= 2*R + C + 1) begin
          automatic int v = D - (2*R + C + 1);
          for (int c = 0; c < C; c++) begin
            automatic int e = 0;
            for (int r = 0; r < R; r++) e += w[r][c] * x[v][r];
            checks++;
            if (int'($signed(out_data[c])) != e) begin
              failures++;
              $display("FAIL gemm v %0d col %0d: got %0d exp %0d", v, c, $signed(out_data[c]), e);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
