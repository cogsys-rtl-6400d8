// tb_dbuf_sram: checks the double-buffered SRAM: the compute side and the
// DMA side reach different banks, a swap exchanges them, reads have one
// cycle of latency, and both sides work in the same cycle.
// The paper only asks for double buffering; the reference model follows
// this design's own bank and swap rules.
`timescale 1ns/1ps
module tb_dbuf_sram;
  localparam int W = 16, D = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, sel_o, c_re, c_we, d_re, d_we;
  logic [4:0] c_raddr, c_waddr, d_raddr, d_waddr;
  logic [W-1:0] c_rdata, c_wdata, d_rdata, d_wdata;

  dbuf_sram #(.W(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, swaps = 0;
  logic [W-1:0] model [2][D];
  logic sel;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    swap = 0; c_re = 0; c_we = 0; d_re = 0; d_we = 0;
    c_raddr = 0; c_waddr = 0; d_raddr = 0; d_waddr = 0; c_wdata = 0; d_wdata = 0;
    sel = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill both banks through both sides
    for (int b = 0; b < 2; b++) begin
      for (int a = 0; a < D; a++) begin
        @(negedge clk);
        c_we = 1; c_waddr = 5'(a); c_wdata = W'($urandom);
        d_we = 1; d_waddr = 5'(a); d_wdata = W'($urandom);
        model[sel][a] = c_wdata;
        model[!sel][a] = d_wdata;
      end
      @(negedge clk);
      c_we = 0; d_we = 0;
    end
    // random traffic with swaps
    for (int i = 0; i < 2000; i++) begin
      logic [W-1:0] ec, ed;
      logic rc, rd, sw;
      @(negedge clk);
      swap = ($urandom_range(0, 9) == 0);
      c_re = $urandom_range(0, 1); c_raddr = 5'($urandom);
      d_re = $urandom_range(0, 1); d_raddr = 5'($urandom);
      c_we = $urandom_range(0, 1); c_waddr = 5'($urandom); c_wdata = W'($urandom);
      d_we = $urandom_range(0, 1); d_waddr = 5'($urandom); d_wdata = W'($urandom);
      ec = model[sel][c_raddr];
      ed = model[!sel][d_raddr];
      rc = c_re; rd = d_re; sw = swap;
      checks++;
      if (sel_o !== sel) failures++;
      if (c_we) model[sel][c_waddr] = c_wdata;
      if (d_we) model[!sel][d_waddr] = d_wdata;
      @(negedge clk);
      swap = 0; c_we = 0; d_we = 0; c_re = 0; d_re = 0;
      if (rc) begin
        checks++;
        if (c_rdata !== ec) begin failures++; $display("FAIL compute read"); end
      end
      if (rd) begin
        checks++;
        if (d_rdata !== ed) begin failures++; $display("FAIL dma read"); end
      end
      if (sw) begin sel = !sel; swaps++; end
    end
    checks++;
    if (swaps == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
