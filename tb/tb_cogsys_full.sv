// tb_cogsys_full: the accelerator at its full default size (16 cells of
// 32 x 32 PEs, 512 SIMD lanes, full SRAMs, 1024-bit DRAM words) taken
// through one complete program: DMA loads of SRAM A and of all 16 SRAM B
// slices, a buffer swap, sixteen d = 32 circular convolutions at once, one
// per cell (temporal mapping; one pass of 3*32 + 32 - 1 = 127 cycles each,
// the cells taking turns on the shared SRAM A port), a SIMD sum reduction
// over all 512 lanes, a GEMM on the scale-up chain of all 16 cells (a
// 512 x 32 weight tile, M = 512), an SRAM C swap and DMA stores of the
// results. Results read back from the DRAM model, the reduction and the
// cycle count of cell 0's convolution are compared with values computed
// here.
// Sizes are the paper's (16 cells of 32 x 32, 256 kB SRAM A, 4 MB SRAM B);
// the program and the DRAM layout are this testbench's own.
`timescale 1ns/1ps
module tb_cogsys_full;
  import cogsys_pkg::*;

  localparam int NC = 16, R = 32, C = 32, NV = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, idle, sram_a_stall, red_valid;
  cmd_t cmd;
  logic [31:0] stall_cycles, issued;
  logic signed [47:0] red_value;
  logic [19:0] red_index;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [31:0] dram_req_addr;
  logic [C*32-1:0] dram_req_wdata, dram_rsp_rdata;
  logic map_valid_i, map_valid_o, map_use_spatial;
  logic [15:0] map_n, map_m, map_k, map_d;
  logic [63:0] map_cyc_temporal, map_cyc_spatial;

  cogsys_top dut (.*);

  dram_model #(.W(C * 32), .DEPTH(2048), .LAT(6), .READY_PCT(80)) u_dram (
    .clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata)
  );

  int checks = 0, failures = 0;

  task automatic chk(string w, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d exp %0d", w, got, exp);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // busy cycles of cell 0 and the last reduction
  int busy0, n_red;
  logic signed [47:0] red_got;
  bit gemm_seen;
  always @(posedge clk) if (rst_n) begin
    if (dut.cell_start && dut.cell_cmd.op == CELL_GEMM) gemm_seen = 1;
    if (dut.cell_busy[0] && !gemm_seen) busy0++;
    if (red_valid) begin
      red_got = red_value;
      n_red++;
    end
  end

  task automatic push(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic dma(bit st, mem_sel_e m, int sl, int da, int sa, int rows);
    cmd_t c = '0;
    c.kind = CMD_DMA; c.dc.to_dram = st; c.dc.mem = m; c.dc.slice = 4'(sl);
    c.dc.dram_addr = 32'(da); c.dc.sram_addr = 12'(sa); c.dc.rows = 13'(rows);
    push(c);
  endtask

  task automatic run_cell(cell_op_e op, int head, int chain, int len, int ab, int bb, int cb);
    cmd_t c = '0;
    c.kind = CMD_CELL; c.cc.op = op; c.cc.head = 4'(head); c.cc.chain = 5'(chain);
    c.cc.len = 16'(len); c.cc.a_base = 12'(ab); c.cc.b_base = 12'(bb); c.cc.c_base = 10'(cb);
    push(c);
  endtask

  task automatic wait_for(int cells, bit s, bit d);
    cmd_t c = '0;
    c.kind = CMD_WAIT; c.wait_cells = 16'(cells); c.wait_simd = s; c.wait_dma = d;
    push(c);
  endtask

  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction

  // DRAM layout: A rows 0..543 at word 0 (conv operand 0..31, GEMM weights
  // 32..543), B slice s rows 0..31 at word 600 + 32*s. Results: slice 0 rows
  // 0..31 at word 1200, slice 15 rows 0..31 at 1250, GEMM rows at 1300.
  function automatic int a_val(int r, int c); return sx(u_dram.mem[r][8*c +: 8]); endfunction
  function automatic int b_val(int s, int r, int c);
    return sx(u_dram.mem[600 + 32*s + r][8*c +: 8]);
  endfunction

  initial begin
    cmd_t c;
    automatic longint rsum = 0;
    cmd_valid = 0; cmd = '0; map_valid_i = 0;
    map_n = 0; map_m = 0; map_k = 0; map_d = 0;
    busy0 = 0; n_red = 0; red_got = 0; gemm_seen = 0;
    for (int r = 0; r < 544; r++)
      for (int k = 0; k < C; k++) u_dram.mem[r][8*k +: 8] = 8'($urandom);
    for (int s = 0; s < NC; s++)
      for (int r = 0; r < 32; r++)
        for (int k = 0; k < C; k++) u_dram.mem[600 + 32*s + r][8*k +: 8] = 8'($urandom);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    dma(0, MEM_A, 0, 0, 0, 544);
    for (int s = 0; s < NC; s++) dma(0, MEM_B, s, 600 + 32*s, 0, 32);
    wait_for(0, 0, 1);
    c = '0; c.kind = CMD_SWAP; c.swap_a = 1; c.swap_b = 16'hFFFF; push(c);
    for (int s = 0; s < NC; s++) run_cell(CELL_CONV, s, 1, 32, 0, 0, 0);
    wait_for(16'hFFFF, 0, 0);
    c = '0; c.kind = CMD_SIMD; c.sc.op = SIMD_RSUM; c.sc.s0 = 0; c.sc.rows = 10'd32; push(c);
    wait_for(0, 1, 0);
    run_cell(CELL_GEMM, 0, 16, NV, 32, 0, 40);
    wait_for(16'hFFFF, 0, 0);
    c = '0; c.kind = CMD_SWAP; c.swap_c = 16'h8001; push(c);
    dma(1, MEM_C, 0, 1200, 0, 32);
    dma(1, MEM_C, 15, 1250, 0, 32);
    dma(1, MEM_C, 15, 1300, 40, NV);
    wait_for(0, 0, 1);
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);

    // convolution on cell s: C[j] = sum_i A[i] * B_s[(j - i) mod 32], per
    // column; slices 0 and 15 are stored and compared, all enter the sum
    for (int sl = 0; sl < NC; sl++)
      for (int j = 0; j < 32; j++)
        for (int k = 0; k < C; k++) begin
          automatic longint s = 0;
          for (int i = 0; i < 32; i++) s += a_val(i, k) * b_val(sl, (j - i + 32) % 32, k);
          rsum += s;
          if (sl == 0)
            chk($sformatf("conv cell 0 row %0d col %0d", j, k),
                longint'($signed(u_dram.mem[1200 + j][32*k +: 32])), s);
          if (sl == 15)
            chk($sformatf("conv cell 15 row %0d col %0d", j, k),
                longint'($signed(u_dram.mem[1250 + j][32*k +: 32])), s);
        end
    // GEMM on the 16-cell chain: out[v][col] = sum_r W[r][col] * x_v[r]
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < C; k++) begin
        automatic longint s = 0;
        for (int r = 0; r < NC * R; r++) s += a_val(32 + r, k) * b_val(r / R, v, r % R);
        chk($sformatf("gemm v %0d col %0d", v, k), longint'($signed(u_dram.mem[1300 + v][32*k +: 32])), s);
      end
    chk("reductions", n_red, 1);
    chk("RSUM over 512 lanes", red_got, rsum);
    // cell 0 wins SRAM A first, so it never stalls: T plus the output cycle
    chk("conv pass cycles", busy0, 3 * 32 + 32 - 1 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
