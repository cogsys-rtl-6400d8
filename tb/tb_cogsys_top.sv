// tb_cogsys_top: end-to-end test of the whole accelerator at reduced size
// (2 cells of 4 x 4 PEs, 8 SIMD lanes, 128-row SRAMs, 4-entry command
// queue) behind a behavioural DRAM with random back-pressure.
//
// The host program below loads operands from DRAM, swaps buffers, runs a
// folded circular convolution on cell 0 while cell 1 runs a GEMM and the DMA
// prefetches the next SRAM A contents, swaps SRAM A, runs a correlation on
// a scale-up chain of both cells and a folded correlation on cell 0, applies
// SIMD element-wise, reduction and requantization commands, feeds the
// requantized results back through SRAM B into two concurrent convolutions,
// swaps SRAM C and stores every result row to DRAM. The testbench computes
// all results itself and compares the stored DRAM words and the reduction
// outputs. It also counts each mechanism of the design and counts a
// failure for any that never happened: shared SRAM A stall, scheduler
// stall, command queue back-pressure, fold accumulation, scale-up chain,
// CONV / CORR / GEMM operations, buffer swaps, DMA overlapping compute,
// two cells computing at once, reductions, INT8 saturation in
// requantization and the mapping estimate.
// Expected results use the paper's definitions of circular convolution and
// correlation; the command program and the reduced sizes are this testbench's.
`timescale 1ns/1ps
module tb_cogsys_top;
  import cogsys_pkg::*;

  localparam int NC = 2, R = 4, C = 4, DEP = 128;
  localparam int LANES = NC * C;

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

  cogsys_top #(.NCELLS(NC), .ROWS(R), .COLS(C), .A_DEPTH(DEP), .B_DEPTH(DEP),
               .C_DEPTH(DEP), .QDEPTH(4)) dut (.*);

  dram_model #(.W(C * 32), .DEPTH(4096), .LAT(5), .READY_PCT(60)) u_dram (
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
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_a_stall, n_sched_stall, n_backpressure, n_fold_acc, n_chain, n_conv, n_corr,
      n_gemm, n_swap, n_dma_overlap, n_cell_overlap, n_reduce, n_sat, n_map;
  logic signed [47:0] red_got [$];
  logic [19:0]        red_idx [$];
  logic [31:0]        stall_prev;

  always @(posedge clk) if (rst_n) begin
    if (sram_a_stall) n_a_stall++;
    if (stall_cycles != stall_prev) n_sched_stall++;
    stall_prev = stall_cycles;
    if (cmd_valid && !cmd_ready) n_backpressure++;
    for (int i = 0; i < NC; i++)
      if (dut.out_valid[i] && dut.out_acc[i]) n_fold_acc++;
    if (dut.cell_start) begin
      if (dut.cell_cmd.chain > 1) n_chain++;
      case (dut.cell_cmd.op)
        CELL_CONV: n_conv++;
        CELL_CORR: n_corr++;
        default:   n_gemm++;
      endcase
    end
    if (dut.swap_a || |dut.swap_b || |dut.swap_c) n_swap++;
    if (dut.dma_busy && |dut.cell_busy) n_dma_overlap++;
    if (&dut.cell_busy) n_cell_overlap++;
    if (red_valid) begin
      n_reduce++;
      red_got.push_back(red_value);
      red_idx.push_back(red_index);
    end
    if (map_valid_o) n_map++;
  end

  // ---------------- reference data ----------------
  logic [7:0] a1 [16][C], a2 [16][C], bd [NC][16][C], bq [NC][8][C];
  longint     ec [NC][DEP][C];
  bit         known [NC][DEP];

  function automatic int sx(logic [7:0] v); return int'($signed(v)); endfunction

  function automatic logic [7:0] sat8(longint v, int sh);
    longint s = v >>> sh;
    if (s > 127) return 8'h7f;
    if (s < -128) return 8'h80;
    return 8'(s);
  endfunction

  function automatic longint wrap32(longint v); return longint'($signed(32'(v))); endfunction

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

  task automatic simd(simd_op_e op, int s0, int s1, int dst, int rows, int imm, int sh);
    cmd_t c = '0;
    c.kind = CMD_SIMD; c.sc.op = op; c.sc.s0 = 10'(s0); c.sc.s1 = 10'(s1);
    c.sc.dst = 12'(dst); c.sc.rows = 10'(rows); c.sc.imm = 16'(imm); c.sc.shift = 5'(sh);
    push(c);
  endtask

  task automatic wait_for(int cells, bit s, bit d);
    cmd_t c = '0;
    c.kind = CMD_WAIT; c.wait_cells = 16'(cells); c.wait_simd = s; c.wait_dma = d;
    push(c);
  endtask

  task automatic swap(bit a, int b, int cm);
    cmd_t c = '0;
    c.kind = CMD_SWAP; c.swap_a = a; c.swap_b = 16'(b); c.swap_c = 16'(cm);
    push(c);
  endtask

  // expected circular convolution / correlation of A rows with B rows
  task automatic ref_circ(bit corr, int sl, int cb, int d, int ab, bit use_a2,
                          int bsl, int bb, bit use_bq);
    for (int j = 0; j < d; j++) begin
      for (int c = 0; c < C; c++) begin
        longint s = 0;
        for (int k = 0; k < d; k++) begin
          int bi = corr ? ((k - j) % d + d) % d : ((j - k) % d + d) % d;
          int av = use_a2 ? sx(a2[ab + k][c]) : sx(a1[ab + k][c]);
          int bv = use_bq ? sx(bq[bsl][bb + bi][c]) : sx(bd[bsl][bb + bi][c]);
          s += av * bv;
        end
        ec[sl][cb + j][c] = s;
      end
      known[sl][cb + j] = 1;
    end
  endtask

  initial begin
    automatic longint rsum = 0, rmax = 0;
    automatic int rarg = 0, nsat = 0;
    cmd_valid = 0; cmd = '0; map_valid_i = 0;
    map_n = 0; map_m = 0; map_k = 0; map_d = 0;
    stall_prev = 0;
    {n_a_stall, n_sched_stall, n_backpressure, n_fold_acc, n_chain, n_conv, n_corr,
     n_gemm, n_swap, n_dma_overlap, n_cell_overlap, n_reduce, n_sat, n_map} = '0;
    for (int s = 0; s < NC; s++) for (int r = 0; r < DEP; r++) known[s][r] = 0;

    // operands in DRAM: A1 at 0, B slice 0 at 100, B slice 1 at 200, A2 at 300
    for (int r = 0; r < 16; r++) begin
      for (int c = 0; c < C; c++) begin
        a1[r][c] = 8'($urandom);
        a2[r][c] = 8'($urandom);
        for (int s = 0; s < NC; s++) bd[s][r][c] = 8'($urandom);
      end
      u_dram.mem[r]       = '0;
      u_dram.mem[100 + r] = '0;
      u_dram.mem[200 + r] = '0;
      u_dram.mem[300 + r] = '0;
      for (int c = 0; c < C; c++) begin
        u_dram.mem[r][8*c +: 8]       = a1[r][c];
        u_dram.mem[100 + r][8*c +: 8] = bd[0][r][c];
        u_dram.mem[200 + r][8*c +: 8] = bd[1][r][c];
        u_dram.mem[300 + r][8*c +: 8] = a2[r][c];
      end
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // mapping estimate for the NVSA case (N=32, M=512, k=210, d=1024)
    @(negedge clk);
    map_valid_i = 1; map_n = 32; map_m = 512; map_k = 210; map_d = 1024;
    @(negedge clk);
    map_valid_i = 0;
    @(negedge clk);
    chk("map valid", map_valid_o, 1);
    chk("map temporal cycles", map_cyc_temporal, 7 * 2 * (3 * 512 + 1024 - 1));
    chk("map spatial cycles", map_cyc_spatial, 210 * 1 * (3 * 512 + 1024 - 1));
    chk("map picks temporal", map_use_spatial, 0);

    // ---- host program ----
    dma(0, MEM_A, 0, 0, 0, 16);
    dma(0, MEM_B, 0, 100, 0, 16);
    dma(0, MEM_B, 1, 200, 0, 16);
    wait_for(0, 0, 1);
    swap(1, 2'b11, 0);
    run_cell(CELL_CONV, 0, 1, 10, 0, 0, 0);      // 3 folds on cell 0
    run_cell(CELL_GEMM, 1, 1, 10, 10, 0, 0);     // GEMM on cell 1, same time
    dma(0, MEM_A, 0, 300, 0, 16);            // prefetch A2 into the idle bank
    wait_for(2'b11, 0, 1);
    swap(1, 0, 0);
    run_cell(CELL_CORR, 0, 2, 8, 0, 0, 16);      // chain of both cells, Mc = 8
    run_cell(CELL_CORR, 0, 1, 8, 8, 8, 16);      // 2 folds on cell 0
    wait_for(2'b11, 0, 0);
    simd(SIMD_ADD, 0, 16, 32, 8, 0, 0);
    simd(SIMD_MAX, 0, 16, 40, 8, 0, 0);
    simd(SIMD_RELU, 16, 0, 48, 8, 0, 0);
    simd(SIMD_RSUM, 0, 0, 0, 10, 0, 0);
    simd(SIMD_RMAX, 16, 0, 0, 8, 0, 0);
    simd(SIMD_REQ8, 0, 0, 32, 8, 0, 6);      // into SRAM B rows 32..39
    wait_for(0, 1, 0);
    run_cell(CELL_CONV, 0, 1, 8, 0, 32, 64);
    run_cell(CELL_CONV, 1, 1, 8, 8, 32, 64);
    wait_for(2'b11, 0, 0);
    swap(0, 0, 2'b11);
    dma(1, MEM_C, 0, 1000, 0, 72);
    dma(1, MEM_C, 1, 2000, 0, 72);
    wait_for(0, 0, 1);
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);

    // ---- reference ----
    ref_circ(0, 0, 0, 10, 0, 0, 0, 0, 0);
    for (int v = 0; v < 10; v++) begin
      for (int c = 0; c < C; c++) begin
        automatic longint s = 0;
        for (int r = 0; r < R; r++) s += sx(a1[10 + r][c]) * sx(bd[1][v][r]);
        ec[1][v][c] = s;
      end
      known[1][v] = 1;
    end
    ref_circ(1, 1, 16, 8, 0, 1, 0, 0, 0);
    ref_circ(1, 0, 16, 8, 8, 1, 0, 8, 0);
    for (int s = 0; s < NC; s++)
      for (int r = 0; r < 8; r++) begin
        for (int c = 0; c < C; c++) begin
          automatic longint x = ec[s][r][c], y = ec[s][16 + r][c];
          ec[s][32 + r][c] = wrap32(x + y);
          ec[s][40 + r][c] = (x > y) ? x : y;
          ec[s][48 + r][c] = (y > 0) ? y : 0;
          bq[s][r][c] = sat8(x, 6);
          if (sx(bq[s][r][c]) != (x >>> 6)) nsat++;
        end
        known[s][32 + r] = 1; known[s][40 + r] = 1; known[s][48 + r] = 1;
      end
    for (int s = 0; s < NC; s++)
      for (int r = 0; r < 10; r++)
        for (int c = 0; c < C; c++) rsum += ec[s][r][c];
    rmax = ec[0][16][0] - 1;
    for (int r = 0; r < 8; r++)
      for (int s = 0; s < NC; s++)
        for (int c = 0; c < C; c++)
          if (ec[s][16 + r][c] > rmax) begin
            rmax = ec[s][16 + r][c];
            rarg = r * LANES + s * C + c;
          end
    ref_circ(0, 0, 64, 8, 0, 1, 0, 0, 1);
    ref_circ(0, 1, 64, 8, 8, 1, 1, 0, 1);
    n_sat = nsat;

    // ---- compare ----
    for (int s = 0; s < NC; s++)
      for (int r = 0; r < 72; r++)
        if (known[s][r])
          for (int c = 0; c < C; c++)
            chk($sformatf("C slice %0d row %0d lane %0d", s, r, c),
                longint'($signed(u_dram.mem[(s == 0 ? 1000 : 2000) + r][32*c +: 32])),
                ec[s][r][c]);
    chk("reductions", red_got.size(), 2);
    if (red_got.size() == 2) begin
      chk("RSUM", red_got[0], rsum);
      chk("RMAX value", red_got[1], rmax);
      chk("RMAX index", red_idx[1], rarg);
    end
    chk("commands issued", issued, 27);

    $display("mechanisms: a_stall=%0d sched_stall=%0d backpressure=%0d fold_acc=%0d chain=%0d",
             n_a_stall, n_sched_stall, n_backpressure, n_fold_acc, n_chain);
    $display("            conv=%0d corr=%0d gemm=%0d swap=%0d dma_overlap=%0d cell_overlap=%0d",
             n_conv, n_corr, n_gemm, n_swap, n_dma_overlap, n_cell_overlap);
    $display("            reduce=%0d saturate=%0d map=%0d", n_reduce, n_sat, n_map);
    chk("seen SRAM A stall",         n_a_stall > 0, 1);
    chk("seen scheduler stall",      n_sched_stall > 0, 1);
    chk("seen queue back-pressure",  n_backpressure > 0, 1);
    chk("seen fold accumulation",    n_fold_acc > 0, 1);
    chk("seen scale-up chain",       n_chain > 0, 1);
    chk("seen CONV",                 n_conv > 0, 1);
    chk("seen CORR",                 n_corr > 0, 1);
    chk("seen GEMM",                 n_gemm > 0, 1);
    chk("seen buffer swap",          n_swap > 0, 1);
    chk("seen DMA during compute",   n_dma_overlap > 0, 1);
    chk("seen two cells at once",    n_cell_overlap > 0, 1);
    chk("seen reduction",            n_reduce > 0, 1);
    chk("seen INT8 saturation",      n_sat > 0, 1);
    chk("seen mapping estimate",     n_map > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
