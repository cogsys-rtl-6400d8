// tb_workload_vsa: the vector-symbolic kernel of the NVSA and LVRF
// workloads at its real size, d = 1024, on full-size 32 x 32 cells (two of
// them, to keep the build short). Cell 0 binds 32 pairs of 1024-element
// INT8 vectors by circular convolution, one pair per column, while cell 1
// unbinds 32 other pairs by circular correlation; the two share the SRAM A
// port. With M = 32 PEs per column each operation takes ceil(1024/32) = 32
// folds of T = 3*32 + 1024 - 1 = 1119 cycles, the partial results of the
// folds being added in SRAM C. Operands come from DRAM through the memory
// controller and the results go back to DRAM, where all 65,536 outputs are
// compared with a direct evaluation of the definitions. The busy time of
// cell 0 minus the cycles it waited for SRAM A must be 32 * 1119 + 1.
// The vector dimension and the latency formula are the paper's; the two
// cell size and the program are this testbench's own.
`timescale 1ns/1ps
module tb_workload_vsa;
  import cogsys_pkg::*;

  localparam int NC = 2, C = 32, D = 1024;

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

  cogsys_top #(.NCELLS(NC)) dut (.*);

  dram_model #(.W(C * 32), .DEPTH(5 * D), .LAT(8), .READY_PCT(90)) u_dram (
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy0, wait0;
  always @(posedge clk) if (rst_n) begin
    if (dut.cell_busy[0]) busy0++;
    if (dut.u_array.a_req[0] && !dut.u_array.a_gnt[0]) wait0++;
  end

  task automatic push(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic dma(bit st, mem_sel_e m, int sl, int da, int rows);
    cmd_t c = '0;
    c.kind = CMD_DMA; c.dc.to_dram = st; c.dc.mem = m; c.dc.slice = 4'(sl);
    c.dc.dram_addr = 32'(da); c.dc.sram_addr = '0; c.dc.rows = 13'(rows);
    push(c);
  endtask

  task automatic run_cell(cell_op_e op, int head);
    cmd_t c = '0;
    c.kind = CMD_CELL; c.cc.op = op; c.cc.head = 4'(head); c.cc.chain = 5'd1;
    c.cc.len = 16'(D);
    push(c);
  endtask

  task automatic wait_for(int cells, bit d);
    cmd_t c = '0;
    c.kind = CMD_WAIT; c.wait_cells = 16'(cells); c.wait_dma = d;
    push(c);
  endtask

  // operands, kept here because the DRAM words are reused for results
  logic [7:0] va [D][C], vb [NC][D][C];

  initial begin
    cmd_t c;
    cmd_valid = 0; cmd = '0; map_valid_i = 0;
    map_n = 0; map_m = 0; map_k = 0; map_d = 0;
    busy0 = 0; wait0 = 0;
    // DRAM: A at 0, B slice 0 at D, B slice 1 at 2D; results at 3D and 4D
    for (int r = 0; r < D; r++)
      for (int k = 0; k < C; k++) begin
        va[r][k] = 8'($urandom);
        vb[0][r][k] = 8'($urandom);
        vb[1][r][k] = 8'($urandom);
        u_dram.mem[r][8*k +: 8]         = va[r][k];
        u_dram.mem[D + r][8*k +: 8]     = vb[0][r][k];
        u_dram.mem[2 * D + r][8*k +: 8] = vb[1][r][k];
      end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    dma(0, MEM_A, 0, 0, D);
    dma(0, MEM_B, 0, D, D);
    dma(0, MEM_B, 1, 2 * D, D);
    wait_for(0, 1);
    c = '0; c.kind = CMD_SWAP; c.swap_a = 1; c.swap_b = 16'b11; push(c);
    run_cell(CELL_CONV, 0);   // binding
    run_cell(CELL_CORR, 1);   // unbinding
    wait_for(2'b11, 0);
    c = '0; c.kind = CMD_SWAP; c.swap_c = 16'b11; push(c);
    dma(1, MEM_C, 0, 3 * D, D);
    dma(1, MEM_C, 1, 4 * D, D);
    wait_for(0, 1);
    @(negedge clk);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);

    for (int j = 0; j < D; j++)
      for (int k = 0; k < C; k++) begin
        automatic longint sc = 0, sr = 0;
        for (int i = 0; i < D; i++) begin
          sc += longint'($signed(va[i][k])) * longint'($signed(vb[0][(j - i + D) % D][k]));
          sr += longint'($signed(va[i][k])) * longint'($signed(vb[1][(i - j + D) % D][k]));
        end
        chk($sformatf("bind out %0d col %0d", j, k),
            longint'($signed(u_dram.mem[3 * D + j][32*k +: 32])), sc);
        chk($sformatf("unbind out %0d col %0d", j, k),
            longint'($signed(u_dram.mem[4 * D + j][32*k +: 32])), sr);
      end
    $display("cell 0: busy %0d cycles, %0d of them waiting for SRAM A", busy0, wait0);
    chk("cell 0 cycles: 32 folds of 3M + d - 1, plus output register", busy0 - wait0, 32 * 1119 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
