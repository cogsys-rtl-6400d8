// tb_mem_ctrl: memory controller with 2 cells x 4 lanes against a DRAM
// model that accepts requests at random and answers reads in order after
// a random delay. Checks loads into SRAM A, an SRAM B slice and an SRAM C
// slice, and stores of SRAM C and SRAM B rows back to DRAM.
// The paper only names the memory controller; the DMA command format and
// bus handshake checked here are this design's own.
`timescale 1ns/1ps
module tb_mem_ctrl;
  import cogsys_pkg::*;

  localparam int NC = 2, C = 4, DWW = C * 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done;
  dma_cmd_t cmd;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [31:0] dram_req_addr;
  logic [DWW-1:0] dram_req_wdata, dram_rsp_rdata;
  logic a_re, a_we;
  logic [11:0] a_raddr, a_waddr, b_raddr, b_waddr;
  logic [C*8-1:0] a_rdata, a_wdata, b_wdata;
  logic [NC-1:0] b_re, b_we, c_re, c_we;
  logic [NC-1:0][C*8-1:0] b_rdata;
  logic [9:0] c_raddr, c_waddr;
  logic [NC-1:0][C*32-1:0] c_rdata;
  logic [C*32-1:0] c_wdata;

  mem_ctrl #(.NCELLS(NC), .COLS(C)) dut (.*);

  // SRAM models
  logic [C*8-1:0]  ma [4096];
  logic [C*8-1:0]  mb [NC][4096];
  logic [C*32-1:0] mc [NC][1024];
  always_ff @(posedge clk) begin
    if (a_re) a_rdata <= ma[a_raddr];
    if (a_we) ma[a_waddr] <= a_wdata;
    for (int i = 0; i < NC; i++) begin
      if (b_re[i]) b_rdata[i] <= mb[i][b_raddr];
      if (b_we[i]) mb[i][b_waddr] <= b_wdata;
      if (c_re[i]) c_rdata[i] <= mc[i][c_raddr];
      if (c_we[i]) mc[i][c_waddr] <= c_wdata;
    end
  end

  // DRAM model
  logic [DWW-1:0] dram [1024];
  logic [DWW-1:0] rq [$];
  int delay;
  always_ff @(posedge clk) begin
    dram_req_ready <= ($urandom_range(0, 3) != 0);
    dram_rsp_valid <= 1'b0;
    if (dram_req_valid && dram_req_ready) begin
      if (dram_req_we) dram[dram_req_addr[9:0]] <= dram_req_wdata;
      else rq.push_back(dram[dram_req_addr[9:0]]);
    end
    if (rq.size() > 0 && $urandom_range(0, 2) == 0) begin
      dram_rsp_valid <= 1'b1;
      dram_rsp_rdata <= rq.pop_front();
    end
  end

  int checks = 0, failures = 0;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string w, logic [DWW-1:0] got, logic [DWW-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", w, got, exp);
    end
  endtask

  task automatic run(bit to_dram, mem_sel_e mem, int slice, int daddr, int saddr, int rows);
    @(negedge clk);
    cmd = '0;
    cmd.to_dram = to_dram; cmd.mem = mem; cmd.slice = 4'(slice);
    cmd.dram_addr = 32'(daddr); cmd.sram_addr = 12'(saddr); cmd.rows = 13'(rows);
    start = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    start = 0; cmd = '0; dram_rsp_rdata = '0;
    for (int i = 0; i < 1024; i++) dram[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, MEM_A, 0, 100, 7, 6);
    for (int r = 0; r < 6; r++) chk("load A", DWW'(ma[7 + r]), DWW'(dram[100 + r][C*8-1:0]));
    run(0, MEM_B, 1, 200, 30, 5);
    for (int r = 0; r < 5; r++) chk("load B", DWW'(mb[1][30 + r]), DWW'(dram[200 + r][C*8-1:0]));
    run(0, MEM_C, 0, 300, 3, 4);
    for (int r = 0; r < 4; r++) chk("load C", mc[0][3 + r], dram[300 + r]);
    for (int r = 0; r < 5; r++) mc[1][50 + r] = {$urandom, $urandom, $urandom, $urandom};
    run(1, MEM_C, 1, 500, 50, 5);
    for (int r = 0; r < 5; r++) chk("store C", dram[500 + r], mc[1][50 + r]);
    run(1, MEM_B, 1, 600, 30, 5);
    for (int r = 0; r < 5; r++) chk("store B", dram[600 + r], DWW'(mb[1][30 + r]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
