// tb_workload_scheduler: scheduler with 4 cells and a 4-entry queue. The
// units are modelled as busy for the number of cycles their command names.
// Checks in-order dispatch, that no command starts on a busy unit, that a
// command for an idle cell goes while another cell is busy (overlap), that
// CMD_WAIT retires only once its units are idle, swap pulses, back-pressure
// of a full queue and the stall and issue counters.
// The paper schedules offline on the host; the queue and issue rules
// checked here are this design's on-chip dispatcher.
`timescale 1ns/1ps
module tb_workload_scheduler;
  import cogsys_pkg::*;

  localparam int NC = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, cell_start, simd_start, dma_start, swap_a, simd_busy, dma_busy, idle;
  cmd_t cmd;
  cell_cmd_t cell_cmd;
  simd_cmd_t simd_cmd;
  dma_cmd_t dma_cmd;
  logic [NC-1:0] cell_busy, swap_b, swap_c;
  logic [31:0] stall_cycles, issued;

  workload_scheduler #(.NCELLS(NC), .QDEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int cell_left [NC];
  int simd_left, dma_left, overlap, full_seen, swaps_seen, wait_ok;
  int order [$];
  int seq_tag [$];

  always_comb begin
    for (int i = 0; i < NC; i++) cell_busy[i] = (cell_left[i] > 0);
    simd_busy = simd_left > 0;
    dma_busy  = dma_left > 0;
  end

  task automatic chk(string w, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d exp %0d", w, got, exp);
    end
  endtask

  // unit models and dispatch checks
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NC; i++) if (cell_left[i] > 0) cell_left[i]--;
    if (simd_left > 0) simd_left--;
    if (dma_left > 0) dma_left--;
    if (cell_start) begin
      for (int i = int'(cell_cmd.head); i < int'(cell_cmd.head) + int'(cell_cmd.chain); i++) begin
        chk("cell free at start", int'(cell_left[i] > 0), 0);
        cell_left[i] = int'(cell_cmd.len);
      end
      if (|cell_busy) overlap++;
      order.push_back(int'(cell_cmd.a_base));
    end
    if (simd_start) begin
      chk("simd free", simd_left, 0);
      simd_left = int'(simd_cmd.rows);
      order.push_back(int'(simd_cmd.s0));
    end
    if (dma_start) begin
      chk("dma free", dma_left, 0);
      dma_left = int'(dma_cmd.rows);
      order.push_back(int'(dma_cmd.sram_addr));
    end
    if (swap_a || |swap_b || |swap_c) begin
      swaps_seen++;
      chk("swap_b mask", int'(swap_b), 6);
      chk("swap_c mask", int'(swap_c), 8);
      chk("swap_a", int'(swap_a), 1);
      order.push_back(999);
    end
    if (cmd_valid && !cmd_ready) full_seen++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push(cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
  endtask

  function automatic cmd_t mk_cell(int head, int chain, int len, int tag);
    cmd_t c = '0;
    c.kind = CMD_CELL; c.cc.head = 4'(head); c.cc.chain = 5'(chain); c.cc.len = 16'(len);
    c.cc.a_base = 12'(tag);
    return c;
  endfunction

  initial begin
    cmd_t c;
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < NC; i++) cell_left[i] = 0;
    simd_left = 0; dma_left = 0; overlap = 0; full_seen = 0; swaps_seen = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    push(mk_cell(0, 1, 40, 1));       // cell 0 busy for 40 cycles
    push(mk_cell(1, 2, 30, 2));       // cells 1-2: go at once (overlap)
    push(mk_cell(0, 1, 5, 3));        // waits for cell 0 (stall)
    c = '0; c.kind = CMD_SIMD; c.sc.rows = 10'd7; c.sc.s0 = 10'd4; push(c);
    c = '0; c.kind = CMD_DMA; c.dc.rows = 13'd9; c.dc.sram_addr = 12'd5; push(c);
    c = '0; c.kind = CMD_WAIT; c.wait_cells = 16'hF; c.wait_simd = 1; c.wait_dma = 1; push(c);
    c = '0; c.kind = CMD_SWAP; c.swap_a = 1; c.swap_b = 16'b0110; c.swap_c = 16'b1000; push(c);
    push(mk_cell(3, 1, 3, 6));
    // the swap must come after the wait, i.e. with every unit idle
    while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
    chk("order length", order.size(), 7);
    if (order.size() == 7) begin
      chk("order 0", order[0], 1);
      chk("order 1", order[1], 2);
      chk("order 2", order[2], 3);
      chk("order 3", order[3], 4);
      chk("order 4", order[4], 5);
      chk("order 5", order[5], 999);
      chk("order 6", order[6], 6);
    end
    chk("issued", int'(issued), 8);
    chk("overlap seen", int'(overlap > 0), 1);
    chk("stall seen", int'(stall_cycles > 0), 1);
    chk("queue full seen", int'(full_seen > 0), 1);
    chk("swaps", swaps_seen, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
