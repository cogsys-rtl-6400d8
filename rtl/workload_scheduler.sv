// workload_scheduler: on-chip dispatcher of the adaptive workload-aware
// schedule (adSCH).
//
// The schedule itself is computed offline by the host: which cells run
// which neural or symbolic kernel (cell-wise partition), how columns are
// shared among parallel circular convolutions (column-wise partition), and
// in which order. The host streams the result in as commands; this block
// queues them (QDEPTH entries, valid/ready input) and dispatches them in
// order to the units, each as soon as its unit is free:
//   CMD_CELL  to the cells head..head+chain-1 once all of them are idle
//   CMD_SIMD  to the SIMD unit once it is idle
//   CMD_DMA   to the memory controller once it is idle
//   CMD_SWAP  immediately: swap-bank pulses for SRAM A / B slices / C slices
//   CMD_WAIT  retires once every unit it names is idle (dependency barrier)
// Because a command only waits for its own unit, work on different cells,
// the SIMD unit and DRAM transfers overlaps: symbolic kernels of one task
// run on some cells while neural layers of the next run on others. A head
// command that cannot go counts as a stall cycle. Dispatch outputs are
// combinational from the queue head and are accepted on the same edge.
// The offline-schedule / on-chip-dispatch split follows the paper; the
// queue, the command set and the in-order issue rule are this design's.
// Lint note: the assertions are disabled during reset, so reset is seen
// both as an asynchronous flop reset and as a synchronous condition; a
// linter reports this mix, and it is intended.
module workload_scheduler
  import cogsys_pkg::*;
#(
  parameter int NCELLS = 16,
  parameter int QDEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  cmd_t              cmd,
  output logic              cell_start,
  output cell_cmd_t         cell_cmd,
  input  logic [NCELLS-1:0] cell_busy,
  output logic              simd_start,
  output simd_cmd_t         simd_cmd,
  input  logic              simd_busy,
  output logic              dma_start,
  output dma_cmd_t          dma_cmd,
  input  logic              dma_busy,
  output logic              swap_a,
  output logic [NCELLS-1:0] swap_b,
  output logic [NCELLS-1:0] swap_c,
  output logic              idle,
  output logic [31:0]       stall_cycles,
  output logic [31:0]       issued
);

  localparam int QW = $clog2(QDEPTH);

  cmd_t          q [QDEPTH];
  logic [QW-1:0] wp_q, rp_q;
  logic [QW:0]   cnt_q;
  logic          empty, push, pop, can_issue;
  cmd_t          hd;
  logic [NCELLS-1:0] range;

  assign empty     = (cnt_q == '0);
  assign cmd_ready = (cnt_q != (QW+1)'(QDEPTH));
  assign push      = cmd_valid && cmd_ready;
  assign hd        = q[rp_q];

  always_comb begin
    range = '0;
    for (int i = 0; i < NCELLS; i++)
      range[i] = (i >= int'(hd.cc.head)) && (i < int'(hd.cc.head) + int'(hd.cc.chain));
  end

  always_comb begin
    unique case (hd.kind)
      CMD_CELL: can_issue = !(|(cell_busy & range));
      CMD_SIMD: can_issue = !simd_busy;
      CMD_DMA:  can_issue = !dma_busy;
      CMD_SWAP: can_issue = 1'b1;
      CMD_WAIT: can_issue = !(|(cell_busy & hd.wait_cells[NCELLS-1:0])) &&
                            !(hd.wait_simd && simd_busy) && !(hd.wait_dma && dma_busy);
      default:  can_issue = 1'b1;
    endcase
  end

  assign pop = !empty && can_issue;

  assign cell_start = pop && (hd.kind == CMD_CELL);
  assign cell_cmd   = hd.cc;
  assign simd_start = pop && (hd.kind == CMD_SIMD);
  assign simd_cmd   = hd.sc;
  assign dma_start  = pop && (hd.kind == CMD_DMA);
  assign dma_cmd    = hd.dc;
  assign swap_a     = pop && (hd.kind == CMD_SWAP) && hd.swap_a;
  assign swap_b     = (pop && (hd.kind == CMD_SWAP)) ? hd.swap_b[NCELLS-1:0] : '0;
  assign swap_c     = (pop && (hd.kind == CMD_SWAP)) ? hd.swap_c[NCELLS-1:0] : '0;

  assign idle = empty && !(|cell_busy) && !simd_busy && !dma_busy;

  always_ff @(posedge clk) begin
    if (push) q[wp_q] <= cmd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0;
      rp_q <= '0;
      cnt_q <= '0;
      stall_cycles <= '0;
      issued <= '0;
    end else begin
      if (push) wp_q <= (wp_q == QW'(QDEPTH - 1)) ? '0 : wp_q + 1'b1;
      if (pop)  rp_q <= (rp_q == QW'(QDEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (QW+1)'(push) - (QW+1)'(pop);
      if (!empty && !can_issue) stall_cycles <= stall_cycles + 32'd1;
      if (pop) issued <= issued + 32'd1;
    end
  end

  // host handshake: a command offered but not taken stays offered, unchanged
  assert property (@(posedge clk) disable iff (!rst_n)
                  cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));
  // the queue count stays within its depth
  assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= (QW+1)'(QDEPTH));

endmodule
