// cogsys_pkg: types and constants shared by the CogSys accelerator RTL.
//
// Data are INT8 (the precision the design is built for), partial sums are
// 32-bit. The command word is what the host writes into the on-chip
// workload scheduler; the host computes the schedule offline, the chip only
// dispatches it. Command field widths and encodings are this design's own
// choices; the operations themselves (load / GEMM / circular convolution on
// the nsPE array, element-wise and reduction work on the SIMD unit, DRAM
// transfers, buffer swaps) are the ones the architecture provides.
package cogsys_pkg;

  localparam int DATA_W = 8;   // operand width (INT8)
  localparam int ACC_W  = 32;  // partial-sum width

  // nsPE operating mode. LOAD, GEMM and CONV are the three modes of the PE;
  // HOLD freezes every register (used while a cell is idle or stalled).
  typedef enum logic [1:0] {
    PE_HOLD = 2'd0,
    PE_LOAD = 2'd1,
    PE_GEMM = 2'd2,
    PE_CONV = 2'd3
  } pe_mode_e;

  // Operation run by a cell chain.
  typedef enum logic [1:0] {
    CELL_CONV = 2'd0,   // circular convolution  C[j] = sum_k A[k] B[(j-k) mod d]
    CELL_CORR = 2'd1,   // circular correlation  C[j] = sum_k A[k] B[(k-j) mod d]
    CELL_GEMM = 2'd2    // weight-stationary matrix-vector products
  } cell_op_e;

  typedef struct packed {
    cell_op_e    op;
    logic [3:0]  head;      // first cell of the chain
    logic [4:0]  chain;     // number of chained cells (1 = scale-out, >1 = scale-up)
    logic [15:0] len;       // CONV/CORR: vector dimension d; GEMM: number of input vectors
    logic [11:0] a_base;    // SRAM A row of element 0 of the stationary operand
    logic [11:0] b_base;    // SRAM B row of element 0 of the streamed operand
    logic [9:0]  c_base;    // SRAM C row of output 0
    logic        acc;       // add results into SRAM C instead of overwriting
  } cell_cmd_t;

  typedef enum logic [3:0] {
    SIMD_ADD   = 4'd0,  // C[dst] = C[s0] + C[s1]
    SIMD_SUB   = 4'd1,  // C[dst] = C[s0] - C[s1]
    SIMD_MUL   = 4'd2,  // C[dst] = C[s0] * C[s1]   (element-wise bind / unbind)
    SIMD_MAX   = 4'd3,  // C[dst] = max(C[s0], C[s1])
    SIMD_SIGN  = 4'd4,  // C[dst] = C[s0] >= 0 ? +1 : -1
    SIMD_RELU  = 4'd5,  // C[dst] = max(C[s0], 0)
    SIMD_SCALE = 4'd6,  // C[dst] = (C[s0] * imm) >>> shift
    SIMD_REQ8  = 4'd7,  // SRAM B[dst] = sat8(C[s0] >>> shift), lane i -> cell i/32
    SIMD_RSUM  = 4'd8,  // red_value = sum of all lanes of C[s0]
    SIMD_RMAX  = 4'd9   // red_value = max lane of C[s0], red_index = its lane
  } simd_op_e;

  typedef struct packed {
    simd_op_e    op;
    logic [9:0]  s0;
    logic [9:0]  s1;
    logic [11:0] dst;
    logic [9:0]  rows;      // number of consecutive rows processed (>= 1)
    logic [15:0] imm;
    logic [4:0]  shift;
  } simd_cmd_t;

  typedef enum logic [1:0] {
    MEM_A = 2'd0,
    MEM_B = 2'd1,
    MEM_C = 2'd2
  } mem_sel_e;

  typedef struct packed {
    logic        to_dram;   // 1: SRAM -> DRAM, 0: DRAM -> SRAM
    mem_sel_e    mem;
    logic [3:0]  slice;     // SRAM B / SRAM C slice
    logic [31:0] dram_addr; // DRAM word address (one word per SRAM row)
    logic [11:0] sram_addr;
    logic [12:0] rows;      // rows to move (>= 1)
  } dma_cmd_t;

  typedef enum logic [2:0] {
    CMD_CELL = 3'd0,
    CMD_SIMD = 3'd1,
    CMD_DMA  = 3'd2,
    CMD_SWAP = 3'd3,
    CMD_WAIT = 3'd4
  } cmd_kind_e;

  typedef struct packed {
    cmd_kind_e   kind;
    cell_cmd_t   cc;
    simd_cmd_t   sc;
    dma_cmd_t    dc;
    logic        swap_a;       // CMD_SWAP: swap SRAM A banks
    logic [15:0] swap_b;       // CMD_SWAP: swap SRAM B banks of these cells
    logic [15:0] swap_c;       // CMD_SWAP: swap SRAM C banks of these cells
    logic [15:0] wait_cells;   // CMD_WAIT: wait until these cells are idle
    logic        wait_simd;    // CMD_WAIT: wait until the SIMD unit is idle
    logic        wait_dma;     // CMD_WAIT: wait until the memory controller is idle
  } cmd_t;

endpackage
