// mem_ctrl: memory controller (DMA) between off-chip DRAM and the SRAMs.
//
// A command moves `rows` consecutive rows between DRAM words starting at
// dram_addr and SRAM rows starting at sram_addr, always through the DMA side
// of a double-buffered SRAM (the bank the compute array is not using).
// Target: SRAM A, or the SRAM B / SRAM C slice of one cell. One DRAM word
// carries one SRAM row: an A or B row (COLS INT8 lanes) uses the low bits,
// a C row (COLS 32-bit lanes) fills the word.
//
// DRAM port: a request channel (valid/ready, write flag, word address,
// write data) and a response channel for read data (rsp_valid, in request
// order, any latency). Loads issue read requests back to back while the
// DRAM accepts them and write each response into the SRAM as it returns.
// Stores read one SRAM row (one cycle), then hold a write request until it
// is accepted, then move to the next row.
// The paper names the memory controller and its place between DRAM and
// the on-chip SRAMs; the command format, the DRAM handshake and the word
// width are this design's choices.
module mem_ctrl
  import cogsys_pkg::*;
#(
  parameter int NCELLS = 16,
  parameter int COLS   = 32,
  parameter int DW     = DATA_W,
  parameter int AW     = ACC_W,
  parameter int ABW    = 12,                 // SRAM A / B row address bits
  parameter int CAW    = 10,                 // SRAM C row address bits
  parameter int DRAM_W = COLS * AW
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  dma_cmd_t                             cmd,
  output logic                                 busy,
  output logic                                 done,
  // DRAM
  output logic                                 dram_req_valid,
  input  logic                                 dram_req_ready,
  output logic                                 dram_req_we,
  output logic [31:0]                          dram_req_addr,
  output logic [DRAM_W-1:0]                    dram_req_wdata,
  input  logic                                 dram_rsp_valid,
  input  logic [DRAM_W-1:0]                    dram_rsp_rdata,
  // SRAM A, DMA side
  output logic                                 a_re,
  output logic [ABW-1:0]                       a_raddr,
  input  logic [COLS*DW-1:0]                   a_rdata,
  output logic                                 a_we,
  output logic [ABW-1:0]                       a_waddr,
  output logic [COLS*DW-1:0]                   a_wdata,
  // SRAM B slices, DMA side
  output logic [NCELLS-1:0]                    b_re,
  output logic [ABW-1:0]                       b_raddr,
  input  logic [NCELLS-1:0][COLS*DW-1:0]       b_rdata,
  output logic [NCELLS-1:0]                    b_we,
  output logic [ABW-1:0]                       b_waddr,
  output logic [COLS*DW-1:0]                   b_wdata,
  // SRAM C slices, DMA side
  output logic [NCELLS-1:0]                    c_re,
  output logic [CAW-1:0]                       c_raddr,
  input  logic [NCELLS-1:0][COLS*AW-1:0]       c_rdata,
  output logic [NCELLS-1:0]                    c_we,
  output logic [CAW-1:0]                       c_waddr,
  output logic [COLS*AW-1:0]                   c_wdata
);

  typedef enum logic [2:0] {M_IDLE, M_LOAD, M_SRD, M_SCAP, M_SREQ} mstate_e;
  mstate_e     st_q;
  dma_cmd_t    cmd_q;
  logic [12:0] issued_q, rcvd_q, row_q;
  logic [DRAM_W-1:0] wbuf_q;
  logic [DRAM_W-1:0] rd_row;

  assign busy = (st_q != M_IDLE);

  // row read from the selected SRAM, widened to a DRAM word
  always_comb begin
    unique case (cmd_q.mem)
      MEM_A:   rd_row = DRAM_W'(a_rdata);
      MEM_B:   rd_row = DRAM_W'(b_rdata[cmd_q.slice]);
      default: rd_row = DRAM_W'(c_rdata[cmd_q.slice]);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= M_IDLE;
      cmd_q    <= '0;
      issued_q <= '0;
      rcvd_q   <= '0;
      row_q    <= '0;
      wbuf_q   <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        M_IDLE: if (start) begin
          cmd_q    <= cmd;
          issued_q <= '0;
          rcvd_q   <= '0;
          row_q    <= '0;
          st_q     <= cmd.to_dram ? M_SRD : M_LOAD;
        end
        M_LOAD: begin
          if (dram_req_valid && dram_req_ready) issued_q <= issued_q + 13'd1;
          if (dram_rsp_valid) begin
            rcvd_q <= rcvd_q + 13'd1;
            if (rcvd_q == cmd_q.rows - 13'd1) begin
              st_q <= M_IDLE;
              done <= 1'b1;
            end
          end
        end
        M_SRD:  st_q <= M_SCAP;
        M_SCAP: begin
          wbuf_q <= rd_row;
          st_q   <= M_SREQ;
        end
        M_SREQ: if (dram_req_ready) begin
          if (row_q == cmd_q.rows - 13'd1) begin
            st_q <= M_IDLE;
            done <= 1'b1;
          end else begin
            row_q <= row_q + 13'd1;
            st_q  <= M_SRD;
          end
        end
        default: st_q <= M_IDLE;
      endcase
    end
  end

  // DRAM request channel
  always_comb begin
    dram_req_valid = 1'b0;
    dram_req_we    = 1'b0;
    dram_req_addr  = cmd_q.dram_addr + 32'(row_q);
    dram_req_wdata = wbuf_q;
    if (st_q == M_LOAD && issued_q < cmd_q.rows) begin
      dram_req_valid = 1'b1;
      dram_req_addr  = cmd_q.dram_addr + 32'(issued_q);
    end else if (st_q == M_SREQ) begin
      dram_req_valid = 1'b1;
      dram_req_we    = 1'b1;
    end
  end

  // SRAM ports
  logic wr_now, rd_now;
  logic [11:0] waddr, raddr;
  assign wr_now = (st_q == M_LOAD) && dram_rsp_valid;
  assign rd_now = (st_q == M_SRD);
  assign waddr  = cmd_q.sram_addr + 12'(rcvd_q);
  assign raddr  = cmd_q.sram_addr + 12'(row_q);

  always_comb begin
    a_re    = rd_now && (cmd_q.mem == MEM_A);
    a_raddr = ABW'(raddr);
    a_we    = wr_now && (cmd_q.mem == MEM_A);
    a_waddr = ABW'(waddr);
    a_wdata = dram_rsp_rdata[COLS*DW-1:0];
    b_re    = '0;
    b_we    = '0;
    c_re    = '0;
    c_we    = '0;
    b_raddr = ABW'(raddr);
    b_waddr = ABW'(waddr);
    b_wdata = dram_rsp_rdata[COLS*DW-1:0];
    c_raddr = CAW'(raddr);
    c_waddr = CAW'(waddr);
    c_wdata = dram_rsp_rdata[COLS*AW-1:0];
    b_re[cmd_q.slice] = rd_now && (cmd_q.mem == MEM_B);
    b_we[cmd_q.slice] = wr_now && (cmd_q.mem == MEM_B);
    c_re[cmd_q.slice] = rd_now && (cmd_q.mem == MEM_C);
    c_we[cmd_q.slice] = wr_now && (cmd_q.mem == MEM_C);
  end

endmodule
