// dram_model: behavioural model of the off-chip DRAM behind the memory bus,
// for testbenches only (not synthesizable intent, no timing of a real part).
//
// Word-addressed array of DEPTH words of W bits (address taken modulo
// DEPTH). Request channel valid/ready with a write flag: ready is high with
// probability READY_PCT percent each cycle (drawn with $urandom), so the
// memory controller sees back-pressure. A write updates the array when it
// is accepted. A read returns its word on the response channel exactly LAT
// cycles after it was accepted, in order. Testbenches preload and inspect
// the array `mem` directly.
// The paper treats the DRAM as an off-chip part and gives only its
// bandwidth; latency, back-pressure and word size here are this model's own.
module dram_model #(
  parameter int W         = 1024,
  parameter int DEPTH     = 4096,
  parameter int LAT       = 4,
  parameter int READY_PCT = 70
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [31:0]   req_addr,
  input  logic [W-1:0]  req_wdata,
  output logic          rsp_valid,
  output logic [W-1:0]  rsp_rdata
);
  logic [W-1:0] mem [DEPTH];
  logic [LAT-1:0]        pv;
  logic [LAT-1:0][W-1:0] pd;

  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0;
      pv        <= '0;
      pd        <= '0;
    end else begin
      req_ready <= ($urandom_range(0, 99) < READY_PCT);
      pv <= {pv[LAT-2:0], req_valid && req_ready && !req_we};
      pd <= {pd[LAT-2:0], mem[req_addr % DEPTH]};
    end
  end

  // array write in its own process, so testbenches may also preload it
  always @(posedge clk)
    if (rst_n && req_valid && req_ready && req_we) mem[req_addr % DEPTH] <= req_wdata;

  assign rsp_valid = pv[LAT-1];
  assign rsp_rdata = pd[LAT-1];
endmodule
