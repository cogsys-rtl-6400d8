// ns_pe: reconfigurable neuro/symbolic processing element (nsPE).
//
// One PE holds four registers: the stationary register A, the passing
// register PASS (the "bubble"), the streaming register B and the partial-sum
// register ACC. The mode input selects what they do each cycle:
//   PE_LOAD  A <= top_in_a (the stationary operand shifts down the column);
//            top_out_a carries A to the PE below.
//   PE_GEMM  B <= left_in, ACC <= A*B + top_in_a. B is passed to the right
//            (left_out); top_out_a carries ACC to the PE below.
//   PE_CONV  PASS <= top_in_b, B <= PASS, ACC <= A*B + top_in_a. B leaves
//            downwards (top_out_b), so the streamed vector moves one PE every
//            two cycles while partial sums move one PE per cycle: the
//            bubble-streaming dataflow of circular convolution.
//   PE_HOLD  every register keeps its value (idle or stalled cell).
// The register set, the B-input mux (left_in or PASS), the A/ACC output mux
// and the use of the top_in_A link for both operand loading and partial-sum
// reduction follow the architecture. Two choices are this design's own:
// PASS and B also shift in PE_LOAD, so the streamed vector can enter the
// column while the stationary vector is still being loaded, and the HOLD
// mode. Reset clears all registers. Timing: every output is a register
// except top_out_a, which is a mux between two registers.
module ns_pe
  import cogsys_pkg::*;
#(
  parameter int DW = DATA_W,
  parameter int AW = ACC_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  pe_mode_e      mode,
  input  logic [AW-1:0] top_in_a,   // stationary operand (LOAD) or partial sum
  input  logic [DW-1:0] top_in_b,   // streamed operand (CONV)
  input  logic [DW-1:0] left_in,    // streamed operand (GEMM)
  output logic [AW-1:0] top_out_a,
  output logic [DW-1:0] top_out_b,
  output logic [DW-1:0] left_out
);

  logic [DW-1:0] a_q, pass_q, b_q;
  logic [AW-1:0] acc_q;
  logic signed [AW-1:0] mac;

  assign mac = AW'($signed(a_q) * $signed(b_q)) + $signed(top_in_a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q    <= '0;
      pass_q <= '0;
      b_q    <= '0;
      acc_q  <= '0;
    end else begin
      unique case (mode)
        PE_LOAD: begin
          a_q    <= top_in_a[DW-1:0];
          pass_q <= top_in_b;
          b_q    <= pass_q;
        end
        PE_GEMM: begin
          b_q   <= left_in;
          acc_q <= mac;
        end
        PE_CONV: begin
          pass_q <= top_in_b;
          b_q    <= pass_q;
          acc_q  <= mac;
        end
        default: ;
      endcase
    end
  end

  assign top_out_a = (mode == PE_LOAD) ? AW'($signed(a_q)) : acc_q;
  assign top_out_b = b_q;
  assign left_out  = b_q;

endmodule
