// tb_ns_pe: checks one nsPE against a cycle model of its four registers
// under random mode sequences and random operands, including the three
// paper modes (load, GEMM, circular convolution) and the hold mode.
`timescale 1ns/1ps
module tb_ns_pe;
  import cogsys_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  pe_mode_e mode;
  logic [31:0] top_in_a, top_out_a;
  logic [7:0]  top_in_b, left_in, top_out_b, left_out;

  ns_pe dut (.*);

  int checks = 0, failures = 0;
  int n_mode [4];
  // reference registers
  logic [7:0]  ra, rp, rb;
  logic [31:0] racc;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmp(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0h exp %0h", what, got, exp);
    end
  endtask

  initial begin
    mode = PE_HOLD; top_in_a = 0; top_in_b = 0; left_in = 0;
    ra = 0; rp = 0; rb = 0; racc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      mode     = pe_mode_e'($urandom_range(0, 3));
      top_in_a = $urandom;
      top_in_b = 8'($urandom);
      left_in  = 8'($urandom);
      n_mode[mode]++;
      #1;
      cmp("top_out_a", top_out_a, (mode == PE_LOAD) ? 32'($signed(ra)) : racc);
      cmp("top_out_b", 32'(top_out_b), 32'(rb));
      cmp("left_out", 32'(left_out), 32'(rb));
      @(posedge clk);
      case (mode)
        PE_LOAD: begin ra = top_in_a[7:0]; rb = rp; rp = top_in_b; end
        PE_GEMM: begin racc = 32'($signed(ra) * $signed(rb)) + top_in_a; rb = left_in; end
        PE_CONV: begin racc = 32'($signed(ra) * $signed(rb)) + top_in_a; rb = rp; rp = top_in_b; end
        default: ;
      endcase
    end
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (n_mode[m] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
