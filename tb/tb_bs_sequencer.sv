// tb_bs_sequencer: checks the address, mode and tag streams of one
// sequencer (a chain head, cell 0) and of a follower (cell 1) for circular
// convolution and correlation with two folds, with the SRAM A grant
// withheld for a few cycles (stall), and the cycle count
// ceil(d/Mc)*(3*Mc + d - 1) plus the stall cycles.
// The expected cycle count is the paper's per-pass latency 3M + d - 1; the
// address and tag sequences are this design's own phase plan.
`timescale 1ns/1ps
module tb_bs_sequencer;
  import cogsys_pkg::*;

  localparam int R = 4, C = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start;
  cell_cmd_t cmd;
  logic adv0, adv1, a_req0, a_req1, a_gnt, a_en0, a_en1, b_en0, b_en1;
  logic [11:0] a_addr0, a_addr1, b_addr0, b_addr1;
  pe_mode_e mode0, mode1;
  logic ci0, ci1, az0, az1, ov0, ov1, oa0, oa1, busy0, busy1, done0, done1;
  logic [9:0] or0, or1;

  bs_sequencer #(.CELL_ID(0), .ROWS(R), .COLS(C)) u0 (
    .clk, .rst_n, .start, .cmd, .adv_i(1'b1), .adv_o(adv0), .a_req(a_req0), .a_gnt(a_gnt),
    .a_en(a_en0), .a_addr(a_addr0), .b_en(b_en0), .b_addr(b_addr0), .mode_o(mode0),
    .chain_in_o(ci0), .a_zero_o(az0), .out_valid_o(ov0), .out_row_o(or0), .out_acc_o(oa0),
    .busy_o(busy0), .done_o(done0));
  bs_sequencer #(.CELL_ID(1), .ROWS(R), .COLS(C)) u1 (
    .clk, .rst_n, .start, .cmd, .adv_i(adv0), .adv_o(adv1), .a_req(a_req1), .a_gnt(1'b0),
    .a_en(a_en1), .a_addr(a_addr1), .b_en(b_en1), .b_addr(b_addr1), .mode_o(mode1),
    .chain_in_o(ci1), .a_zero_o(az1), .out_valid_o(ov1), .out_row_o(or1), .out_acc_o(oa1),
    .busy_o(busy1), .done_o(done1));

  int checks = 0, failures = 0;
  int ga [$], gz [$], gb [$], go [$], goa [$];
  int busy_cyc, stall_cyc, load_cyc;
  logic en_q;

  // collect what the head and the tail produce
  always @(posedge clk) begin
    en_q <= a_en0;
    if (a_en0) ga.push_back(int'(a_addr0));
    if (en_q) gz.push_back(int'(az0));
    if (b_en0) gb.push_back(int'(b_addr0));
    if (ov1 && cmd.chain == 2) begin go.push_back(int'(or1)); goa.push_back(int'(oa1)); end
    if (ov0 && cmd.chain == 1) begin go.push_back(int'(or0)); goa.push_back(int'(oa0)); end
    if (busy0 || busy1) busy_cyc++;
    if (a_req0 && !a_gnt) stall_cyc++;
    if (mode0 == PE_LOAD) load_cyc++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 15) $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic run(bit corr, int chain, int d, int stall);
    int mc = R * chain, folds = (d + mc - 1) / mc;
    int ea [$], ez [$], eb [$], eo [$], eoa [$];
    for (int f = 0; f < folds; f++) begin
      for (int t = 0; t < mc; t++) begin
        int idx = f*mc + mc - 1 - t;
        ea.push_back((10 + idx) % 4096);
        ez.push_back(idx >= d);
      end
      for (int m = 0; m < d + mc - 1; m++) begin
        int bi = corr ? (((mc - 1 - m + f*mc) % d) + d) % d : (((m - (mc - 1) - f*mc) % d) + d) % d;
        eb.push_back(20 + bi);
      end
      for (int j = 0; j < d; j++) begin
        eo.push_back(5 + j);
        eoa.push_back(f > 0);
      end
    end
    ga.delete(); gz.delete(); gb.delete(); go.delete(); goa.delete();
    busy_cyc = 0; stall_cyc = 0;
    @(negedge clk);
    cmd = '0;
    cmd.op = corr ? CELL_CORR : CELL_CONV; cmd.head = 0; cmd.chain = 5'(chain); cmd.len = 16'(d);
    cmd.a_base = 10; cmd.b_base = 20; cmd.c_base = 5;
    start = 1; a_gnt = 0;
    @(negedge clk);
    start = 0;
    repeat (stall) @(negedge clk);
    a_gnt = 1;
    while (busy0 || busy1) @(negedge clk);
    @(negedge clk);
    expect_eq("A reads", ga.size(), ea.size());
    foreach (ea[i]) if (i < ga.size()) expect_eq("A addr", ga[i], ea[i]);
    foreach (ez[i]) if (i < gz.size()) expect_eq("A zero", gz[i], ez[i]);
    expect_eq("B reads", gb.size(), eb.size());
    foreach (eb[i]) if (i < gb.size()) expect_eq("B addr", gb[i], eb[i]);
    expect_eq("outputs", go.size(), eo.size());
    foreach (eo[i]) if (i < go.size()) begin
      expect_eq("out row", go[i], eo[i]);
      expect_eq("out acc", goa[i], eoa[i]);
    end
    expect_eq("cycles", busy_cyc, folds * (3*mc + d - 1) + 1 + stall);
    expect_eq("stall cycles", stall_cyc, stall);
  endtask

  initial begin
    start = 0; cmd = '0; a_gnt = 0; load_cyc = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 1, 6, 3);    // convolution, two folds, stalled 3 cycles
    run(1, 1, 7, 0);    // correlation, two folds
    run(0, 2, 11, 2);   // two-cell chain (follower is cell 1), two folds
    run(1, 1, 3, 0);    // d < Mc
    expect_eq("load mode seen", int'(load_cyc > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
