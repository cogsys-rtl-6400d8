// st_map_select: adaptive spatial/temporal (ST) mapping decision.
//
// For k circular convolutions of dimension d on N arrays of M PEs each, the
// bubble-streaming dataflow needs T = 3M + d - 1 cycles per pass and
//   temporal mapping (one convolution per array, several in parallel):
//     C_T = ceil(k/N) * ceil(d/M) * T cycles, (d+M)*N memory reads per T
//   spatial mapping (one convolution split into folds over the arrays):
//     C_S = k * ceil(d/(N*M)) * T cycles, 2d memory reads per T.
// The block evaluates both and picks the faster; on a tie it picks spatial,
// which reads less memory. These formulas are the paper's; the tie rule,
// the widths and the two-cycle pipeline (inputs registered, results
// registered) are this design's. Inputs must be non-zero. Results are valid
// two cycles after `valid_i`, flagged by `valid_o`.
module st_map_select #(
  parameter int W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         valid_i,
  input  logic [W-1:0] n_arrays,    // N
  input  logic [W-1:0] m_pes,       // M
  input  logic [W-1:0] k_ops,       // k
  input  logic [W-1:0] d_dim,       // d
  output logic         valid_o,
  output logic         use_spatial,
  output logic [63:0]  cyc_temporal,
  output logic [63:0]  cyc_spatial,
  output logic [31:0]  t_pass,      // T
  output logic [31:0]  reads_temporal,
  output logic [31:0]  reads_spatial
);

  logic [W-1:0] n_q, m_q, k_q, d_q;
  logic         v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; n_q <= '0; m_q <= '0; k_q <= '0; d_q <= '0;
    end else begin
      v_q <= valid_i;
      if (valid_i) begin
        n_q <= n_arrays; m_q <= m_pes; k_q <= k_ops; d_q <= d_dim;
      end
    end
  end

  logic [31:0] t, kn, dm, nm, dnm, ct_n, cs_n;
  logic [63:0] ct, cs;
  always_comb begin
    t   = 32'(3) * 32'(m_q) + 32'(d_q) - 32'd1;
    kn  = (32'(k_q) + 32'(n_q) - 32'd1) / 32'(n_q);
    dm  = (32'(d_q) + 32'(m_q) - 32'd1) / 32'(m_q);
    nm  = 32'(n_q) * 32'(m_q);
    dnm = (32'(d_q) + nm - 32'd1) / nm;
    ct_n = kn * dm;
    cs_n = 32'(k_q) * dnm;
    ct  = 64'(ct_n) * 64'(t);
    cs  = 64'(cs_n) * 64'(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; use_spatial <= 1'b0; cyc_temporal <= '0; cyc_spatial <= '0;
      t_pass <= '0; reads_temporal <= '0; reads_spatial <= '0;
    end else begin
      valid_o <= v_q;
      if (v_q) begin
        cyc_temporal   <= ct;
        cyc_spatial    <= cs;
        use_spatial    <= (cs <= ct);
        t_pass         <= t;
        reads_temporal <= (32'(d_q) + 32'(m_q)) * 32'(n_q);
        reads_spatial  <= 32'(2) * 32'(d_q);
      end
    end
  end

endmodule
