// Processing element (PE) of the successive-cancellation datapath.
//
// Takes the two LLRs alpha_i and alpha_{i+Ns/2} of a node and computes, in
// parallel, the left-child update f (min-sum: sign product, minimum
// magnitude) and the right-child update g (alpha_{i+Ns/2} plus or minus
// alpha_i depending on the left-child partial sum beta_l). The bit i_s of
// the leaf index selects which of the two leaves the PE. Purely
// combinational.
//
// Follows the PE figure and equations (2) and (4) of the design. LLRs are
// Q-bit sign-magnitude words as in the design's channel memory; the
// saturation of g at the largest magnitude and the rule that a zero
// magnitude always carries a + sign are this implementation's choices.
module pe #(
  parameter int unsigned Q = 6
) (
  input  logic [Q-1:0] alpha_a,  // alpha_i
  input  logic [Q-1:0] alpha_b,  // alpha_{i+Ns/2}
  input  logic         beta_l,   // partial sum of the left child (for g)
  input  logic         i_s,      // 0: left child (f), 1: right child (g)
  output logic [Q-1:0] alpha_out
);
  localparam int unsigned M = Q - 1;
  localparam logic [M-1:0] MAXMAG = '1;

  logic         sa, sb, sa_g;
  logic [M-1:0] ma, mb;
  logic [M-1:0] f_mag, g_mag;
  logic         f_sgn, g_sgn;
  logic [M:0]   sum;

  always_comb begin
    sa = alpha_a[Q-1];
    sb = alpha_b[Q-1];
    ma = alpha_a[M-1:0];
    mb = alpha_b[M-1:0];

    // f: sgn(a) sgn(b) min(|a|,|b|)
    f_mag = (ma < mb) ? ma : mb;
    f_sgn = (sa ^ sb) && (f_mag != '0);

    // g: b + (1 - 2 beta_l) a
    sa_g = sa ^ beta_l;
    sum  = {1'b0, ma} + {1'b0, mb};
    if (sa_g == sb) begin
      g_mag = sum[M] ? MAXMAG : sum[M-1:0];
      g_sgn = sb;
    end else if (mb >= ma) begin
      g_mag = mb - ma;
      g_sgn = sb;
    end else begin
      g_mag = ma - mb;
      g_sgn = sa_g;
    end
    if (g_mag == '0) g_sgn = 1'b0;

    alpha_out = i_s ? {g_sgn, g_mag} : {f_sgn, f_mag};
  end
endmodule
