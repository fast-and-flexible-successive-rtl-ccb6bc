// The L sets of P processing elements ("SC decoders"): one set per list
// path, each set working as a stand-alone SC decoder on its own path's
// LLRs. All PEs share the f/g select bit i_s of the current leaf index, and
// each PE also gets the left-child partial sum of its position for g.
// Purely combinational; the operands come from the channel memory or the
// path's own stage memories, the results go back to the stage memories or,
// at stage 0, to the path-metric logic.
//
// L and P follow the design (P = 64, L = 2 in the main configuration).
module sc_decoders #(
  parameter int unsigned L = 2,
  parameter int unsigned P = 64,
  parameter int unsigned Q = 6
) (
  input  logic [Q-1:0] alpha_a [L][P],
  input  logic [Q-1:0] alpha_b [L][P],
  input  logic         beta_l  [L][P],
  input  logic         i_s,
  output logic [Q-1:0] alpha_out [L][P]
);
  for (genvar l = 0; l < L; l++) begin : g_path
    for (genvar p = 0; p < P; p++) begin : g_pe
      pe #(.Q(Q)) u_pe (
        .alpha_a  (alpha_a[l][p]),
        .alpha_b  (alpha_b[l][p]),
        .beta_l   (beta_l[l][p]),
        .i_s      (i_s),
        .alpha_out(alpha_out[l][p])
      );
    end
  end
endmodule
