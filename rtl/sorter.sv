// Path sorter: keeps the L best of the 2L candidate paths produced by a
// fork (candidate k = 2*l + c is path l extended with candidate bit c).
//
// Every candidate metric is compared with every other one in parallel;
// the rank of a candidate is the number of candidates better than it
// (a valid candidate beats an invalid one, then the lower metric wins,
// then the lower candidate index). The candidate of rank r becomes the
// new path r: parent[r] = its path, csel[r] = its bit choice, and
// new_valid[r] says whether it descends from a live path. Combinational.
//
// The all-pairs comparison for minimum latency follows the design; the
// tie-break order and the validity handling (only path 0 is alive at the
// start of a frame) are this implementation's choices.
module sorter #(
  parameter int unsigned L    = 2,
  parameter int unsigned Q_PM = 8
) (
  input  logic [Q_PM-1:0]        cand_pm    [2*L],
  input  logic                   cand_valid [2*L],
  output logic [$clog2(L)-1:0]   parent     [L],
  output logic                   csel       [L],
  output logic                   new_valid  [L],
  output logic [Q_PM-1:0]        new_pm     [L]
);
  localparam int unsigned C = 2 * L;
  logic better [C][C];   // better[d][k]: candidate d ranks before k
  int unsigned rank [C];

  always_comb begin
    for (int k = 0; k < C; k++) begin
      for (int d = 0; d < C; d++) begin
        if (d == k) better[d][k] = 1'b0;
        else if (cand_valid[d] != cand_valid[k]) better[d][k] = cand_valid[d];
        else if (cand_pm[d] != cand_pm[k]) better[d][k] = cand_pm[d] < cand_pm[k];
        else better[d][k] = d < k;
      end
    end
    for (int k = 0; k < C; k++) begin
      rank[k] = 0;
      for (int d = 0; d < C; d++) rank[k] += {31'd0, better[d][k]};
    end
    for (int r = 0; r < L; r++) begin
      parent[r] = '0; csel[r] = 1'b0; new_valid[r] = 1'b0; new_pm[r] = '0;
      for (int k = 0; k < C; k++) begin
        if (rank[k] == r) begin
          parent[r]    = ($clog2(L))'(k / 2);
          csel[r]      = k[0];
          new_valid[r] = cand_valid[k];
          new_pm[r]    = cand_pm[k];
        end
      end
    end
  end
endmodule
