// Comparator tree that returns the smallest of P magnitudes together with
// its index, ignoring the entries whose enable bit is 0 (a disabled entry
// counts as the largest value). Ties go to the lower index. log2(P)
// levels of two-input compare-and-select, purely combinational.
//
// The design uses such a tree, carrying both the index and the value, to
// find the least reliable bit of an SPC node; here it also picks the bit
// to fork on in Rate-1 and SPC nodes.
module min_search #(
  parameter int unsigned P = 64,
  parameter int unsigned W = 5
) (
  input  logic [W-1:0]         val [P],
  input  logic [P-1:0]         en,
  output logic [W-1:0]         min_val,
  output logic [$clog2(P)-1:0] min_idx,
  output logic                 any
);
  localparam int unsigned LV = $clog2(P);

  logic [W:0]    v   [LV+1][P];   // MSB set = disabled
  logic [LV-1:0] idx [LV+1][P];

  always_comb begin
    for (int p = 0; p < P; p++) begin
      v[0][p]   = {~en[p], val[p]};
      idx[0][p] = LV'(p);
    end
    for (int k = 1; k <= LV; k++) begin
      for (int p = 0; p < P; p++) begin
        v[k][p]   = '1;
        idx[k][p] = '0;
      end
      for (int p = 0; p < (P >> k); p++) begin
        if (v[k-1][2*p+1] < v[k-1][2*p]) begin
          v[k][p]   = v[k-1][2*p+1];
          idx[k][p] = idx[k-1][2*p+1];
        end else begin
          v[k][p]   = v[k-1][2*p];
          idx[k][p] = idx[k-1][2*p];
        end
      end
    end
    min_val = v[LV][0][W-1:0];
    min_idx = idx[LV][0];
    any     = ~v[LV][0][W];
  end
endmodule
