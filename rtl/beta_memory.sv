// Beta (partial-sum) memory of the L paths.
//
// For every stage s = 0 .. log2(N)-1 a path keeps B_s, the 2^s hard
// decisions (beta) of the most recent left child at that stage: N-1 bits
// per path in all, B_s at offset 2^s-1. B_s is what the g update needs
// when the right sibling is entered.
//
// Update: when a node of stage s starting at leaf index j0 is finished,
// its beta vector x (2^s bits) is folded into every stage s' >= s at
// once: if j0 lies in the left child at stage s' (bit s' of j0 is 0),
// block h of B_s' (h = 0 .. 2^(s'-s)-1) is XORed with x whenever
// h is a bit-subset of the node's offset o = (j0 mod 2^s') >> s; B_s' is
// cleared first when o = 0 (a new left child begins). This is equation
// (3) applied to all ancestors at once, since the generator matrix row of
// position r covers the columns that are bit-subsets of r.
// Read: 2^(t) bits of B_t as seen by PE word rd_word (P bits).
// Path copy before update, as in the other per-path memories.
//
// That all stages a bit contributes to are updated together follows the
// design; doing it in a separate commit cycle from the path memory
// contents, instead of precomputing both hypotheses of each estimated bit,
// is this implementation's simplification.
module beta_memory #(
  parameter int unsigned N = 1024,
  parameter int unsigned P = 64,
  parameter int unsigned L = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // PE read: B_rd_stage, bits rd_word*P .. rd_word*P+P-1
  input  logic [3:0]               rd_stage,
  input  logic [$clog2(N/P)-1:0]   rd_word,
  output logic                     rd_beta [L][P],
  // node commit
  input  logic                     upd_en,
  input  logic [3:0]               upd_stage,
  input  logic [$clog2(N)-1:0]     upd_base,
  input  logic [P-1:0]             upd_x [L],
  // list pruning
  input  logic                     copy_en,
  input  logic [$clog2(L)-1:0]     parent [L]
);
  localparam int unsigned SMAX = $clog2(N);

  logic [N-2:0] bmem [L];
  logic [N-2:0] bnext [L];

  always_comb begin
    for (int l = 0; l < L; l++)
      for (int p = 0; p < P; p++)
        rd_beta[l][p] = (p < (1 << rd_stage))
                      ? bmem[l][((1 << rd_stage) - 1 + int'(rd_word) * P + p) % (N - 1)]
                      : 1'b0;
  end

  always_comb begin
    int o, blk, c, off;
    o = 0; blk = 0; c = 0; off = 0;
    for (int l = 0; l < L; l++) begin
      bnext[l] = copy_en ? bmem[parent[l]] : bmem[l];
      if (upd_en) begin
        for (int sp = 0; sp < SMAX; sp++) begin
          if (sp >= int'(upd_stage) && !upd_base[sp]) begin
            off = (1 << sp) - 1;
            o   = (int'(upd_base) % (1 << sp)) >> upd_stage;
            for (int q = 0; q < (1 << sp); q++) begin
              blk = q >> upd_stage;
              c   = q % (1 << upd_stage);
              if (o == 0) bnext[l][off + q] = 1'b0;
              if ((blk & ~o) == 0) bnext[l][off + q] = bnext[l][off + q] ^ upd_x[l][c % P];
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int l = 0; l < L; l++) bmem[l] <= '0;
    else        bmem <= bnext;
  end
endmodule
