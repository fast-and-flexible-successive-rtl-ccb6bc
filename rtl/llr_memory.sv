// High- and low-stage LLR memories of the L paths.
//
// Every path keeps the intermediate LLRs (alpha) of the node currently
// being decoded at each tree stage 1 .. log2(N)-1:
//  * high stage memory: stages t with 2^t > P, N/P-2 words of P LLRs;
//    stage t occupies words 2^t/P-2 .. 2^t/P-2 + 2^t/P-1.
//  * low stage memory: stages 1 .. log2 P, 2P-2 single LLRs; stage t
//    occupies entries 2^t-2 .. 2^(t+1)-3.
// A word of a stage is overwritten whenever another node of that stage is
// decoded; stage 0 is never stored (the leaf LLR goes straight from the
// PEs to the path-metric logic).
//
// Read port (combinational): the two halves of stage rd_stage seen by the
// PEs in step rd_word (word rd_word and rd_word + 2^(t-1)/P of a high
// stage, or the two halves of a low stage), and the whole node at
// node_stage for the special-node logic.
// Write port: the P PE results of stage wr_stage, word wr_word.
// Path copy: when copy_en is set, path l first takes the content of path
// parent[l] (list pruning after a fork), then the write applies.
//
// Dimensions and the stage-to-memory mapping follow the design's memory
// figure and LLR memory access table; the address arithmetic is this
// implementation's.
module llr_memory #(
  parameter int unsigned N = 1024,
  parameter int unsigned P = 64,
  parameter int unsigned L = 2,
  parameter int unsigned Q = 6
) (
  input  logic                     clk,
  // PE operand read
  input  logic [3:0]               rd_stage,
  input  logic [$clog2(N/P)-1:0]   rd_word,
  output logic [Q-1:0]             rd_a [L][P],
  output logic [Q-1:0]             rd_b [L][P],
  // special-node read
  input  logic [3:0]               node_stage,
  output logic [Q-1:0]             node_llr [L][P],
  // PE result write
  input  logic                     wr_en,
  input  logic [3:0]               wr_stage,
  input  logic [$clog2(N/P)-1:0]   wr_word,
  input  logic [Q-1:0]             wr_data [L][P],
  // list pruning
  input  logic                     copy_en,
  input  logic [$clog2(L)-1:0]     parent [L]
);
  localparam int unsigned LOGP   = $clog2(P);
  localparam int unsigned HDEPTH = N / P - 2;
  localparam int unsigned LDEPTH = 2 * P - 2;

  logic [Q-1:0] hmem [L][HDEPTH][P];
  logic [Q-1:0] lmem [L][LDEPTH];

  // ---- reads ----
  always_comb begin
    int hb, half, lb;
    hb = 0; half = 0; lb = 0;
    for (int l = 0; l < L; l++) begin
      for (int p = 0; p < P; p++) begin
        rd_a[l][p]     = '0;
        rd_b[l][p]     = '0;
        node_llr[l][p] = '0;
      end
    end
    if (int'(rd_stage) > LOGP) begin
      hb   = (1 << rd_stage) / P - 2;
      half = (1 << rd_stage) / (2 * P);
      for (int l = 0; l < L; l++)
        for (int p = 0; p < P; p++) begin
          rd_a[l][p] = hmem[l][(hb + int'(rd_word)) % HDEPTH][p];
          rd_b[l][p] = hmem[l][(hb + int'(rd_word) + half) % HDEPTH][p];
        end
    end else if (rd_stage != 0) begin
      lb   = (1 << rd_stage) - 2;
      half = (1 << rd_stage) / 2;
      for (int l = 0; l < L; l++)
        for (int p = 0; p < P; p++)
          if (p < half) begin
            rd_a[l][p] = lmem[l][(lb + p) % LDEPTH];
            rd_b[l][p] = lmem[l][(lb + half + p) % LDEPTH];
          end
    end
    if (node_stage != 0 && int'(node_stage) <= LOGP) begin
      lb = (1 << node_stage) - 2;
      for (int l = 0; l < L; l++)
        for (int p = 0; p < P; p++)
          if (p < (1 << node_stage)) node_llr[l][p] = lmem[l][(lb + p) % LDEPTH];
    end
  end

  // ---- copy, then write ----
  always_ff @(posedge clk) begin
    int hb, lb;
    for (int l = 0; l < L; l++) begin
      if (copy_en) begin
        hmem[l] <= hmem[parent[l]];
        lmem[l] <= lmem[parent[l]];
      end
    end
    if (wr_en) begin
      if (int'(wr_stage) > LOGP) begin
        hb = (1 << wr_stage) / P - 2;
        for (int l = 0; l < L; l++)
          hmem[l][(hb + int'(wr_word)) % HDEPTH] <= wr_data[l];
      end else if (wr_stage != 0) begin
        lb = (1 << wr_stage) - 2;
        for (int l = 0; l < L; l++)
          for (int p = 0; p < P; p++)
            if (p < (1 << wr_stage)) lmem[l][(lb + p) % LDEPTH] <= wr_data[l][p];
      end
    end
  end
endmodule
