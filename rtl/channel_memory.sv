// Channel memory: the N channel LLRs of the frame being decoded, shared by
// all L paths and read only when the tree root (stage log2 N) is updated.
//
// Loaded P LLRs per write (word address wr_addr, N/P words). Two words are
// read at once, the words holding alpha_i and alpha_{i+N/2} for the P PEs:
// word rd_word and word rd_word + N/(2P). Writes take effect at the clock
// edge, reads are combinational (the design keeps all memories in
// registers so read, PE update and write-back fit in one cycle).
//
// Size N x Q_LLR follows the design's memory figure; the P-wide load port
// is this implementation's choice.
module channel_memory #(
  parameter int unsigned N = 1024,
  parameter int unsigned P = 64,
  parameter int unsigned Q = 6
) (
  input  logic                          clk,
  input  logic                          wr_en,
  input  logic [$clog2(N/P)-1:0]        wr_addr,
  input  logic [Q-1:0]                  wr_data [P],
  input  logic [$clog2(N/P)-1:0]        rd_word,
  output logic [Q-1:0]                  rd_a [P],
  output logic [Q-1:0]                  rd_b [P]
);
  localparam int unsigned W = N / P;
  logic [Q-1:0] mem [W][P];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int p = 0; p < P; p++) begin
      rd_a[p] = mem[rd_word][p];
      rd_b[p] = mem[(int'(rd_word) + W/2) % W][p];
    end
  end
endmodule
