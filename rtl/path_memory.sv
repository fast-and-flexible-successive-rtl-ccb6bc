// Path memories of the L list paths: N one-bit registers per path, all
// bits reachable at once.
//
// What is written, and where, depends on the node type of the current
// phase (node start index i = base, node size 2^s, positions relative to
// the node):
//   RATE0           0 on i .. i+2^s-1
//   REP1            0 on i .. i+2^s-2
//   REP2, LEAF      the estimated bit u on the last bit of the node
//   SPC1            hard decisions sgn(alpha) on the whole node
//   RATE1-1, SPC2-1 u on the forked position, hard decisions on all bits
//                   not yet decided
//   RATE1-2, SPC2-2 hard decisions on all bits not yet decided
//   SPC3            on position i_min: the XOR of the other node bits
//                   (even parity)
// so a Rate-1 or SPC node leaves its codeword bits (its beta vector) in
// the path memory, while leaves, Rate-0 and repetition nodes leave their
// u bits. Path copy (list pruning) happens before the write: path l is
// rebuilt from path parent[l] using that parent's node data and its own
// new bit u[l].
// seg[l] returns the 2^s bits of the current node (for parity, CRC and beta
// updates) and word[l] the whole path.
//
// The data and address selection per node type follows the design's path
// memory figure, except that the forked bits of Rate-1 and SPC nodes are
// the least reliable ones rather than consecutive ones (see the
// documentation), so the hard decisions are written with a mask of the
// bits already decided.
module path_memory
  import fsscl_pkg::*;
#(
  parameter int unsigned N = 1024,
  parameter int unsigned P = 64,
  parameter int unsigned L = 2
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  node_type_e               wr_type,
  input  logic [$clog2(N)-1:0]     base,
  input  logic [3:0]               stage,
  input  logic [P-1:0]             hd       [L],  // per old path
  input  logic [P-1:0]             decided  [L],  // per old path
  input  logic [$clog2(P)-1:0]     fork_pos [L],  // per old path
  input  logic [$clog2(P)-1:0]     imin     [L],  // per old path
  input  logic                     ubit     [L],  // per new path
  input  logic                     copy_en,
  input  logic [$clog2(L)-1:0]     parent   [L],
  output logic [P-1:0]             seg      [L],
  output logic [N-1:0]             word     [L]
);
  logic [N-1:0] mem   [L];
  logic [N-1:0] mnext [L];

  assign word = mem;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      seg[l] = '0;
      for (int p = 0; p < P; p++)
        if (p < (1 << stage)) seg[l][p] = mem[l][(int'(base) + p) % N];
    end
  end

  always_comb begin
    int src, nsz;
    logic par;
    par = 1'b0;
    nsz = 1 << stage;
    for (int l = 0; l < L; l++) begin
      src = copy_en ? int'(parent[l]) : l;
      mnext[l] = mem[src];
      if (wr_en) begin
        unique case (wr_type)
          NT_RATE0, NT_REP1: begin
            for (int p = 0; p < P; p++)
              if (p < nsz - ((wr_type == NT_REP1) ? 1 : 0))
                mnext[l][(int'(base) + p) % N] = 1'b0;
          end
          NT_REP2, NT_LEAF: mnext[l][(int'(base) + nsz - 1) % N] = ubit[l];
          NT_SPC1: begin
            for (int p = 0; p < P; p++)
              if (p < nsz) mnext[l][(int'(base) + p) % N] = hd[src][p];
          end
          NT_RATE1_1, NT_SPC2_1, NT_RATE1_2, NT_SPC2_2: begin
            for (int p = 0; p < P; p++)
              if (p < nsz && !decided[src][p]) mnext[l][(int'(base) + p) % N] = hd[src][p];
            if (wr_type == NT_RATE1_1 || wr_type == NT_SPC2_1)
              mnext[l][(int'(base) + int'(fork_pos[src])) % N] = ubit[l];
          end
          NT_SPC3: begin
            par = 1'b0;
            for (int p = 0; p < P; p++)
              if (p < nsz && p != int'(imin[src])) par ^= mem[src][(int'(base) + p) % N];
            mnext[l][(int'(base) + int'(imin[src])) % N] = par;
          end
          default: ;
        endcase
      end
    end
  end

  always_ff @(posedge clk) mem <= mnext;
endmodule
