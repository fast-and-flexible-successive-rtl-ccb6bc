// CRC unit: one CRC remainder per list path, updated with a variable
// number of bits in one cycle.
//
// The remainder is that of the bits written into the path memory so far,
// in index order (frozen zeros included), so a node of size n = 2^s
// advances the remainder by n bit steps at once: bits[0] first. The
// n-step update is built as a chain of P single-bit steps, each bypassed
// when its bit lies beyond n; this gives every node size from 1 to P with
// shared logic, and handles information bits of any value (Rate-1 and SPC
// nodes), not only zeros. Path copy (list pruning) happens before the
// update. A remainder of zero after the last node marks a path whose CRC
// checks.
//
// A parallel CRC with variable input size follows the design's CRC
// figure; the polynomial (CRC-16-CCITT, x^16+x^12+x^5+1, zero initial
// value, no final XOR) is this implementation's choice, the design only
// giving the CRC length 16.
module crc_unit #(
  parameter int unsigned L      = 2,
  parameter int unsigned P      = 64,
  parameter int unsigned CRC_W  = 16,
  parameter logic [CRC_W-1:0] POLY = 16'h1021
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      init,
  input  logic                      upd_en,
  input  logic [$clog2(P):0]        upd_n,       // number of bits, 1 .. P
  input  logic [P-1:0]              upd_bits [L],
  input  logic                      copy_en,
  input  logic [$clog2(L)-1:0]      parent   [L],
  output logic [CRC_W-1:0]          rem      [L]
);
  logic [CRC_W-1:0] rnext [L];

  always_comb begin
    logic [CRC_W-1:0] r;
    logic fb;
    fb = 1'b0;
    r  = '0;
    for (int l = 0; l < L; l++) begin
      r = copy_en ? rem[parent[l]] : rem[l];
      if (upd_en) begin
        for (int b = 0; b < P; b++) begin
          if (b < int'(upd_n)) begin
            fb = r[CRC_W-1] ^ upd_bits[l][b];
            r  = {r[CRC_W-2:0], 1'b0} ^ (fb ? POLY : '0);
          end
        end
      end
      rnext[l] = r;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int l = 0; l < L; l++) rem[l] <= '0;
    else if (init) for (int l = 0; l < L; l++) rem[l] <= '0;
    else rem <= rnext;
  end
endmodule
