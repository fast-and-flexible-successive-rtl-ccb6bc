// Testbench helpers, included inside a testbench module that defines the
// localparams TN (code length), TP (node size limit), TK (information bits),
// TS_R1, TS_SPC (fork limits) and TCRC_POLY (16-bit CRC polynomial).
//
// * build_code():   frozen set from the Bhattacharyya bound (design SNR
//                   z0 = 0.5, bit-channel i gets z -> 2z - z^2 for every 0 bit
//                   of i and z -> z^2 for every 1 bit, MSB first), the K
//                   smallest z carry information.
// * build_nodes():  pruned tree: a node of stage s <= log2 P is Rate-0 (all
//                   frozen), Rate-1 (all information), Rep (only the last
//                   bit information), SPC (only the first bit frozen, s >= 2);
//                   otherwise the tree is descended down to single leaves.
//                   Emits the Node Sequence with a DESCEND before every node.
// * make_frame():   random word v in the decoder's representation (u bits for
//                   leaves, Rate-0 and Rep nodes, codeword bits for Rate-1
//                   and SPC nodes, SPC segments of even parity), with a
//                   16-bit CRC over v[0..N-17] placed in v[N-16..N-1]; u and
//                   the codeword x = u G (natural order, G = [1 0; 1 1]^(x)n).
// * force_leaves(): makes the block of four bits at TN/4+8 read info, frozen,
//                   info, frozen, so that the tree has single leaves there.
// * expected_cycles(): the decoder's cycle count from start to done as
//                   given by its schedule, worked out from the node list.

typedef struct {
  int ntype;   // 0 rate0, 1 rate1, 2 rep, 3 spc, 4 leaf
  int stage;
  int base;
  bit frozen;
} tnode_t;

bit          tfrozen [TN];
tnode_t      tnodes  [$];
fsscl_pkg::node_entry_t tseq [$];
bit          tv [TN], tu [TN], tx [TN];

function automatic fsscl_pkg::node_entry_t mk(fsscl_pkg::node_type_e t, int s, int sz, bit fr);
  fsscl_pkg::node_entry_t e;
  e.ntype = t; e.stage = 4'(s); e.size = 11'(sz); e.frozen = fr;
  return e;
endfunction

task automatic build_code();
  real z [TN];
  int  order [TN];
  int  n;
  n = $clog2(TN);
  for (int i = 0; i < TN; i++) begin
    z[i] = 0.5;
    for (int b = n - 1; b >= 0; b--)
      if ((i >> b) & 1) z[i] = z[i] * z[i];
      else              z[i] = 2.0 * z[i] - z[i] * z[i];
    order[i] = i;
  end
  // selection sort, smallest z first (ties: higher index first)
  for (int a = 0; a < TN; a++)
    for (int b = a + 1; b < TN; b++)
      if (z[order[b]] < z[order[a]] || (z[order[b]] == z[order[a]] && order[b] > order[a])) begin
        int t; t = order[a]; order[a] = order[b]; order[b] = t;
      end
  for (int i = 0; i < TN; i++) tfrozen[i] = 1'b1;
  for (int k = 0; k < TK; k++) tfrozen[order[k]] = 1'b0;
endtask

function automatic int classify(int s, int j);
  int nf, ni, sz;
  sz = 1 << s;
  nf = 0;
  for (int q = 0; q < sz; q++) nf += tfrozen[j + q];
  ni = sz - nf;
  if (s == 0) return 4;
  if (s > $clog2(TP)) return -1;
  if (ni == 0) return 0;
  if (nf == 0) return 1;
  if (ni == 1 && !tfrozen[j + sz - 1]) return 2;
  if (s >= 2 && nf == 1 && tfrozen[j]) return 3;
  return -1;
endfunction

task automatic walk(int s, int j);
  int c;
  tnode_t nd;
  c = classify(s, j);
  if (c < 0) begin
    walk(s - 1, j);
    walk(s - 1, j + (1 << (s - 1)));
  end else begin
    nd.ntype = c; nd.stage = s; nd.base = j; nd.frozen = tfrozen[j];
    tnodes.push_back(nd);
  end
endtask

task automatic build_nodes();
  int sz, n1, n2;
  tnodes.delete();
  tseq.delete();
  walk($clog2(TN), 0);
  foreach (tnodes[k]) begin
    sz = 1 << tnodes[k].stage;
    tseq.push_back(mk(fsscl_pkg::NT_DESCEND, tnodes[k].stage, sz, 1'b0));
    case (tnodes[k].ntype)
      0: tseq.push_back(mk(fsscl_pkg::NT_RATE0, tnodes[k].stage, sz, 1'b1));
      1: begin
        n1 = (TS_R1 < sz) ? TS_R1 : sz;
        if (n1 > 0) tseq.push_back(mk(fsscl_pkg::NT_RATE1_1, tnodes[k].stage, n1, 1'b0));
        if (sz - n1 > 0) tseq.push_back(mk(fsscl_pkg::NT_RATE1_2, tnodes[k].stage, sz - n1, 1'b0));
      end
      2: begin
        tseq.push_back(mk(fsscl_pkg::NT_REP1, tnodes[k].stage, sz - 1, 1'b1));
        tseq.push_back(mk(fsscl_pkg::NT_REP2, tnodes[k].stage, 1, 1'b0));
      end
      3: begin
        n2 = (TS_SPC < sz - 1) ? TS_SPC : sz - 1;
        tseq.push_back(mk(fsscl_pkg::NT_SPC1, tnodes[k].stage, 1, 1'b1));
        if (n2 > 0) tseq.push_back(mk(fsscl_pkg::NT_SPC2_1, tnodes[k].stage, n2, 1'b0));
        if (sz - 1 - n2 > 0) tseq.push_back(mk(fsscl_pkg::NT_SPC2_2, tnodes[k].stage, sz - 1 - n2, 1'b0));
        tseq.push_back(mk(fsscl_pkg::NT_SPC3, tnodes[k].stage, sz, 1'b0));
      end
      default: tseq.push_back(mk(fsscl_pkg::NT_LEAF, 0, 1, tnodes[k].frozen));
    endcase
  end
endtask

// polar transform in place (x = u G, natural order); it is its own inverse
function automatic void polar_transform(ref bit a [TN], input int base, input int sz);
  for (int h = 1; h < sz; h = h * 2)
    for (int j = 0; j < sz; j++)
      if (((j / h) % 2) == 0) a[base + j] = a[base + j] ^ a[base + j + h];
endfunction

function automatic logic [15:0] crc_bits(input bit a [TN], input int n);
  logic [15:0] r;
  logic fb;
  r = '0;
  for (int b = 0; b < n; b++) begin
    fb = r[15] ^ a[b];
    r  = {r[14:0], 1'b0} ^ (fb ? TCRC_POLY : 16'h0);
  end
  return r;
endfunction

// returns 0 when the last 16 bits are not all free (no CRC can be placed)
function automatic bit make_frame();
  int sz, b;
  logic [15:0] r;
  bit par;
  foreach (tnodes[k]) begin
    sz = 1 << tnodes[k].stage;
    b  = tnodes[k].base;
    for (int q = 0; q < sz; q++) tv[b + q] = 1'b0;
    case (tnodes[k].ntype)
      1: for (int q = 0; q < sz; q++) tv[b + q] = 1'($urandom_range(0, 1));
      2: tv[b + sz - 1] = 1'($urandom_range(0, 1));
      3: begin
        par = 1'b0;
        for (int q = 1; q < sz; q++) begin tv[b + q] = 1'($urandom_range(0, 1)); par ^= tv[b + q]; end
        tv[b] = par;
      end
      4: tv[b] = tnodes[k].frozen ? 1'b0 : 1'($urandom_range(0, 1));
      default: ;
    endcase
  end
  // CRC over the first N-16 bits, placed in the last 16 (must be Rate-1 bits)
  foreach (tnodes[k])
    if (tnodes[k].base + (1 << tnodes[k].stage) > TN - 16 && tnodes[k].ntype != 1 &&
        !(tnodes[k].ntype == 4 && !tnodes[k].frozen)) return 1'b0;
  r = crc_bits(tv, TN - 16);
  for (int q = 0; q < 16; q++) tv[TN - 16 + q] = r[15 - q];
  tu = tv;
  foreach (tnodes[k])
    if (tnodes[k].ntype == 1 || tnodes[k].ntype == 3)
      polar_transform(tu, tnodes[k].base, 1 << tnodes[k].stage);
  tx = tu;
  polar_transform(tx, 0, TN);
  return 1'b1;
endfunction

function automatic void force_leaves();
  for (int q = 0; q < 4; q++) tfrozen[TN / 4 + 8 + q] = q[0];
endfunction

function automatic int expected_cycles();
  int cyc, i, t0, tgt, d;
  cyc = 1;                 // INIT
  i   = 0;
  foreach (tnodes[k]) begin
    if (k > 0) cyc += 1;   // COMMIT of the previous node
    cyc += 1;              // DESCEND control cycle
    if (i == 0) t0 = $clog2(TN);
    else begin
      d = i ^ (i - 1);
      t0 = 0;
      for (int b = 0; b < 16; b++) if ((d >> b) & 1) t0 = b + 1;
    end
    tgt = (tnodes[k].stage == 0) ? 1 : tnodes[k].stage;
    for (int t = t0; t > tgt; t--)
      cyc += ((1 << (t - 1)) > TP) ? (1 << (t - 1)) / TP : 1;
    i += 1 << tnodes[k].stage;
  end
  foreach (tseq[q])
    if (tseq[q].ntype != fsscl_pkg::NT_DESCEND)
      cyc += (tseq[q].ntype == fsscl_pkg::NT_RATE1_1 || tseq[q].ntype == fsscl_pkg::NT_SPC2_1)
             ? int'(tseq[q].size) : 1;
  cyc += 2;                // last COMMIT, SELECT
  return cyc;
endfunction
