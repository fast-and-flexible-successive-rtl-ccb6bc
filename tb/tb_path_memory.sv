// Testbench of the path memories (N = 32, P = 8, L = 2): random writes of
// every node type at random aligned node positions, with and without
// path copies, checked after every cycle against a bit-array model: whole
// path words and the node segment output. The model writes, per node
// type, zeros (Rate-0, first 2^s-1 bits of a repetition node), the bit u
// at the last node position (leaf, repetition), hard decisions (SPC
// first phase, undecided bits of Rate-1/SPC fork phases), u at the forked
// position, and the even-parity bit at i_min (SPC last phase).
module tb_path_memory;
  import fsscl_pkg::*;
  localparam int N = 32, P = 8, L = 2;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, copy_en = 0;
  node_type_e wr_type;
  logic [4:0] base;
  logic [3:0] stage;
  logic [P-1:0] hd [L], decided [L], seg [L];
  logic [2:0] fork_pos [L], imin [L];
  logic ubit [L];
  logic [0:0] parent [L];
  logic [N-1:0] word [L];
  bit r [L][N];

  path_memory #(.N(N), .P(P), .L(L)) dut (.clk, .wr_en, .wr_type, .base, .stage, .hd, .decided,
    .fork_pos, .imin, .ubit, .copy_en, .parent, .seg, .word);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    node_type_e types [10] = '{NT_RATE0, NT_REP1, NT_REP2, NT_LEAF, NT_SPC1, NT_RATE1_1,
                               NT_SPC2_1, NT_RATE1_2, NT_SPC2_2, NT_SPC3};
    bit old [L][N];
    int n, b, s;
    // fill with known contents: write hard decisions of SPC1 over the memory
    wr_en = 1; copy_en = 0; wr_type = NT_SPC1; stage = 4'd3;
    for (int k = 0; k < N / P; k++) begin
      base = 5'(k * P);
      for (int l = 0; l < L; l++) begin
        hd[l] = P'($urandom);
        for (int p = 0; p < P; p++) r[l][k * P + p] = hd[l][p];
      end
      @(negedge clk);
    end
    for (int it = 0; it < 4000; it++) begin
      wr_type = types[$urandom_range(0, 9)];
      s = (wr_type == NT_LEAF) ? 0 : $urandom_range(1, 3);
      n = 1 << s;
      b = $urandom_range(0, N / n - 1) * n;
      stage = 4'(s); base = 5'(b);
      wr_en = 1'($urandom_range(0, 5) != 0);
      copy_en = 1'($urandom);
      for (int l = 0; l < L; l++) begin
        hd[l] = P'($urandom); decided[l] = P'($urandom);
        fork_pos[l] = 3'($urandom_range(0, n - 1)); imin[l] = 3'($urandom_range(0, n - 1));
        ubit[l] = 1'($urandom); parent[l] = 1'($urandom);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        logic [P-1:0] e;
        e = '0;
        for (int p = 0; p < n; p++) e[p] = r[l][b + p];
        checks++;
        if (seg[l] != e) failures++;
      end
      old = r;
      for (int l = 0; l < L; l++) begin
        int src;
        src = copy_en ? int'(parent[l]) : l;
        r[l] = old[src];
        if (wr_en) begin
          case (wr_type)
            NT_RATE0: for (int p = 0; p < n; p++) r[l][b + p] = 0;
            NT_REP1:  for (int p = 0; p < n - 1; p++) r[l][b + p] = 0;
            NT_REP2, NT_LEAF: r[l][b + n - 1] = ubit[l];
            NT_SPC1: for (int p = 0; p < n; p++) r[l][b + p] = hd[src][p];
            NT_RATE1_1, NT_SPC2_1, NT_RATE1_2, NT_SPC2_2: begin
              for (int p = 0; p < n; p++) if (!decided[src][p]) r[l][b + p] = hd[src][p];
              if (wr_type == NT_RATE1_1 || wr_type == NT_SPC2_1) r[l][b + fork_pos[src]] = ubit[l];
            end
            NT_SPC3: begin
              bit par;
              par = 0;
              for (int p = 0; p < n; p++) if (p != imin[src]) par ^= old[src][b + p];
              r[l][b + imin[src]] = par;
            end
            default: ;
          endcase
        end
      end
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        logic [N-1:0] w;
        for (int j = 0; j < N; j++) w[j] = r[l][j];
        checks++;
        if (word[l] != w) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
