// Testbench of the high/low stage LLR memories (N = 64, P = 4, L = 2):
// random writes to every stage and word, random path copies, and after each
// operation all PE read views and node views compared with a per-stage
// reference model kept by the testbench (stage t holds 2^t LLRs).
module tb_llr_memory;
  localparam int N = 64, P = 4, L = 2, SMAX = 6, LOGP = 2;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic [3:0] rd_stage = 1, node_stage = 1, wr_stage = 1;
  logic [$clog2(N/P)-1:0] rd_word = '0, wr_word = '0;
  logic [5:0] rd_a [L][P], rd_b [L][P], node_llr [L][P], wr_data [L][P];
  logic wr_en = 0, copy_en = 0;
  logic [0:0] parent [L];
  logic [5:0] ref_m [L][SMAX][N];

  llr_memory #(.N(N), .P(P), .L(L), .Q(6)) dut (.clk, .rd_stage, .rd_word, .rd_a, .rd_b,
    .node_stage, .node_llr, .wr_en, .wr_stage, .wr_word, .wr_data, .copy_en, .parent);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    int nw;
    for (int t = 1; t < SMAX; t++) begin
      nw = ((1 << (t - 1)) > P) ? (1 << (t - 1)) / P : 1;
      for (int c = 0; c < nw; c++) begin
        rd_stage = 4'(t); rd_word = c[$clog2(N/P)-1:0];
        #1;
        for (int l = 0; l < L; l++)
          for (int p = 0; p < P; p++)
            if (p < (1 << (t - 1))) begin
              checks += 2;
              if (rd_a[l][p] != ref_m[l][t][c*P + p]) failures++;
              if (rd_b[l][p] != ref_m[l][t][(1 << (t - 1)) + c*P + p]) failures++;
            end
      end
    end
    for (int s = 1; s <= LOGP; s++) begin
      node_stage = 4'(s);
      #1;
      for (int l = 0; l < L; l++)
        for (int p = 0; p < (1 << s); p++) begin
          checks++;
          if (node_llr[l][p] != ref_m[l][s][p]) failures++;
        end
    end
  endtask

  initial begin
    int ws, nw, c;
    for (int l = 0; l < L; l++) parent[l] = '0;
    // fill every stage first
    for (ws = 1; ws < SMAX; ws++) begin
      nw = ((1 << ws) > P) ? (1 << ws) / P : 1;
      for (c = 0; c < nw; c++) begin
        @(negedge clk);
        wr_en = 1; wr_stage = 4'(ws); wr_word = c[$clog2(N/P)-1:0];
        for (int l = 0; l < L; l++)
          for (int p = 0; p < P; p++) begin
            wr_data[l][p] = 6'($urandom_range(0, 63));
            if (ws > LOGP) ref_m[l][ws][c*P + p] = wr_data[l][p];
            else if (p < (1 << ws)) ref_m[l][ws][p] = wr_data[l][p];
          end
      end
    end
    @(negedge clk);
    wr_en = 0;
    check_all();
    for (int it = 0; it < 60; it++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        logic [5:0] tmp [L][SMAX][N];
        copy_en = 1; wr_en = 0;
        for (int l = 0; l < L; l++) parent[l] = 1'($urandom_range(0, 1));
        tmp = ref_m;
        for (int l = 0; l < L; l++) ref_m[l] = tmp[parent[l]];
      end else begin
        copy_en = 0; wr_en = 1;
        ws = $urandom_range(1, SMAX - 1);
        nw = ((1 << ws) > P) ? (1 << ws) / P : 1;
        c = $urandom_range(0, nw - 1);
        wr_stage = 4'(ws); wr_word = c[$clog2(N/P)-1:0];
        for (int l = 0; l < L; l++)
          for (int p = 0; p < P; p++) begin
            wr_data[l][p] = 6'($urandom_range(0, 63));
            if (ws > LOGP) ref_m[l][ws][c*P + p] = wr_data[l][p];
            else if (p < (1 << ws)) ref_m[l][ws][p] = wr_data[l][p];
          end
      end
      @(negedge clk);
      copy_en = 0; wr_en = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
