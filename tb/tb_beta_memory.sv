// Testbench of the beta memory (N = 32, P = 4, L = 2). The frame is cut
// into random aligned nodes of stage 0 .. log2 P, each with a random
// u segment; the node's beta vector (u transformed by the polar kernel)
// is committed. After every commit each stage s is read and compared with
// the polar transform of the u bits of the stage-s node that the
// decoder would use next: the node holding the last committed bit if it
// is a left child (bits not yet decoded count as 0), else its left
// sibling. Stages below the last node's own stage lie inside that node
// and are never read by the decoder, so they are not checked. A path copy between frames is checked as well.
module tb_beta_memory;
  localparam int N = 32, P = 4, L = 2, SMAX = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [3:0] rd_stage = 0, upd_stage = 0;
  logic [$clog2(N/P)-1:0] rd_word = '0;
  logic rd_beta [L][P];
  logic upd_en = 0, copy_en = 0;
  logic [$clog2(N)-1:0] upd_base = '0;
  logic [P-1:0] upd_x [L];
  logic [0:0] parent [L];
  bit u [L][N];

  beta_memory #(.N(N), .P(P), .L(L)) dut (.clk, .rst_n, .rd_stage, .rd_word, .rd_beta,
    .upd_en, .upd_stage, .upd_base, .upd_x, .copy_en, .parent);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // polar transform of u[l][st .. st+sz-1] with bits at index >= lim taken as 0
  function automatic bit xbit(int l, int st, int sz, int lim, int c);
    bit r;
    r = 0;
    for (int q = 0; q < sz; q++)
      if (((c & ~q) == 0) && (st + q < lim)) r ^= u[l][st + q];
    return r;
  endfunction

  task automatic check_stages(int done_to, int s_last);
    int last, st, nw;
    last = done_to - 1;
    for (int s = s_last; s < SMAX; s++) begin
      st = (last >> s) << s;
      if ((last >> s) & 1) st -= (1 << s);     // right child: use left sibling
      nw = ((1 << s) > P) ? (1 << s) / P : 1;
      for (int w = 0; w < nw; w++) begin
        rd_stage = 4'(s); rd_word = w[$clog2(N/P)-1:0];
        #1;
        for (int l = 0; l < L; l++)
          for (int p = 0; p < P; p++)
            if (w * P + p < (1 << s)) begin
              checks++;
              if (rd_beta[l][p] != xbit(l, st, 1 << s, done_to, w * P + p)) begin
                failures++;
                if (failures < 10) $display("FAIL stage %0d bit %0d path %0d after %0d", s, w*P+p, l, done_to);
              end
            end
      end
    end
  endtask

  initial begin
    int i, s;
    for (int l = 0; l < L; l++) parent[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int frame = 0; frame < 6; frame++) begin
      i = 0;
      while (i < N) begin
        // random aligned node stage
        s = $urandom_range(0, $clog2(P));
        while ((i % (1 << s)) != 0) s--;
        @(negedge clk);
        upd_en = 1; upd_stage = 4'(s); upd_base = i[$clog2(N)-1:0];
        for (int l = 0; l < L; l++) begin
          for (int q = 0; q < (1 << s); q++) u[l][i + q] = 1'($urandom_range(0, 1));
          upd_x[l] = '0;
          for (int c = 0; c < (1 << s); c++) upd_x[l][c] = xbit(l, i, 1 << s, N, c);
        end
        @(negedge clk);
        upd_en = 0;
        i += 1 << s;
        check_stages(i, s);
        if (i == N / 2 + 4) begin
          bit tmp [L][N];
          @(negedge clk);
          copy_en = 1; parent[0] = 1; parent[1] = 1;
          tmp = u; u[0] = tmp[1];
          @(negedge clk);
          copy_en = 0; parent[0] = 0;
          check_stages(i, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
