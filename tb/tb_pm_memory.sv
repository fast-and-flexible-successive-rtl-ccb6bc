// Testbench of the PM memory (L = 4, P = 8): random sequences of frame
// init, mask clear, metric updates (with and without SPC loads) and path
// forks with random parents, checked after every cycle against a
// register-level model kept in the testbench. Only path 0 is live after
// init; a fork takes metric and live flag from the sorter and the other
// state of the parent, plus the parent's forked position when marked.
module tb_pm_memory;
  localparam int L = 4, P = 8, Q = 6, QP = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, clr_mask = 0, upd_en = 0, spc1_load = 0, fork_en = 0, mark_fork = 0;
  logic [QP-1:0] pm_next [L], new_pm [L], pm [L];
  logic [2:0] imin_in [L], fork_pos [L], imin [L];
  logic gamma_in [L], new_valid [L], valid [L], gamma [L];
  logic [Q-2:0] amin_in [L], amin [L];
  logic [1:0] parent [L];
  logic [P-1:0] decided [L];

  logic [QP-1:0] r_pm [L];
  logic r_v [L], r_g [L];
  logic [P-1:0] r_d [L];
  logic [2:0] r_i [L];
  logic [Q-2:0] r_a [L];

  pm_memory #(.L(L), .P(P), .Q(Q), .Q_PM(QP)) dut (.clk, .rst_n, .init, .clr_mask, .upd_en,
    .spc1_load, .fork_en, .mark_fork, .pm_next, .imin_in, .gamma_in, .amin_in, .fork_pos,
    .parent, .new_pm, .new_valid, .pm, .valid, .decided, .imin, .gamma, .amin);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model_init();
    for (int l = 0; l < L; l++) begin
      r_pm[l] = '0; r_v[l] = (l == 0); r_d[l] = '0; r_i[l] = '0; r_g[l] = 0; r_a[l] = '0;
    end
  endtask

  initial begin
    int op;
    repeat (2) @(negedge clk);
    rst_n = 1;
    model_init();
    #1;
    for (int l = 0; l < L; l++) begin
      checks++;
      if (pm[l] != 0 || valid[l] != (l == 0) || decided[l] != 0) failures++;
    end
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      op = $urandom_range(0, 9);
      init = (op == 0); clr_mask = (op == 1); upd_en = (op >= 2 && op <= 4); fork_en = (op >= 5);
      spc1_load = 1'($urandom); mark_fork = 1'($urandom);
      for (int l = 0; l < L; l++) begin
        pm_next[l] = QP'($urandom); new_pm[l] = QP'($urandom); new_valid[l] = 1'($urandom);
        imin_in[l] = 3'($urandom); gamma_in[l] = 1'($urandom); amin_in[l] = (Q-1)'($urandom);
        fork_pos[l] = 3'($urandom); parent[l] = 2'($urandom);
      end
      if (init) model_init();
      else if (clr_mask) for (int l = 0; l < L; l++) r_d[l] = '0;
      else if (upd_en) begin
        for (int l = 0; l < L; l++) begin
          r_pm[l] = pm_next[l];
          if (spc1_load) begin
            r_i[l] = imin_in[l]; r_g[l] = gamma_in[l]; r_a[l] = amin_in[l];
            r_d[l] = '0; r_d[l][imin_in[l]] = 1'b1;
          end
        end
      end else begin
        logic [P-1:0] d0 [L];
        logic [2:0] i0 [L];
        logic g0 [L];
        logic [Q-2:0] a0 [L];
        d0 = r_d; i0 = r_i; g0 = r_g; a0 = r_a;
        for (int l = 0; l < L; l++) begin
          r_pm[l] = new_pm[l]; r_v[l] = new_valid[l];
          r_d[l] = d0[parent[l]];
          if (mark_fork) r_d[l][fork_pos[parent[l]]] = 1'b1;
          r_i[l] = i0[parent[l]]; r_g[l] = g0[parent[l]]; r_a[l] = a0[parent[l]];
        end
      end
      @(posedge clk);
      #1;
      for (int l = 0; l < L; l++) begin
        checks += 3;
        if (pm[l] != r_pm[l] || valid[l] != r_v[l]) failures++;
        if (decided[l] != r_d[l]) failures++;
        if (imin[l] != r_i[l] || gamma[l] != r_g[l] || amin[l] != r_a[l]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
