// Testbench of the path-metric computation (P = 8, Q = 6, Q_PM = 8):
// random node LLRs, stages, decided masks, metrics near and far from
// saturation, for every node type. The expected values are worked out
// with integers from the metric formulas of each node type (leaf, Rate-0,
// repetition, SPC with its parity and least reliable bit, Rate-1 and SPC
// forks on the least reliable undecided bit).
module tb_pm_compute;
  import fsscl_pkg::*;
  localparam int P = 8, Q = 6, QP = 8, M = Q - 1;
  int checks = 0, failures = 0;

  node_type_e ntype;
  logic [3:0] stage;
  logic leaf_frozen, spc_gamma, is_fork, gamma;
  logic [Q-1:0] node_llr [P];
  logic [Q-1:0] leaf_llr;
  logic [QP-1:0] pm, pm_next;
  logic [QP-1:0] cand_pm [2];
  logic cand_bit [2];
  logic [P-1:0] decided, hd;
  logic [M-1:0] spc_amin, amin;
  logic [2:0] fork_pos, imin;

  pm_compute #(.P(P), .Q(Q), .Q_PM(QP)) dut (.ntype, .stage, .leaf_frozen, .node_llr, .leaf_llr,
    .pm, .decided, .spc_gamma, .spc_amin, .pm_next, .is_fork, .cand_pm, .cand_bit, .hd,
    .fork_pos, .imin, .gamma, .amin);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sat(int v);
    return (v > 255) ? 255 : v;
  endfunction

  task automatic chk(bit ok);
    checks++;
    if (!ok) failures++;
  endtask

  initial begin
    node_type_e types [8] = '{NT_LEAF, NT_RATE0, NT_REP2, NT_SPC1, NT_RATE1_1, NT_SPC2_1, NT_REP1, NT_SPC3};
    int n, sneg, spos, mn, mi, un, ui, mg [P];
    bit ng [P], par;
    for (int it = 0; it < 20000; it++) begin
      ntype = types[it % 8];
      stage = 4'((ntype == NT_LEAF) ? 0 : $urandom_range(1, 3));
      n = 1 << stage;
      leaf_frozen = 1'($urandom);
      pm = QP'((it % 5 == 0) ? $urandom_range(200, 255) : $urandom_range(0, 60));
      for (int p = 0; p < P; p++) begin
        mg[p] = $urandom_range(0, (it % 3 == 0) ? 3 : 31);
        ng[p] = (mg[p] == 0) ? 1'b0 : 1'($urandom);
        node_llr[p] = {ng[p], M'(mg[p])};
      end
      leaf_llr = node_llr[0];
      decided = P'($urandom);
      decided[$urandom_range(0, n - 1)] = 1'b0;
      sneg = 0; spos = 0; mn = 1 << 30; mi = 0; un = 1 << 30; ui = 0; par = 0;
      for (int p = 0; p < n; p++) begin
        if (ng[p]) sneg += mg[p]; else spos += mg[p];
        if (mg[p] < mn) begin mn = mg[p]; mi = p; end
        if (!decided[p] && mg[p] < un) begin un = mg[p]; ui = p; end
        par ^= ng[p];
      end
      spc_gamma = 1'($urandom);
      spc_amin  = M'($urandom_range(0, un));
      #1;
      for (int p = 0; p < P; p++) chk(hd[p] == ((p < n) ? ng[p] : 1'b0));
      case (ntype)
        NT_LEAF: begin
          chk(is_fork == !leaf_frozen);
          if (leaf_frozen) chk(int'(pm_next) == sat(int'(pm) + (ng[0] ? mg[0] : 0)));
          else begin
            chk(int'(cand_pm[0]) == sat(int'(pm) + (ng[0] ? mg[0] : 0)) && cand_bit[0] == 1'b0);
            chk(int'(cand_pm[1]) == sat(int'(pm) + (ng[0] ? 0 : mg[0])) && cand_bit[1] == 1'b1);
          end
        end
        NT_RATE0: begin
          chk(!is_fork);
          chk(int'(pm_next) == sat(int'(pm) + sneg));
        end
        NT_REP2: begin
          chk(is_fork);
          chk(int'(cand_pm[0]) == sat(int'(pm) + sneg) && cand_bit[0] == 1'b0);
          chk(int'(cand_pm[1]) == sat(int'(pm) + spos) && cand_bit[1] == 1'b1);
        end
        NT_SPC1: begin
          chk(!is_fork);
          chk(gamma == par && int'(imin) == mi && int'(amin) == mn);
          chk(int'(pm_next) == sat(int'(pm) + (par ? mn : 0)));
        end
        NT_RATE1_1, NT_SPC2_1: begin
          int cost;
          cost = (ntype == NT_RATE1_1) ? un : un + (spc_gamma ? -int'(spc_amin) : int'(spc_amin));
          chk(is_fork && int'(fork_pos) == ui);
          chk(cand_bit[0] == ng[ui] && cand_bit[1] == !ng[ui]);
          chk(cand_pm[0] == pm && int'(cand_pm[1]) == sat(int'(pm) + cost));
        end
        default: begin
          chk(!is_fork);
          chk(pm_next == pm);
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
