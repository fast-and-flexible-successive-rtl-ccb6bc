// Testbench of the L x P PE array: random operands on every PE of every
// path, both selections; each output is compared with f or g computed on
// integers for that PE's own operands.
module tb_sc_decoders;
  localparam int L = 2, P = 4;
  int checks = 0, failures = 0;
  logic [5:0] a [L][P], b [L][P], y [L][P];
  logic beta [L][P];
  logic sel;

  sc_decoders #(.L(L), .P(P), .Q(6)) dut (.alpha_a(a), .alpha_b(b), .beta_l(beta), .i_s(sel), .alpha_out(y));

  function automatic int val(logic [5:0] v);
    return v[5] ? -int'(v[4:0]) : int'(v[4:0]);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int va, vb, r;
    for (int it = 0; it < 500; it++) begin
      sel = 1'($urandom_range(0, 1));
      for (int l = 0; l < L; l++)
        for (int p = 0; p < P; p++) begin
          a[l][p] = 6'($urandom_range(0, 63));
          b[l][p] = 6'($urandom_range(0, 63));
          if (a[l][p][4:0] == 0) a[l][p][5] = 1'b0;
          if (b[l][p][4:0] == 0) b[l][p][5] = 1'b0;
          beta[l][p] = 1'($urandom_range(0, 1));
        end
      #1;
      for (int l = 0; l < L; l++)
        for (int p = 0; p < P; p++) begin
          va = val(a[l][p]); vb = val(b[l][p]);
          if (!sel) r = (((va < 0) != (vb < 0)) ? -1 : 1) * (((va < 0 ? -va : va) < (vb < 0 ? -vb : vb)) ? (va < 0 ? -va : va) : (vb < 0 ? -vb : vb));
          else begin
            r = vb + (beta[l][p] ? -va : va);
            if (r > 31) r = 31;
            if (r < -31) r = -31;
          end
          checks++;
          if (val(y[l][p]) != r) begin
            failures++;
            if (failures < 10) $display("FAIL l=%0d p=%0d got %0d exp %0d", l, p, val(y[l][p]), r);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
