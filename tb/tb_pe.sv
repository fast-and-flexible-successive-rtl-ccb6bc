// Testbench of the PE: all pairs of 6-bit sign-magnitude LLRs, both beta
// values and both selections, against f and g worked out on integers
// (g saturated to +-31).
module tb_pe;
  int checks = 0, failures = 0;
  logic [5:0] a, b, y;
  logic beta, sel;

  pe #(.Q(6)) dut (.alpha_a(a), .alpha_b(b), .beta_l(beta), .i_s(sel), .alpha_out(y));

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
    int va, vb, r, ma, mb;
    for (int ia = 0; ia < 64; ia++)
      for (int ib = 0; ib < 64; ib++)
        for (int k = 0; k < 4; k++) begin
          a = 6'(ia); b = 6'(ib); beta = k[0]; sel = k[1];
          #1;
          va = val(a); vb = val(b);
          ma = (va < 0) ? -va : va;
          mb = (vb < 0) ? -vb : vb;
          if (!sel) r = (((va < 0) != (vb < 0)) ? -1 : 1) * ((ma < mb) ? ma : mb);
          else begin
            r = vb + (beta ? -va : va);
            if (r > 31) r = 31;
            if (r < -31) r = -31;
          end
          checks++;
          if (val(y) != r || (y[5] && y[4:0] == 0)) begin
            failures++;
            if (failures < 10) $display("FAIL a=%0d b=%0d beta=%0d sel=%0d got %0d exp %0d", va, vb, beta, sel, val(y), r);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
