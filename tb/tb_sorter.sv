// Testbench of the path sorter with L = 4 (8 candidates): random metrics
// with frequent ties and random validity. The reference orders the
// candidates by (valid first, smaller metric, lower index) with a plain
// insertion sort and the L first must match parent, bit, validity and
// metric of the sorter's outputs, in order.
module tb_sorter;
  localparam int L = 4, C = 2 * L;
  int checks = 0, failures = 0;
  logic [7:0] pm [C], npm [L];
  logic cv [C], csel [L], nv [L];
  logic [1:0] parent [L];

  sorter #(.L(L), .Q_PM(8)) dut (.cand_pm(pm), .cand_valid(cv), .parent, .csel, .new_valid(nv), .new_pm(npm));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit precedes(int d, int k);
    if (cv[d] != cv[k]) return cv[d];
    if (pm[d] != pm[k]) return pm[d] < pm[k];
    return d < k;
  endfunction

  initial begin
    int ord [C];
    for (int it = 0; it < 3000; it++) begin
      for (int k = 0; k < C; k++) begin
        pm[k] = 8'($urandom_range(0, (it % 3 == 0) ? 3 : 255));
        cv[k] = (it % 4 == 0) ? ($urandom_range(0, 1) == 1) : 1'b1;
      end
      for (int l = 0; l < L; l++) cv[2*l+1] = cv[2*l];
      #1;
      for (int k = 0; k < C; k++) ord[k] = k;
      for (int a = 1; a < C; a++)
        for (int b = a; b > 0 && precedes(ord[b], ord[b-1]); b--) begin
          int t; t = ord[b]; ord[b] = ord[b-1]; ord[b-1] = t;
        end
      for (int r = 0; r < L; r++) begin
        checks += 4;
        if (int'(parent[r]) != ord[r] / 2) failures++;
        if (csel[r] != ord[r][0]) failures++;
        if (nv[r] != cv[ord[r]]) failures++;
        if (npm[r] != pm[ord[r]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
