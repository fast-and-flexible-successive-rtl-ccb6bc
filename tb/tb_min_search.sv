// Testbench of the comparator tree: random values and enable masks
// (P = 16, 5-bit values, many ties), compared with a linear search that
// keeps the first smallest enabled entry.
module tb_min_search;
  localparam int P = 16, W = 5;
  int checks = 0, failures = 0;
  logic [W-1:0] val [P];
  logic [P-1:0] en;
  logic [W-1:0] mv;
  logic [$clog2(P)-1:0] mi;
  logic any;

  min_search #(.P(P), .W(W)) dut (.val, .en, .min_val(mv), .min_idx(mi), .any);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int bi, bv;
    for (int it = 0; it < 3000; it++) begin
      for (int p = 0; p < P; p++) val[p] = W'($urandom_range(0, (it % 2) ? 31 : 3));
      en = P'($urandom);
      if (it % 7 == 0) en = '1;
      #1;
      bi = -1; bv = 0;
      for (int p = 0; p < P; p++)
        if (en[p] && (bi < 0 || int'(val[p]) < bv)) begin bi = p; bv = int'(val[p]); end
      checks++;
      if (any != (bi >= 0)) failures++;
      if (bi >= 0) begin
        checks += 2;
        if (int'(mv) != bv) failures++;
        if (int'(mi) != bi) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
