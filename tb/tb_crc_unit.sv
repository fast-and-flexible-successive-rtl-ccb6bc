// Testbench of the CRC unit (L = 2, P = 8): the standard check value of
// CRC-16 with polynomial 0x1021 and zero initial value over the ASCII
// string "123456789" (0x31C3), fed in chunks of random size 1..8; random
// bit streams in random chunk sizes on both paths against a bit-serial
// reference; and path copies.
module tb_crc_unit;
  localparam int L = 2, P = 8;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, init = 0, upd_en = 0, copy_en = 0;
  logic [3:0] upd_n = 1;
  logic [P-1:0] bits [L];
  logic [0:0] parent [L];
  logic [15:0] rem [L];
  logic [15:0] ref_r [L];

  crc_unit #(.L(L), .P(P)) dut (.clk, .rst_n, .init, .upd_en, .upd_n, .upd_bits(bits),
    .copy_en, .parent, .rem);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] step(logic [15:0] r, logic b);
    logic fb;
    fb = r[15] ^ b;
    return {r[14:0], 1'b0} ^ (fb ? 16'h1021 : 16'h0);
  endfunction

  initial begin
    byte unsigned msg [9] = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38, 8'h39};
    bit stream [72];
    int pos, n;
    for (int l = 0; l < L; l++) parent[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 72; k++) stream[k] = msg[k / 8][7 - (k % 8)];
    for (int trial = 0; trial < 5; trial++) begin
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      pos = 0;
      while (pos < 72) begin
        n = $urandom_range(1, P);
        if (pos + n > 72) n = 72 - pos;
        upd_en = 1; upd_n = 4'(n);
        for (int l = 0; l < L; l++) begin
          bits[l] = '0;
          for (int b = 0; b < n; b++) bits[l][b] = stream[pos + b];
        end
        @(negedge clk);
        pos += n;
      end
      upd_en = 0;
      #1;
      for (int l = 0; l < L; l++) begin checks++; if (rem[l] != 16'h31C3) failures++; end
    end
    // random streams, per-path data, with copies
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int l = 0; l < L; l++) ref_r[l] = '0;
    for (int it = 0; it < 400; it++) begin
      if ($urandom_range(0, 4) == 0) begin
        logic [15:0] t [L];
        copy_en = 1; upd_en = 0;
        for (int l = 0; l < L; l++) parent[l] = 1'($urandom_range(0, 1));
        t = ref_r;
        for (int l = 0; l < L; l++) ref_r[l] = t[parent[l]];
      end else begin
        copy_en = 0; upd_en = 1;
        n = $urandom_range(1, P);
        upd_n = 4'(n);
        for (int l = 0; l < L; l++) begin
          bits[l] = P'($urandom);
          for (int b = 0; b < n; b++) ref_r[l] = step(ref_r[l], bits[l][b]);
        end
      end
      @(negedge clk);
      copy_en = 0; upd_en = 0;
      #1;
      for (int l = 0; l < L; l++) begin checks++; if (rem[l] != ref_r[l]) failures++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
