// Testbench of the channel memory (N = 64, P = 8): random contents loaded
// word by word, then every read word checked for both halves against the
// testbench's own copy.
module tb_channel_memory;
  localparam int N = 64, P = 8, W = N / P;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [$clog2(W)-1:0] waddr = '0, rword = '0;
  logic [5:0] wdata [P], ra [P], rb [P];
  logic [5:0] ref_mem [N];

  channel_memory #(.N(N), .P(P), .Q(6)) dut (.clk, .wr_en(we), .wr_addr(waddr), .wr_data(wdata),
    .rd_word(rword), .rd_a(ra), .rd_b(rb));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 3; rep++) begin
      for (int w = 0; w < W; w++) begin
        @(negedge clk);
        we = 1; waddr = w[$clog2(W)-1:0];
        for (int p = 0; p < P; p++) begin wdata[p] = 6'($urandom_range(0, 63)); ref_mem[w*P+p] = wdata[p]; end
      end
      @(negedge clk);
      we = 0;
      for (int w = 0; w < W / 2; w++) begin
        rword = w[$clog2(W)-1:0];
        #1;
        for (int p = 0; p < P; p++) begin
          checks += 2;
          if (ra[p] != ref_mem[w*P+p]) failures++;
          if (rb[p] != ref_mem[N/2 + w*P+p]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
