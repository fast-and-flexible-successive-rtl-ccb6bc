// Testbench of the Node Sequence memory (64 entries): random entries
// written at every address in a random order, then read back at every
// address and compared.
module tb_node_seq_memory;
  import fsscl_pkg::*;
  localparam int D = 64;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0, raddr = '0;
  node_entry_t wdata, rdata;
  node_entry_t ref_m [D];

  node_seq_memory #(.DEPTH(D)) dut (.clk, .wr_en(we), .wr_addr(waddr), .wr_data(wdata),
    .rd_addr(raddr), .rd_data(rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int perm [D];
    for (int k = 0; k < D; k++) perm[k] = k;
    perm.shuffle();
    wdata = '0;
    for (int rep = 0; rep < 2; rep++) begin
      foreach (perm[k]) begin
        @(negedge clk);
        we = 1; waddr = 6'(perm[k]);
        wdata = node_entry_t'($urandom);
        wdata.ntype = node_type_e'($urandom_range(0, 10));
        ref_m[perm[k]] = wdata;
      end
      @(negedge clk);
      we = 0;
      for (int a = 0; a < D; a++) begin
        raddr = 6'(a);
        #1;
        checks++;
        if (rdata != ref_m[a]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
