// Body shared by the decoder testbenches (included inside the module after
// polar_frame_gen.svh; the includer instantiates the decoder as "dut" with
// the signals declared here and sets NFRAMES).

localparam int unsigned TD = 2 * TN;

logic clk = 1'b0, rst_n = 1'b0;
logic ch_we = 1'b0, ns_we = 1'b0, start = 1'b0;
logic [$clog2(TN/TP)-1:0] ch_waddr = '0;
logic [5:0] ch_wdata [TP];
logic [$clog2(TD)-1:0] ns_waddr = '0;
node_entry_t ns_wdata;
logic [$clog2(TD):0] ns_len = '0;
logic busy, done, crc_ok;
logic [TN-1:0] dec_word;
logic [7:0] dec_pm;

int checks = 0, failures = 0;
int cnt_type [16];
int cnt_fork = 0, cnt_switch = 0, cnt_multiword = 0, cnt_crcfail = 0, cnt_leaf_frozen = 0;
int cnt_leaf_info = 0, cnt_channel = 0, cnt_crcpick = 0, cnt_sat = 0;
logic [5:0] llr [TN];

always #5 clk = ~clk;

initial begin
  repeat (400000) @(posedge clk);
  failures++;
  $display("watchdog expired");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

// mechanism monitor
always @(posedge clk) if (rst_n) begin
  if (dut.op == OP_NODE) begin
    cnt_type[int'(dut.node.ntype)]++;
    if (dut.node.ntype == NT_LEAF) begin
      if (dut.node.frozen) cnt_leaf_frozen++; else cnt_leaf_info++;
    end
  end
  if (dut.fork_en) begin
    cnt_fork++;
    for (int l = 0; l < TL; l++) if (int'(dut.parent[l]) != l && dut.valid[dut.parent[l]]) begin
      cnt_switch++;
      break;
    end
  end
  if (dut.op == OP_PE && dut.pe_word != 0) cnt_multiword++;
  if (dut.op == OP_PE && int'(dut.pe_stage) == $clog2(TN)) cnt_channel++;
  for (int l = 0; l < TL; l++) if (dut.valid[l] && dut.pm[l] == '1) begin cnt_sat++; break; end
  if (dut.op == OP_SELECT) begin
    // a CRC-passing path chosen over a live path of smaller metric
    for (int a = 0; a < TL; a++)
      if (dut.valid[a] && dut.rem[a] == '0)
        for (int b = 0; b < TL; b++)
          if (dut.valid[b] && dut.rem[b] != '0 && dut.pm[b] < dut.pm[a]) cnt_crcpick++;
  end
end

function automatic logic [5:0] to_sm(int v);
  int m;
  m = (v < 0) ? -v : v;
  if (m > 31) m = 31;
  return {(v < 0) && (m != 0), 5'(m)};
endfunction

function automatic logic [TN-1:0] pack_v();
  logic [TN-1:0] r;
  for (int j = 0; j < TN; j++) r[j] = tv[j];
  return r;
endfunction

task automatic check(bit cond, string what);
  checks++;
  if (!cond) begin
    failures++;
    $display("FAIL: %s", what);
  end
endtask

// frame kinds: 0 clean, 1 weak errors, 2 noisy, 3 pure noise at full
// magnitude (drives the path metrics into saturation)
int mode_seq [4] = '{0, 3, 2, 1};

task automatic run_frame(int mode);
  int cyc, exp_cyc, nerr, pos, m;
  bit ok;
  bit w [TN];
  ok = make_frame();
  check(ok, "last 16 bits of the code are free for the CRC");
  for (int j = 0; j < TN; j++) begin
    m = $urandom_range(8, 31);
    if (mode == 2) m = $urandom_range(0, 31) - $urandom_range(0, 14);
    if (mode == 3) m = $urandom_range(0, 1) ? 31 : -31;
    llr[j] = to_sm(tx[j] ? -m : m);
  end
  if (mode == 1) begin
    nerr = $urandom_range(1, 3);
    for (int q = 0; q < nerr; q++) begin
      pos = $urandom_range(0, TN - 1);
      m = $urandom_range(1, 3);
      llr[pos] = to_sm(tx[pos] ? m : -m);
    end
  end
  for (int w2 = 0; w2 < TN / TP; w2++) begin
    @(negedge clk);
    ch_we = 1'b1; ch_waddr = w2[$clog2(TN/TP)-1:0];
    for (int p = 0; p < TP; p++) ch_wdata[p] = llr[w2 * TP + p];
  end
  @(negedge clk);
  ch_we = 1'b0;
  start = 1'b1;
  @(posedge clk);
  cyc = 0;
  @(negedge clk);
  start = 1'b0;
  while (!done) begin
    @(posedge clk);
    cyc++;
    #1;
  end
  exp_cyc = expected_cycles();
  check(cyc == exp_cyc, $sformatf("latency %0d cycles, expected %0d", cyc, exp_cyc));
  for (int j = 0; j < TN; j++) w[j] = dec_word[j];
  if (mode == 0) begin
    check(crc_ok, "clean frame: CRC passes");
    check(dec_word == pack_v(), "clean frame: decoded word");
    check(dec_pm == 0, "clean frame: path metric is zero");
  end else if (mode == 1) begin
    check(crc_ok && dec_word == pack_v(), "weak errors: decoded word");
  end else begin
    if (crc_ok) check(crc_bits(w, TN) == 16'h0, "noisy frame: reported CRC pass is real");
    else cnt_crcfail++;
  end
endtask

initial begin
  foreach (cnt_type[k]) cnt_type[k] = 0;
  for (int p = 0; p < TP; p++) ch_wdata[p] = '0;
  ns_wdata = '0;
  repeat (3) @(negedge clk);
  rst_n = 1'b1;
  for (int code = 0; code < 2; code++) begin
    build_code();
    if (code == 1) force_leaves();
    build_nodes();
    $display("code N=%0d K=%0d: %0d nodes, %0d Node Sequence entries", TN, TK, tnodes.size(), tseq.size());
    foreach (tseq[q]) begin
      @(negedge clk);
      ns_we = 1'b1; ns_waddr = q[$clog2(TD)-1:0]; ns_wdata = tseq[q];
    end
    @(negedge clk);
    ns_we = 1'b0;
    ns_len = ($clog2(TD)+1)'(tseq.size());
    for (int f = 0; f < NFRAMES / 2; f++) run_frame(mode_seq[f % 4]);
  end
  // every mechanism must have happened
  check(cnt_type[NT_RATE0]   > 0, "Rate-0 node seen");
  check(cnt_type[NT_RATE1_1] > 0, "RATE1-1 phase seen");
  check(cnt_type[NT_RATE1_2] > 0, "RATE1-2 phase seen");
  check(cnt_type[NT_REP1]    > 0, "REP1 phase seen");
  check(cnt_type[NT_REP2]    > 0, "REP2 phase seen");
  check(cnt_type[NT_SPC1]    > 0, "SPC1 phase seen");
  check(cnt_type[NT_SPC2_1]  > 0, "SPC2-1 phase seen");
  check(cnt_type[NT_SPC2_2]  > 0, "SPC2-2 phase seen");
  check(cnt_type[NT_SPC3]    > 0, "SPC3 phase seen");
  check(cnt_leaf_frozen > 0, "frozen leaf seen");
  check(cnt_leaf_info > 0, "information leaf seen");
  check(cnt_fork > 0, "path fork seen");
  check(cnt_switch > 0, "path switch (copy from another path) seen");
  check(cnt_multiword > 0, "multi-step LLR update seen");
  check(cnt_channel > 0, "channel memory read seen");
  check(cnt_crcfail > 0, "CRC failure fallback seen");
  check(cnt_sat > 0, "path metric saturation seen");
  $display("counts: rate0 %0d r1-1 %0d r1-2 %0d rep1 %0d rep2 %0d spc1 %0d spc2-1 %0d spc2-2 %0d spc3 %0d leafF %0d leafI %0d fork %0d switch %0d multiword %0d crcfail %0d",
    cnt_type[NT_RATE0], cnt_type[NT_RATE1_1], cnt_type[NT_RATE1_2], cnt_type[NT_REP1], cnt_type[NT_REP2],
    cnt_type[NT_SPC1], cnt_type[NT_SPC2_1], cnt_type[NT_SPC2_2], cnt_type[NT_SPC3],
    cnt_leaf_frozen, cnt_leaf_info, cnt_fork, cnt_switch, cnt_multiword, cnt_crcfail);
  $display("counts: crc-aided pick %0d metric saturation %0d", cnt_crcpick, cnt_sat);
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
