// Testbench of the decoder controller (N = 64, P = 4, S_Rate-1 = 1,
// S_SPC = 2). Node Sequences are generated from two codes (one with
// single leaves forced into the tree) by the shared frame generator and
// served to the controller from a testbench array. An independent model
// lists, cycle by cycle, what the controller must issue: INIT; per node a
// COMMIT of the previous node (with its start index, stage and repetition
// flag), one control cycle, the LLR update steps (stage, word and f/g
// select) and one cycle per node phase (per fork for RATE1-1/SPC2-1);
// then the last COMMIT and SELECT, followed by done. Every cycle is
// compared with that list, and the count of cycles with the schedule.
module tb_controller;
  import fsscl_pkg::*;
  localparam int TN = 64, TP = 4, TK = 36, TS_R1 = 1, TS_SPC = 2;
  localparam logic [15:0] TCRC_POLY = 16'h1021;
  localparam int DEPTH = 2 * TN;

  `include "polar_frame_gen.svh"

  typedef struct {
    dp_op_e     op;
    int         stage;
    int         word;
    bit         sel;
    int         base;
    node_type_e ntype;
    bit         rep;
  } tr_t;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0;
  logic [$clog2(DEPTH):0] ns_len;
  node_entry_t entry, node;
  logic [$clog2(DEPTH)-1:0] ns_addr;
  dp_op_e op;
  logic [$clog2(TN)-1:0] node_base;
  logic [3:0] pe_stage, commit_stage;
  logic [$clog2(TN/TP)-1:0] pe_word;
  logic pe_sel, commit_rep, busy, done;
  tr_t trace [$];

  controller #(.N(TN), .P(TP), .DEPTH(DEPTH)) dut (.clk, .rst_n, .start, .ns_len, .entry,
    .ns_addr, .op, .node, .node_base, .pe_stage, .pe_word, .pe_sel, .commit_stage,
    .commit_rep, .busy, .done);

  always #5 clk = ~clk;
  node_entry_t nsmem [DEPTH];
  assign entry = nsmem[ns_addr];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic tr_t mt(dp_op_e o, int st, int w, bit s, int b, node_type_e nt, bit r);
    tr_t x;
    x.op = o; x.stage = st; x.word = w; x.sel = s; x.base = b; x.ntype = nt; x.rep = r;
    return x;
  endfunction

  function automatic void build_trace();
    int i, t0, tgt, d, q, pst;
    bit prep;
    trace.delete();
    trace.push_back(mt(OP_INIT, 0, 0, 0, 0, NT_RATE0, 0));
    i = 0; q = 0; pst = 0; prep = 0;
    foreach (tnodes[k]) begin
      if (k > 0) begin
        trace.push_back(mt(OP_COMMIT, pst, 0, 0, i, NT_RATE0, prep));
        i += 1 << pst;
      end
      trace.push_back(mt(OP_IDLE, 0, 0, 0, i, NT_RATE0, 0));
      if (i == 0) t0 = $clog2(TN);
      else begin
        d = i ^ (i - 1);
        for (int b = 0; b < 16; b++) if ((d >> b) & 1) t0 = b + 1;
      end
      tgt = (tnodes[k].stage == 0) ? 1 : tnodes[k].stage;
      for (int t = t0; t > tgt; t--)
        for (int w = 0; w < (((1 << (t - 1)) > TP) ? (1 << (t - 1)) / TP : 1); w++)
          trace.push_back(mt(OP_PE, t, w, 1'((i >> (t - 1)) & 1), i, NT_RATE0, 0));
      q++;  // the DESCEND entry
      while (q < tseq.size() && tseq[q].ntype != NT_DESCEND) begin
        int reps;
        reps = (tseq[q].ntype == NT_RATE1_1 || tseq[q].ntype == NT_SPC2_1) ? int'(tseq[q].size) : 1;
        for (int r = 0; r < reps; r++)
          trace.push_back(mt(OP_NODE, (tseq[q].ntype == NT_LEAF) ? 1 : 0, 0,
                             (tseq[q].ntype == NT_LEAF) ? 1'(i & 1) : 1'b0, i, tseq[q].ntype, 0));
        q++;
      end
      pst  = tnodes[k].stage;
      prep = (tnodes[k].ntype == 2);
    end
    trace.push_back(mt(OP_COMMIT, pst, 0, 0, i, NT_RATE0, prep));
    trace.push_back(mt(OP_SELECT, 0, 0, 0, i + (1 << pst), NT_RATE0, 0));
  endfunction

  task automatic run_sequence();
    int cyc, bad;
    build_trace();
    for (int a = 0; a < DEPTH; a++) nsmem[a] = (a < tseq.size()) ? tseq[a] : '0;
    ns_len = ($clog2(DEPTH)+1)'(tseq.size());
    @(negedge clk);
    start = 1'b1;
    @(posedge clk);
    @(negedge clk);
    start = 1'b0;
    cyc = 0; bad = 0;
    while (!done && cyc < 20000) begin
      if (cyc < trace.size()) begin
        tr_t x;
        x = trace[cyc];
        checks++;
        if (op != x.op) bad++;
        else begin
          case (x.op)
            OP_COMMIT: if (int'(node_base) != x.base || int'(commit_stage) != x.stage ||
                           commit_rep != x.rep) bad++;
            OP_PE: if (int'(pe_stage) != x.stage || int'(pe_word) != x.word ||
                       pe_sel != x.sel || int'(node_base) != x.base) bad++;
            OP_NODE: if (node.ntype != x.ntype || int'(node_base) != x.base ||
                         (x.ntype == NT_LEAF && (pe_stage != 4'd1 || pe_sel != x.sel))) bad++;
            OP_IDLE: if (int'(node_base) != x.base) bad++;
            default: ;
          endcase
        end
        if (!busy) bad++;
      end
      @(posedge clk);
      cyc++;
      #1;
      @(negedge clk);
    end
    failures += bad;
    checks += 2;
    if (cyc != trace.size()) begin
      failures++;
      $display("FAIL: %0d cycles, expected %0d", cyc, trace.size());
    end
    if (cyc != expected_cycles()) failures++;
    if (bad != 0) $display("FAIL: %0d cycles differ from the schedule", bad);
    repeat (2) @(negedge clk);
    checks++;
    if (busy || done) failures++;
  endtask

  initial begin
    ns_len = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    build_code();
    build_nodes();
    run_sequence();
    build_code();
    force_leaves();
    build_nodes();
    run_sequence();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
