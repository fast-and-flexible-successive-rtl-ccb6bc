// Fast-SSCL-SPC polar list decoder (top level).
//
// Decodes one frame of a polar code of length up to N with a list of L
// paths. The code is described by the Node Sequence (loaded once through
// ns_*): the pruned decoding tree's Rate-0, Rate-1, repetition and SPC
// nodes of up to P bits, and the remaining single leaves. The N channel
// LLRs are loaded P at a time through ch_*; a start pulse decodes the
// frame and done pulses when dec_word, crc_ok and dec_pm are valid.
//
// Structure: controller -> L x P PEs (sc_decoders) working on the channel
// memory and each path's high/low stage LLR memories; per node phase the
// path-metric logic (pm_compute, one per path) either updates the metrics
// or produces 2L candidates that the sorter prunes to L, copying the
// survivors' memories (LLR, beta, path, CRC, PM) from their parents in the
// same cycle. After each node the finished bits are folded into the beta
// memory and the CRC remainders. At the end the path with the smallest
// metric among those whose CRC remainder is zero is output (the smallest
// metric overall if none passes, with crc_ok low).
//
// dec_word holds, per node, the u bits of leaves, Rate-0 and repetition
// nodes and the codeword (beta) bits of Rate-1 and SPC nodes, as the path
// memory does; the CRC is computed over that same word.
//
// Timing: one cycle per time step; LLR updates at stages with more than
// 2P LLRs take 2^(t-1)/P cycles; one commit cycle per node and one
// control cycle per DESCEND entry; a fork (PM computation, sorting and
// path copy) takes one cycle.
//
// Defaults follow the design's main configuration: N = 1024, P = 64,
// L = 2, 6-bit LLRs and 8-bit path metrics; the CRC polynomial, the
// interfaces and the per-cycle schedule are this implementation's choices.
module fsscl_decoder
  import fsscl_pkg::*;
#(
  parameter int unsigned N        = 1024,
  parameter int unsigned P        = 64,
  parameter int unsigned L        = 2,
  parameter int unsigned Q_LLR    = 6,
  parameter int unsigned Q_PM     = 8,
  parameter int unsigned CRC_W    = 16,
  parameter logic [CRC_W-1:0] CRC_POLY = 16'h1021,
  parameter int unsigned NS_DEPTH = 2 * N
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // channel LLR load
  input  logic                          ch_we,
  input  logic [$clog2(N/P)-1:0]        ch_waddr,
  input  logic [Q_LLR-1:0]              ch_wdata [P],
  // Node Sequence load
  input  logic                          ns_we,
  input  logic [$clog2(NS_DEPTH)-1:0]   ns_waddr,
  input  node_entry_t                   ns_wdata,
  input  logic [$clog2(NS_DEPTH):0]     ns_len,
  // decoding
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [N-1:0]                  dec_word,
  output logic                          crc_ok,
  output logic [Q_PM-1:0]               dec_pm
);
  localparam int unsigned SMAX = $clog2(N);
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1;

  // ---------------- controller and Node Sequence ----------------
  dp_op_e                        op;
  node_entry_t                   entry, node;
  logic [$clog2(NS_DEPTH)-1:0]   ns_addr;
  logic [$clog2(N)-1:0]          node_base;
  logic [3:0]                    pe_stage, commit_stage;
  logic [$clog2(N/P)-1:0]        pe_word;
  logic                          pe_sel, commit_rep;

  node_seq_memory #(.DEPTH(NS_DEPTH)) u_ns (
    .clk, .wr_en(ns_we), .wr_addr(ns_waddr), .wr_data(ns_wdata),
    .rd_addr(ns_addr), .rd_data(entry));

  controller #(.N(N), .P(P), .DEPTH(NS_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .ns_len, .entry, .ns_addr, .op, .node, .node_base,
    .pe_stage, .pe_word, .pe_sel, .commit_stage, .commit_rep, .busy, .done);

  // ---------------- LLR memories and PEs ----------------
  logic [Q_LLR-1:0] ch_a [P], ch_b [P];
  logic [Q_LLR-1:0] st_a [L][P], st_b [L][P];
  logic [Q_LLR-1:0] pe_a [L][P], pe_b [L][P], pe_out [L][P];
  logic [Q_LLR-1:0] node_llr [L][P];
  logic             pe_beta [L][P];

  channel_memory #(.N(N), .P(P), .Q(Q_LLR)) u_chmem (
    .clk, .wr_en(ch_we), .wr_addr(ch_waddr), .wr_data(ch_wdata),
    .rd_word(pe_word), .rd_a(ch_a), .rd_b(ch_b));

  logic              is_fork;
  logic              fork_en;
  logic [LW-1:0]     parent [L];

  llr_memory #(.N(N), .P(P), .L(L), .Q(Q_LLR)) u_llrmem (
    .clk, .rd_stage(pe_stage), .rd_word(pe_word), .rd_a(st_a), .rd_b(st_b),
    .node_stage(node.stage), .node_llr,
    .wr_en(op == OP_PE), .wr_stage(pe_stage - 4'd1), .wr_word(pe_word), .wr_data(pe_out),
    .copy_en(fork_en), .parent);

  always_comb begin
    for (int l = 0; l < L; l++)
      for (int p = 0; p < P; p++) begin
        pe_a[l][p] = (int'(pe_stage) == SMAX) ? ch_a[p] : st_a[l][p];
        pe_b[l][p] = (int'(pe_stage) == SMAX) ? ch_b[p] : st_b[l][p];
      end
  end

  sc_decoders #(.L(L), .P(P), .Q(Q_LLR)) u_pes (
    .alpha_a(pe_a), .alpha_b(pe_b), .beta_l(pe_beta), .i_s(pe_sel), .alpha_out(pe_out));

  // ---------------- beta memory ----------------
  logic [P-1:0] seg [L];
  logic [P-1:0] commit_x [L];

  always_comb begin
    for (int l = 0; l < L; l++)
      commit_x[l] = commit_rep ? (seg[l][((1 << commit_stage) - 1) % P] ? '1 : '0) : seg[l];
  end

  beta_memory #(.N(N), .P(P), .L(L)) u_beta (
    .clk, .rst_n, .rd_stage(pe_stage - 4'd1), .rd_word(pe_word), .rd_beta(pe_beta),
    .upd_en(op == OP_COMMIT), .upd_stage(commit_stage), .upd_base(node_base),
    .upd_x(commit_x), .copy_en(fork_en), .parent);

  // ---------------- path metrics and sorting ----------------
  logic [Q_PM-1:0]      pm [L], pm_next [L], new_pm [L];
  logic                 valid [L], new_valid [L], csel [L];
  logic [P-1:0]         decided [L], hd [L];
  logic [$clog2(P)-1:0] imin [L], imin_c [L], fork_pos [L];
  logic                 gamma [L], gamma_c [L];
  logic [Q_LLR-2:0]     amin [L], amin_c [L];
  logic [Q_PM-1:0]      cand_pm [L][2];
  logic                 cand_bit [L][2];
  logic                 fork_l [L];
  logic [Q_PM-1:0]      s_cand_pm [2*L];
  logic                 s_cand_valid [2*L];
  logic                 ubit [L];

  for (genvar l = 0; l < L; l++) begin : g_pm
    pm_compute #(.P(P), .Q(Q_LLR), .Q_PM(Q_PM)) u_pmc (
      .ntype(node.ntype), .stage(node.stage), .leaf_frozen(node.frozen),
      .node_llr(node_llr[l]), .leaf_llr(pe_out[l][0]), .pm(pm[l]), .decided(decided[l]),
      .spc_gamma(gamma[l]), .spc_amin(amin[l]),
      .pm_next(pm_next[l]), .is_fork(fork_l[l]), .cand_pm(cand_pm[l]), .cand_bit(cand_bit[l]),
      .hd(hd[l]), .fork_pos(fork_pos[l]), .imin(imin_c[l]), .gamma(gamma_c[l]), .amin(amin_c[l]));
  end

  assign is_fork = fork_l[0];
  assign fork_en = (op == OP_NODE) && is_fork;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      s_cand_pm[2*l]      = cand_pm[l][0];
      s_cand_pm[2*l+1]    = cand_pm[l][1];
      s_cand_valid[2*l]   = valid[l];
      s_cand_valid[2*l+1] = valid[l];
    end
  end

  sorter #(.L(L), .Q_PM(Q_PM)) u_sort (
    .cand_pm(s_cand_pm), .cand_valid(s_cand_valid),
    .parent, .csel, .new_valid, .new_pm);

  always_comb begin
    for (int l = 0; l < L; l++) ubit[l] = cand_bit[parent[l]][csel[l]];
  end

  pm_memory #(.L(L), .P(P), .Q(Q_LLR), .Q_PM(Q_PM)) u_pmmem (
    .clk, .rst_n, .init(op == OP_INIT), .clr_mask(op == OP_COMMIT),
    .upd_en((op == OP_NODE) && !is_fork), .spc1_load(node.ntype == NT_SPC1),
    .fork_en, .mark_fork(node.ntype == NT_RATE1_1 || node.ntype == NT_SPC2_1),
    .pm_next, .imin_in(imin_c), .gamma_in(gamma_c), .amin_in(amin_c), .fork_pos,
    .parent, .new_pm, .new_valid,
    .pm, .valid, .decided, .imin, .gamma, .amin);

  // ---------------- path memory and CRC ----------------
  logic [N-1:0]     word [L];
  logic [CRC_W-1:0] rem [L];

  path_memory #(.N(N), .P(P), .L(L)) u_path (
    .clk, .wr_en(op == OP_NODE), .wr_type(node.ntype), .base(node_base),
    .stage((op == OP_COMMIT) ? commit_stage : node.stage),
    .hd, .decided, .fork_pos, .imin, .ubit, .copy_en(fork_en), .parent,
    .seg, .word);

  crc_unit #(.L(L), .P(P), .CRC_W(CRC_W), .POLY(CRC_POLY)) u_crc (
    .clk, .rst_n, .init(op == OP_INIT), .upd_en(op == OP_COMMIT),
    .upd_n(($clog2(P)+1)'(1 << commit_stage)), .upd_bits(seg),
    .copy_en(fork_en), .parent, .rem);

  // ---------------- output selection ----------------
  logic [LW-1:0]        sel_best;
  logic                 sel_found;

  always_comb begin
    sel_best  = '0;
    sel_found = 1'b0;
    for (int l = 0; l < L; l++)
      if (valid[l] && rem[l] == '0 && (!sel_found || pm[l] < pm[sel_best])) begin
        sel_best  = LW'(l);
        sel_found = 1'b1;
      end
    if (!sel_found)
      for (int l = 0; l < L; l++)
        if (valid[l] && pm[l] < pm[sel_best]) sel_best = LW'(l);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dec_word <= '0; crc_ok <= 1'b0; dec_pm <= '0;
    end else if (op == OP_SELECT) begin
      dec_word <= word[sel_best];
      crc_ok   <= sel_found;
      dec_pm   <= pm[sel_best];
    end
  end
endmodule
