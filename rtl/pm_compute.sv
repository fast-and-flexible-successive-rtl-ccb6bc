// Path-metric (PM) computation of one list path for one time step, with
// the hardware-friendly (min-sum) metrics of the design. Combinational.
//
// Inputs: the node LLRs alpha (sign-magnitude, 2^s valid entries read
// straight from the low stage memory), the leaf LLR produced by the PEs,
// the path's PM and the path's SPC registers (gamma, |alpha_min|) and the
// mask of node bits already decided. Per node type:
//   LEAF frozen : pm_next = PM + |a| if a < 0
//   LEAF info   : fork, candidate u=0: PM + |a| if a < 0,
//                       candidate u=1: PM + |a| if a >= 0
//   RATE0       : pm_next = PM + sum of |a_i| over a_i < 0   (adder tree)
//   REP2        : fork, u=0: PM + sum over a_i < 0, u=1: PM + sum over a_i >= 0
//   SPC1        : i_min = argmin |a_i| (comparator tree), gamma = XOR of the
//                 hard decisions, pm_next = PM + gamma |a_min|
//   RATE1-1     : fork on the least reliable undecided bit p: hard
//                 decision with PM, flipped bit with PM + |a_p|
//   SPC2-1      : same, flipped bit costs |a_p| + (1 - 2 gamma)|a_min|
//   REP1, RATE1-2, SPC2-2, SPC3 : PM unchanged
// Metrics saturate at the largest Q_PM value. Candidate 0 is always the
// hard decision (or u = 0), candidate 1 the other value.
//
// The formulas are the design's; computing the repetition-node sums in
// the REP2 step rather than in REP1 is this implementation's choice (the
// node LLRs are unchanged between the two steps). The "any" outputs of
// the two comparator trees stay unconnected: the Node Sequence guarantees
// at least one enabled (in-node, undecided) bit whenever a result is used.
module pm_compute
  import fsscl_pkg::*;
#(
  parameter int unsigned P    = 64,
  parameter int unsigned Q    = 6,
  parameter int unsigned Q_PM = 8
) (
  input  node_type_e           ntype,
  input  logic [3:0]           stage,
  input  logic                 leaf_frozen,
  input  logic [Q-1:0]         node_llr [P],
  input  logic [Q-1:0]         leaf_llr,
  input  logic [Q_PM-1:0]      pm,
  input  logic [P-1:0]         decided,
  input  logic                 spc_gamma,
  input  logic [Q-2:0]         spc_amin,
  output logic [Q_PM-1:0]      pm_next,       // non-fork steps
  output logic                 is_fork,
  output logic [Q_PM-1:0]      cand_pm  [2],
  output logic                 cand_bit [2],
  output logic [P-1:0]         hd,            // hard decisions of the node
  output logic [$clog2(P)-1:0] fork_pos,
  output logic [$clog2(P)-1:0] imin,
  output logic                 gamma,
  output logic [Q-2:0]         amin
);
  localparam int unsigned M  = Q - 1;
  localparam int unsigned SW = M + $clog2(P) + 1;
  localparam logic [Q_PM-1:0] PMAX = '1;

  logic [M-1:0] mag [P];
  logic [P-1:0] in_node;
  logic [SW-1:0] sum_neg, sum_pos;
  logic [M-1:0] min_all_v, min_und_v;
  logic [$clog2(P)-1:0] min_all_i, min_und_i;

  function automatic logic [Q_PM-1:0] sat_add(input logic [Q_PM-1:0] a, input logic [SW-1:0] b);
    logic [SW+Q_PM:0] s;
    s = (SW+Q_PM+1)'(a) + (SW+Q_PM+1)'(b);
    return (s > (SW+Q_PM+1)'(PMAX)) ? PMAX : s[Q_PM-1:0];
  endfunction

  always_comb begin
    for (int p = 0; p < P; p++) begin
      mag[p]     = node_llr[p][M-1:0];
      in_node[p] = (p < (1 << stage));
      hd[p]      = node_llr[p][Q-1] & in_node[p];
    end
  end

  // adder trees (written as sums; a synthesis tool builds the tree)
  always_comb begin
    sum_neg = '0;
    sum_pos = '0;
    for (int p = 0; p < P; p++) begin
      if (in_node[p] &&  node_llr[p][Q-1]) sum_neg += SW'(mag[p]);
      if (in_node[p] && !node_llr[p][Q-1]) sum_pos += SW'(mag[p]);
    end
  end

  min_search #(.P(P), .W(M)) u_min_all (
    .val(mag), .en(in_node), .min_val(min_all_v), .min_idx(min_all_i), .any());
  min_search #(.P(P), .W(M)) u_min_und (
    .val(mag), .en(in_node & ~decided), .min_val(min_und_v), .min_idx(min_und_i), .any());

  always_comb begin
    logic [M-1:0] lmag;
    logic         lneg;
    logic [SW-1:0] spc_cost;
    lmag  = leaf_llr[M-1:0];
    lneg  = leaf_llr[Q-1];
    gamma = ^hd;
    imin  = min_all_i;
    amin  = min_all_v;
    fork_pos = min_und_i;
    pm_next  = pm;
    is_fork  = 1'b0;
    cand_pm[0] = pm;  cand_bit[0] = 1'b0;
    cand_pm[1] = pm;  cand_bit[1] = 1'b1;
    spc_cost = SW'(min_und_v) + (spc_gamma ? SW'(0) - SW'(spc_amin) : SW'(spc_amin));
    unique case (ntype)
      NT_LEAF: begin
        if (leaf_frozen) pm_next = sat_add(pm, lneg ? SW'(lmag) : '0);
        else begin
          is_fork    = 1'b1;
          cand_pm[0] = sat_add(pm, lneg ? SW'(lmag) : '0);
          cand_pm[1] = sat_add(pm, lneg ? '0 : SW'(lmag));
        end
      end
      NT_RATE0: pm_next = sat_add(pm, sum_neg);
      NT_REP2: begin
        is_fork    = 1'b1;
        cand_pm[0] = sat_add(pm, sum_neg);
        cand_pm[1] = sat_add(pm, sum_pos);
      end
      NT_SPC1: pm_next = sat_add(pm, gamma ? SW'(min_all_v) : '0);
      NT_RATE1_1, NT_SPC2_1: begin
        is_fork     = 1'b1;
        cand_bit[0] = hd[min_und_i];
        cand_bit[1] = ~hd[min_und_i];
        cand_pm[1]  = sat_add(pm, (ntype == NT_RATE1_1) ? SW'(min_und_v) : spc_cost);
      end
      default: ;
    endcase
  end
endmodule
