// Decoder controller: a finite state machine that walks the Node Sequence
// and tells the datapath, cycle by cycle, what to do.
//
// It tracks the leaf index i of the first bit of the current node and the
// tree stage of the LLR update in progress. For every entry:
//  * DESCEND (stage s of the next node): if a node is pending, one COMMIT
//    cycle first folds it into the beta memory and the CRC and advances i
//    by its size. Then one control cycle, followed by the LLR updates from
//    stage t0 down to stage max(s,1), where t0-1 is the highest bit in
//    which i differs from i-1 (t0 = log2 N for the first node). Stage t ->
//    t-1 takes 2^(t-1)/P cycles when 2^(t-1) > P, else one; bit t-1 of i
//    selects f (0) or g (1) in the PEs.
//  * node phases: one cycle each (OP_NODE); RATE1-1 and SPC2-1 entries
//    repeat for "size" cycles, one path fork each.
//  * after the last entry: COMMIT of the last node, one SELECT cycle, and
//    done is pulsed in the following cycle.
// The index i is advanced only at the commit, by the size of the node, so
// its update is tied to the special node's stage rather than to stage 0.
//
// The tasks (stage tracker, index update, memory selection, fork control)
// follow the design's controller; the states, the DESCEND-before-every-node
// convention and the cycle counts are this implementation's.
module controller
  import fsscl_pkg::*;
#(
  parameter int unsigned N     = 1024,
  parameter int unsigned P     = 64,
  parameter int unsigned DEPTH = 2048
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [$clog2(DEPTH):0]     ns_len,
  input  node_entry_t                entry,
  output logic [$clog2(DEPTH)-1:0]   ns_addr,
  output dp_op_e                     op,
  output node_entry_t                node,        // current phase (OP_NODE)
  output logic [$clog2(N)-1:0]       node_base,   // i
  output logic [3:0]                 pe_stage,    // stage t read by the PEs
  output logic [$clog2(N/P)-1:0]     pe_word,
  output logic                       pe_sel,      // i_s
  output logic [3:0]                 commit_stage,
  output logic                       commit_rep,
  output logic                       busy,
  output logic                       done
);
  localparam int unsigned SMAX = $clog2(N);
  localparam int unsigned LOGP = $clog2(P);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_RUN, S_DESC} state_e;

  state_e                   state;
  logic [$clog2(DEPTH):0]   e;
  logic [$clog2(N)-1:0]     i;
  logic [3:0]               t, tgt;
  logic [$clog2(N/P)-1:0]   c;
  logic [SIZE_W-1:0]        rep_cnt;
  logic                     pend, pend_rep;
  logic [3:0]               pend_stage;

  logic [3:0]               t0;
  logic                     at_end;

  assign ns_addr      = e[$clog2(DEPTH)-1:0];
  assign node         = entry;
  assign node_base    = i;
  assign commit_stage = pend_stage;
  assign commit_rep   = pend_rep;
  assign at_end       = (e >= ns_len);

  // first stage to recompute for the node that starts at i
  always_comb begin
    logic [$clog2(N)-1:0] d;
    d  = i ^ (i - 1'b1);
    t0 = 4'(SMAX);
    if (i != '0) begin
      for (int b = 0; b < SMAX; b++) if (d[b]) t0 = 4'(b + 1);
    end
  end

  // words per LLR update step of stage t -> t-1
  function automatic int unsigned n_words(input logic [3:0] ts);
    return (int'(ts) - 1 > LOGP) ? (1 << (int'(ts) - 1)) / P : 1;
  endfunction

  always_comb begin
    op       = OP_IDLE;
    pe_stage = t;
    pe_word  = c;
    pe_sel   = i[(int'(t) + SMAX - 1) % SMAX];
    unique case (state)
      S_INIT: op = OP_INIT;
      S_RUN: begin
        if (pend && (at_end || entry.ntype == NT_DESCEND)) op = OP_COMMIT;
        else if (at_end) op = OP_SELECT;
        else if (entry.ntype != NT_DESCEND) begin
          op = OP_NODE;
          if (entry.ntype == NT_LEAF) begin
            pe_stage = 4'd1;
            pe_word  = '0;
            pe_sel   = i[0];
          end
        end
      end
      S_DESC: op = OP_PE;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; e <= '0; i <= '0; t <= '0; tgt <= '0; c <= '0;
      rep_cnt <= '0; pend <= 1'b0; pend_rep <= 1'b0; pend_stage <= '0;
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_INIT; busy <= 1'b1;
          e <= '0; i <= '0; pend <= 1'b0; rep_cnt <= '0;
        end
        S_INIT: state <= S_RUN;
        S_RUN: begin
          if (op == OP_COMMIT) begin
            pend <= 1'b0;
            i    <= i + ($clog2(N))'(1 << pend_stage);
          end else if (op == OP_SELECT) begin
            state <= S_IDLE; busy <= 1'b0; done <= 1'b1;
          end else if (entry.ntype == NT_DESCEND) begin
            tgt <= (entry.stage == 0) ? 4'd1 : entry.stage;
            if (t0 > ((entry.stage == 0) ? 4'd1 : entry.stage)) begin
              state <= S_DESC; t <= t0; c <= '0;
            end else e <= e + 1'b1;
          end else begin
            pend       <= 1'b1;
            pend_stage <= entry.stage;
            pend_rep   <= (entry.ntype == NT_REP1 || entry.ntype == NT_REP2);
            if ((entry.ntype == NT_RATE1_1 || entry.ntype == NT_SPC2_1) &&
                (rep_cnt + 1'b1 < entry.size)) begin
              rep_cnt <= rep_cnt + 1'b1;
            end else begin
              rep_cnt <= '0;
              e       <= e + 1'b1;
            end
          end
        end
        S_DESC: begin
          if (32'(c) + 1 < n_words(t)) c <= c + 1'b1;
          else if (t - 1'b1 > tgt) begin t <= t - 1'b1; c <= '0; end
          else begin state <= S_RUN; e <= e + 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
