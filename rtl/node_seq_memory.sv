// Node Sequence memory: holds the list of node phases that describes the
// code being decoded (which special nodes the pruned decoding tree has,
// their stage and size, and which leaves are frozen). Written once per code
// through a simple write port, read combinationally by the controller at
// address rd_addr. Changing the code means rewriting this memory, so the
// decoder can decode any polar code up to length N.
//
// The Node Sequence input and its fields follow the design; keeping it in
// an on-chip register file of DEPTH entries (2N, enough for a code with no
// special node at all: one DESCEND and one LEAF per bit) is this
// implementation's choice.
module node_seq_memory
  import fsscl_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic                       clk,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  node_entry_t                wr_data,
  input  logic [$clog2(DEPTH)-1:0]   rd_addr,
  output node_entry_t                rd_data
);
  node_entry_t mem [DEPTH];

  always_ff @(posedge clk) if (wr_en) mem[wr_addr] <= wr_data;
  assign rd_data = mem[rd_addr];
endmodule
