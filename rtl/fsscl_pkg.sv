// Shared types of the Fast-SSCL-SPC list decoder.
//
// Node Sequence: the decoder is programmed with a list of entries, one per
// decoding phase of each constituent node of the pruned polar-code tree
// (node types and fields as in the Node Sequence tables of the design:
// type, stage, size, frozen). DESCEND entries carry the stage of the next
// node and make the controller walk the tree down to it. The numeric
// encoding of the types and the field widths are this design's own choice.
//
// LLRs are sign-magnitude words (MSB = sign, remaining bits = magnitude),
// path metrics are unsigned saturating words.
package fsscl_pkg;

  typedef enum logic [3:0] {
    NT_RATE0   = 4'd0,
    NT_RATE1_1 = 4'd1,   // one path fork on the least reliable undecided bit
    NT_RATE1_2 = 4'd2,   // hard decision on all remaining bits
    NT_REP1    = 4'd3,   // the 2^s-1 frozen bits of a repetition node
    NT_REP2    = 4'd4,   // the information bit of a repetition node (fork)
    NT_DESCEND = 4'd5,   // walk the tree down to the next node
    NT_LEAF    = 4'd6,   // single bit at stage 0 (frozen or information)
    NT_SPC1    = 4'd7,   // least reliable bit search, parity, PM init
    NT_SPC2_1  = 4'd8,   // one path fork on the least reliable undecided bit
    NT_SPC2_2  = 4'd9,   // hard decision on all remaining bits
    NT_SPC3    = 4'd10   // parity correction of the least reliable bit
  } node_type_e;

  localparam int unsigned STAGE_W = 4;
  localparam int unsigned SIZE_W  = 11;

  typedef struct packed {
    node_type_e               ntype;
    logic [STAGE_W-1:0]       stage;
    logic [SIZE_W-1:0]        size;
    logic                     frozen;
  } node_entry_t;

  // What the datapath does in a given cycle.
  typedef enum logic [2:0] {
    OP_IDLE   = 3'd0,
    OP_INIT   = 3'd1,   // reset path metrics, CRC remainders, path validity
    OP_PE     = 3'd2,   // one LLR update step (f or g) of the tree descent
    OP_NODE   = 3'd3,   // one time step of a node phase
    OP_COMMIT = 3'd4,   // fold the finished node into beta memory and CRC
    OP_SELECT = 3'd5    // pick the output path
  } dp_op_e;

endpackage
