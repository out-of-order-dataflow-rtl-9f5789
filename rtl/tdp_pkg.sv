// tdp_pkg: types and constants shared by the token dataflow overlay.
//
// Packet (56 bits, the width of the torus links):
//   [55:52] destination x, [51:48] destination y, [47:36] destination node
//   address in the target PE's graph memory, [35] operand slot, [34:32]
//   unused, [31:0] IEEE-754 single-precision payload.
// Graph memory word (40 bits, one M20K word in 512x40 mode). A node occupies
// consecutive words starting at its header address N:
//   N+0 header : [11:0] fanout count, [39:12] unused
//   N+1 state  : [39] an operand is waiting, [38] its slot, [37:36] opcode,
//                [35:32] unused, [31:0] the waiting operand; after firing,
//                the node's result
//   N+2 ...    : one fanout edge per word: [39:36] x, [35:32] y,
//                [31:20] node address, [19] operand slot
// Every node has two operands. The first token to arrive is parked in the
// state word; the second finds it there and fires the node, so one read and
// one write of a single word per packet decide firing.
// Words 0..255 hold the bit-flags (RDY and SENT vectors); nodes start at 256.
// The 56-bit link width, the 40-bit word, the 4096-word memory and the
// 256-word flag region follow the paper; the field layout inside a packet and
// inside a word is this design's own choice.
package tdp_pkg;

  localparam int unsigned COORD_W   = 4;      // up to 16x16 PEs
  localparam int unsigned NODE_W    = 12;     // 4096 graph-memory words
  localparam int unsigned WORD_W    = 40;     // M20K in 512x40 mode
  localparam int unsigned DATA_W    = 32;     // single-precision float
  localparam int unsigned PKT_W     = 56;     // Hoplite link width
  localparam int unsigned MEM_WORDS = 1 << NODE_W;
  localparam int unsigned FLAG_WORDS = 256;   // 2 * 4096 / 32
  localparam int unsigned FANOUT_W  = 12;

  typedef enum logic [1:0] {
    OP_ADD = 2'd0,
    OP_MUL = 2'd1
  } opcode_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [NODE_W-1:0]  node;
    logic               slot;
    logic [2:0]         rsvd;
    logic [DATA_W-1:0]  data;
  } pkt_t;

  typedef struct packed {
    logic [WORD_W-FANOUT_W-1:0] rsvd;
    logic [FANOUT_W-1:0]        fanout;
  } hdr_t;

  typedef struct packed {
    logic              present;
    logic              slot;
    opcode_e           op;
    logic [3:0]        rsvd;
    logic [DATA_W-1:0] data;
  } state_t;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [NODE_W-1:0]  node;
    logic               slot;
    logic [18:0]        rsvd;
  } edge_t;

endpackage
