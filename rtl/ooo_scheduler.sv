// ooo_scheduler: hierarchical out-of-order ready-node scheduler.
//
// Every graph-memory address has one RDY bit-flag and one SENT bit-flag.
// RDY is set when the ALU has written a node's result (or when the host
// preloads a source node); SENT is set when all fanouts of the node have been
// injected into the network. With 4096 addresses and 32 flags per word this
// is 128 RDY words and 128 SENT words: the 256-word flag region of the graph
// memory (about 6% of it) that the paper describes.
//
// Finding a ready node takes a fixed 2-cycle pass instead of a memory scan:
//   cycle 1: the OuterLOD looks at a 128-bit summary vector held in
//            registers (bit = "this RDY word is non-zero") and selects the
//            first non-zero word, which is read;
//   cycle 2: the InnerLOD finds the leading one of that 32-bit word; word
//            index and bit position give the node address. Its RDY bit is
//            cleared and the address is offered on pick_node.
// Address k maps to word k/32, bit 31-(k%32), and word w to summary bit
// 127-w, so the leading one is always the lowest ready address. Nodes are
// placed in memory in decreasing criticality, so the pick is the most critical
// ready node. Scheduling only reorders the sending of results; a node is
// picked exactly once per RDY set.
//
// Interface: set_* sets a RDY flag (one per cycle); pick_valid/pick_ready is a
// valid/ready handshake holding one picked node, and the next pass runs while
// the consumer works on the previous pick; sent_* sets a SENT flag; sent_rd_*
// reads a SENT flag combinationally. Passes start only while `run` is high.
// Follows the paper: the two-level LOD structure, widths 128/32, the 2-cycle
// pass, RDY and SENT vectors. Own choices: the bit ordering, the one-entry
// output buffer, the flags kept as a register array cleared by reset (in the
// FPGA they sit in graph-memory BRAM words and are cleared by the loader).
module ooo_scheduler
  import tdp_pkg::*;
#(
  parameter int unsigned N_NODES = MEM_WORDS,   // flagged addresses
  parameter int unsigned INNER_W = 32           // flags per memory word
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       run,
  // set a RDY flag
  input  logic                       set_valid,
  input  logic [$clog2(N_NODES)-1:0] set_node,
  // picked node
  output logic                       pick_valid,
  input  logic                       pick_ready,
  output logic [$clog2(N_NODES)-1:0] pick_node,
  // set a SENT flag
  input  logic                       sent_valid,
  input  logic [$clog2(N_NODES)-1:0] sent_node,
  // read a SENT flag
  input  logic [$clog2(N_NODES)-1:0] sent_rd_node,
  output logic                       sent_rd_bit,
  // status
  output logic                       rdy_any,
  output logic                       busy,
  output logic                       ev_pass      // a pass completed (pulse)
);

  localparam int unsigned OUTER_W = N_NODES / INNER_W;
  localparam int unsigned IW = $clog2(INNER_W);
  localparam int unsigned OW = $clog2(OUTER_W);
  localparam int unsigned AW = $clog2(N_NODES);

  logic [INNER_W-1:0] rdy_mem  [OUTER_W];
  logic [INNER_W-1:0] sent_mem [OUTER_W];
  logic [OUTER_W-1:0] outer;                  // summary vector (distributed memory)

  // pass state
  logic               stage2;                 // cycle 2 of a pass in progress
  logic [OW-1:0]      word_sel_q;
  logic [INNER_W-1:0] word_q;

  logic          outer_found;
  logic [OW-1:0] outer_pos;
  logic          inner_found;
  logic [IW-1:0] inner_pos;

  lod #(.W(OUTER_W)) u_outer_lod (.vec(outer),  .found(outer_found), .pos(outer_pos));
  lod #(.W(INNER_W)) u_inner_lod (.vec(word_q), .found(inner_found), .pos(inner_pos));

  logic start;
  assign start = run && outer_found && !stage2 && (!pick_valid || pick_ready);

  logic               clr;
  logic [INNER_W-1:0] clr_mask;
  logic [INNER_W-1:0] remaining;
  assign clr       = stage2 && inner_found;
  assign clr_mask  = {{(INNER_W-1){1'b0}}, 1'b1} << (IW'(INNER_W-1) - inner_pos);
  assign remaining = rdy_mem[word_sel_q] & ~clr_mask;

  logic [OW-1:0] set_word, sent_word;
  logic [IW-1:0] set_bit, sent_bit;
  assign set_word  = set_node[AW-1:IW];
  assign set_bit   = ~set_node[IW-1:0];       // INNER_W-1 - offset
  assign sent_word = sent_node[AW-1:IW];
  assign sent_bit  = ~sent_node[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < OUTER_W; w++) begin
        rdy_mem[w]  <= '0;
        sent_mem[w] <= '0;
      end
      outer      <= '0;
      stage2     <= 1'b0;
      word_sel_q <= '0;
      word_q     <= '0;
      pick_valid <= 1'b0;
      pick_node  <= '0;
    end else begin
      if (pick_valid && pick_ready) pick_valid <= 1'b0;
      // cycle 1: OuterLOD and word read
      stage2 <= start;
      if (start) begin
        word_sel_q <= outer_pos;
        word_q     <= rdy_mem[outer_pos];
      end
      // cycle 2: InnerLOD, clear the picked flag, offer the node
      if (clr) begin
        rdy_mem[word_sel_q][IW'(INNER_W-1) - inner_pos] <= 1'b0;
        if (remaining == '0) outer[OW'(OUTER_W-1) - word_sel_q] <= 1'b0;
        pick_valid <= 1'b1;
        pick_node  <= {word_sel_q, inner_pos};
      end
      // RDY set (after the clear so a set to the same word keeps it non-zero)
      if (set_valid) begin
        rdy_mem[set_word][set_bit] <= 1'b1;
        outer[OW'(OUTER_W-1) - set_word]  <= 1'b1;
      end
      if (sent_valid) sent_mem[sent_word][sent_bit] <= 1'b1;
    end
  end

  assign sent_rd_bit = sent_mem[sent_rd_node[AW-1:IW]][~sent_rd_node[IW-1:0]];
  assign rdy_any     = |outer;
  assign busy        = stage2 || pick_valid;
  assign ev_pass     = clr;

  // node addresses are stored as {word, offset}, so offset = pos
  // (bit INNER_W-1-pos holds offset pos)
  always_ff @(posedge clk) begin
    if (rst_n && stage2) begin
      assert (inner_found) else $error("scheduler pass read an empty flag word");
    end
  end

endmodule
