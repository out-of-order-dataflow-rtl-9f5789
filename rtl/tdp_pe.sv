// tdp_pe: token dataflow processing element with out-of-order scheduling.
//
// Executes the nodes of a dataflow graph stored in its local graph memory.
// There is no program counter: a node fires when both of its operands have
// arrived as packets.
//
// Receive path (accepts one packet every cycle, never stalls the network):
//   cycle 0  the packet's node state word (address node+1) is read;
//   cycle 1  if no operand is waiting, the packet's payload and slot are
//            written into the state word; if the other operand is waiting,
//            the node fires: opcode and both operands (ordered by slot) go to
//            the ALU. A packet for the node written in the cycle before uses
//            a forwarded copy of that write instead of the stale read.
//   cycle 2  the ALU result is written to the state word and the node's RDY
//            flag is set in the scheduler.
// Send path: the scheduler picks the ready node with the lowest address (the
// most critical, since the loader places nodes in decreasing criticality) in
// a 2-cycle pass; packet_gen reads its fanout list and injects one packet per
// fanout, one per cycle while the router accepts.
//
// Graph memory ports (four virtual ports of the multi-pumped BRAMs):
//   0 receive read, 1 receive write, 2 ALU write-back or host load/readback,
//   3 packet generation read.
// Host interface: while `run` is low the host writes words (ld_we), sets RDY
// flags of source nodes whose value it preloaded (ld_set_rdy), and reads
// words back (ld_addr, ld_rdata one cycle later, ld_sent at once). `idle` is high when no work
// is in flight or pending in this PE.
// Follows the paper: firing rule, ALU with add and multiply units, result
// written back to graph memory and flagged RDY, LOD-based scheduling, one
// packet in and one out per cycle. Own choices: the record layout, the port
// assignment, forwarding, the host interface.
module tdp_pe
  import tdp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // from the router (always accepted)
  input  logic              in_valid,
  input  pkt_t              in_pkt,
  // to the router
  output logic              out_valid,
  output pkt_t              out_pkt,
  input  logic              out_ready,
  // host load / readback
  input  logic              ld_we,
  input  logic              ld_set_rdy,
  input  logic [NODE_W-1:0] ld_addr,
  input  logic [WORD_W-1:0] ld_wdata,
  output logic [WORD_W-1:0] ld_rdata,
  output logic              ld_sent,     // SENT flag of ld_addr
  // status and events
  output logic              idle,
  output logic              ev_fire,     // a node fired
  output logic              ev_fwd,      // back-to-back packets to one node
  output logic              ev_stall,    // network refused a packet
  output logic              ev_sent      // all fanouts of a node sent
);

  // ---------------- graph memory ----------------
  logic              m_we    [4];
  logic [NODE_W-1:0] m_addr  [4];
  logic [WORD_W-1:0] m_wdata [4];
  logic [WORD_W-1:0] m_rdata [4];

  graph_mem u_mem (.clk, .we(m_we), .addr(m_addr), .wdata(m_wdata), .rdata(m_rdata));

  // ---------------- receive pipeline ----------------
  logic              s1_valid;
  pkt_t              s1_pkt;
  logic              fw_valid;
  logic [NODE_W-1:0] fw_node;
  state_t            fw_state;
  state_t            cur;
  logic              fire;

  // port 0: read the state word of the arriving packet's node
  assign m_we[0]    = 1'b0;
  assign m_addr[0]  = in_pkt.node + NODE_W'(1);
  assign m_wdata[0] = '0;

  assign ev_fwd = s1_valid && fw_valid && fw_node == s1_pkt.node;
  assign cur    = ev_fwd ? fw_state : state_t'(m_rdata[0]);
  assign fire   = s1_valid && cur.present;

  // port 1: park the first operand
  state_t park;
  assign park       = '{present: 1'b1, slot: s1_pkt.slot, op: cur.op, rsvd: '0,
                        data: s1_pkt.data};
  assign m_we[1]    = s1_valid && !cur.present;
  assign m_addr[1]  = s1_pkt.node + NODE_W'(1);
  assign m_wdata[1] = park;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_pkt   <= '0;
      fw_valid <= 1'b0;
      fw_node  <= '0;
      fw_state <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) s1_pkt <= in_pkt;
      fw_valid <= s1_valid;
      fw_node  <= s1_pkt.node;
      // what this cycle leaves in the state word as seen by the next packet
      fw_state <= fire ? '{present: 1'b0, slot: 1'b0, op: cur.op, rsvd: '0, data: cur.data}
                       : park;
    end
  end

  // ---------------- ALU ----------------
  logic              alu_valid;
  logic [DATA_W-1:0] alu_result;
  logic [NODE_W-1:0] alu_tag;

  tdp_alu u_alu (
    .clk, .rst_n,
    .in_valid (fire),
    .op       (cur.op),
    .a        (s1_pkt.slot ? cur.data : s1_pkt.data),
    .b        (s1_pkt.slot ? s1_pkt.data : cur.data),
    .in_tag   (s1_pkt.node),
    .out_valid(alu_valid),
    .result   (alu_result),
    .out_tag  (alu_tag)
  );
  assign ev_fire = fire;

  // port 2: ALU write-back, else host
  state_t wb;
  assign wb         = '{present: 1'b0, slot: 1'b0, op: OP_ADD, rsvd: '0, data: alu_result};
  assign m_we[2]    = alu_valid || ld_we;
  assign m_addr[2]  = alu_valid ? alu_tag + NODE_W'(1) : ld_addr;
  assign m_wdata[2] = alu_valid ? wb : ld_wdata;
  assign ld_rdata   = m_rdata[2];

  // ---------------- scheduler ----------------
  logic              pick_valid, pick_ready;
  logic [NODE_W-1:0] pick_node;
  logic              sent_valid;
  logic [NODE_W-1:0] sent_node;
  logic              rdy_any, sched_busy, ev_pass;

  ooo_scheduler u_sched (
    .clk, .rst_n, .run,
    .set_valid   (alu_valid || ld_set_rdy),
    .set_node    (alu_valid ? alu_tag : ld_addr),
    .pick_valid, .pick_ready, .pick_node,
    .sent_valid, .sent_node,
    .sent_rd_node(ld_addr),
    .sent_rd_bit (ld_sent),
    .rdy_any, .busy(sched_busy), .ev_pass
  );

  // ---------------- packet generation (port 3) ----------------
  logic pg_busy;
  assign m_we[3]    = 1'b0;
  assign m_wdata[3] = '0;

  packet_gen u_pg (
    .clk, .rst_n,
    .pick_valid, .pick_ready, .pick_node,
    .mem_addr (m_addr[3]),
    .mem_rdata(m_rdata[3]),
    .out_valid, .out_pkt, .out_ready,
    .sent_valid, .sent_node,
    .busy     (pg_busy),
    .ev_stall
  );
  assign ev_sent = sent_valid;

  assign idle = !in_valid && !s1_valid && !alu_valid && !rdy_any && !sched_busy && !pg_busy
              && !sent_valid;

  // the host may only load while the PE is not computing
  always_ff @(posedge clk) begin
    if (rst_n && alu_valid) begin
      assert (!ld_we) else $error("host write collided with ALU write-back");
    end
  end

endmodule
