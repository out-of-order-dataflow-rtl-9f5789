// packet_gen: packet generation logic of a processing element.
//
// Takes one scheduled ready node at a time from the scheduler and sends its
// result to every fanout. It reads the node header (fanout count) and the
// result word, then streams the fanout edge words and turns each into a
// 56-bit packet {x, y, node, slot, result}. Reads go through one graph-memory
// port with one cycle of latency; edge reads are pipelined so that, while the
// network accepts, one packet leaves per cycle, as the paper states. When the
// network refuses a packet (congestion), the packet is held and the pending
// edge address is re-read so no state is lost. After the last packet has been
// accepted the node's SENT flag is set through sent_valid/sent_node.
// Timing per node: pick accepted, +1 header, +1 result, then one packet per
// accepted cycle; a node without fanouts only sets its SENT flag.
// Follows the paper: one packet per cycle subject to congestion, multi-cycle
// per node. Own choices: the record layout (see tdp_pkg) and the absence of
// overlap between consecutive nodes' header reads.
module packet_gen
  import tdp_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // from the scheduler
  input  logic              pick_valid,
  output logic              pick_ready,
  input  logic [NODE_W-1:0] pick_node,
  // graph memory read port
  output logic [NODE_W-1:0] mem_addr,
  input  logic [WORD_W-1:0] mem_rdata,
  // to the router
  output logic              out_valid,
  output pkt_t              out_pkt,
  input  logic              out_ready,
  // SENT flag
  output logic              sent_valid,
  output logic [NODE_W-1:0] sent_node,
  output logic              busy,
  output logic              ev_stall     // packet refused by the network
);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_VAL, S_EDGE} state_e;
  state_e state;

  logic [NODE_W-1:0]   node;
  logic [FANOUT_W-1:0] cnt, issued;
  logic [DATA_W-1:0]   value;
  logic                rd_pend;
  logic                advance;
  hdr_t                hdr;
  edge_t               edg;

  assign hdr     = hdr_t'(mem_rdata);
  assign edg     = edge_t'(mem_rdata);
  assign advance = !out_valid || out_ready;

  always_comb begin
    mem_addr = node;
    unique case (state)
      S_IDLE: mem_addr = pick_node;
      S_HDR:  mem_addr = node + NODE_W'(1);
      S_VAL:  mem_addr = node + NODE_W'(2);
      S_EDGE: mem_addr = (advance && issued < cnt) ? node + NODE_W'(2) + NODE_W'(issued)
                                                   : node + NODE_W'(1) + NODE_W'(issued);
    endcase
  end

  assign pick_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      node       <= '0;
      cnt        <= '0;
      issued     <= '0;
      value      <= '0;
      rd_pend    <= 1'b0;
      out_valid  <= 1'b0;
      out_pkt    <= '0;
      sent_valid <= 1'b0;
      sent_node  <= '0;
    end else begin
      sent_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (pick_valid) begin
          node  <= pick_node;
          state <= S_HDR;
        end
        S_HDR: begin
          cnt   <= hdr.fanout;
          state <= S_VAL;
        end
        S_VAL: begin
          value <= mem_rdata[DATA_W-1:0];
          if (cnt == '0) begin
            sent_valid <= 1'b1;
            sent_node  <= node;
            state      <= S_IDLE;
          end else begin
            issued  <= FANOUT_W'(1);
            rd_pend <= 1'b1;
            state   <= S_EDGE;
          end
        end
        S_EDGE: if (advance) begin
          if (rd_pend) begin
            out_valid <= 1'b1;
            out_pkt   <= '{x: edg.x, y: edg.y, node: edg.node, slot: edg.slot,
                           rsvd: '0, data: value};
          end else begin
            out_valid <= 1'b0;
          end
          if (issued < cnt) begin
            issued  <= issued + FANOUT_W'(1);
            rd_pend <= 1'b1;
          end else begin
            rd_pend <= 1'b0;
            if (!rd_pend) begin           // last packet accepted
              sent_valid <= 1'b1;
              sent_node  <= node;
              state      <= S_IDLE;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE) || out_valid;
  assign ev_stall = out_valid && !out_ready;

endmodule
