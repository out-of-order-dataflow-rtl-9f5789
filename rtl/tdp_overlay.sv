// tdp_overlay: the token dataflow overlay, NX x NY processing elements on a
// unidirectional 2D torus of Hoplite-style routers.
//
// Each tile is one tdp_pe and one hoplite_router. The PE injects its packets
// into its router (and is held back when the router cannot take them); the
// router's exit output feeds the PE's receive path, which accepts one packet
// per cycle. Router east outputs feed the next tile's west input along each
// row (x+1 mod NX), south outputs the next tile's north input along each
// column (y+1 mod NY).
//
// Host port: the host addresses one PE by (ld_x, ld_y) and, while `run` is
// low, writes graph-memory words, sets RDY flags of preloaded source nodes,
// and reads words back (ld_rdata one cycle after the address, ld_sent
// combinationally). The host, and the offline criticality labelling that
// decides where each node is placed, are outside this design.
// `idle` is high when every PE is idle and no packet is in the network.
// The ev_* outputs are one pulse per event per tile, for performance counting.
// Follows the paper: 16x16 = 256 PEs (its largest overlay), 56-bit links,
// 2D torus. Own choices: the host interface and the status outputs.
module tdp_overlay
  import tdp_pkg::*;
#(
  parameter int unsigned NX = 16,
  parameter int unsigned NY = 16,
  localparam int unsigned NPE = NX * NY
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  // host load / readback
  input  logic               ld_we,
  input  logic               ld_set_rdy,
  input  logic [COORD_W-1:0] ld_x,
  input  logic [COORD_W-1:0] ld_y,
  input  logic [NODE_W-1:0]  ld_addr,
  input  logic [WORD_W-1:0]  ld_wdata,
  output logic [WORD_W-1:0]  ld_rdata,
  output logic               ld_sent,
  // status and events
  output logic               idle,
  output logic [NPE-1:0]     ev_fire,
  output logic [NPE-1:0]     ev_fwd,
  output logic [NPE-1:0]     ev_stall,
  output logic [NPE-1:0]     ev_sent,
  output logic [NPE-1:0]     ev_deflect
);

  logic e_v [NPE]; pkt_t e_p [NPE];
  logic s_v [NPE]; pkt_t s_p [NPE];
  logic x_v [NPE]; pkt_t x_p [NPE];
  logic [WORD_W-1:0] rd   [NPE];
  logic [NPE-1:0]    sent;
  logic [NPE-1:0]    pe_idle;
  logic [NPE-1:0]    link_busy;

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int unsigned I  = y * NX + x;
      localparam int unsigned WI = y * NX + (x + NX - 1) % NX;
      localparam int unsigned NI = ((y + NY - 1) % NY) * NX + x;

      logic sel;
      logic inj_v, inj_r;
      pkt_t inj_p;

      assign sel = (ld_x == COORD_W'(x)) && (ld_y == COORD_W'(y));

      tdp_pe u_pe (
        .clk, .rst_n, .run,
        .in_valid  (x_v[I]),
        .in_pkt    (x_p[I]),
        .out_valid (inj_v),
        .out_pkt   (inj_p),
        .out_ready (inj_r),
        .ld_we     (ld_we && sel),
        .ld_set_rdy(ld_set_rdy && sel),
        .ld_addr,
        .ld_wdata,
        .ld_rdata  (rd[I]),
        .ld_sent   (sent[I]),
        .idle      (pe_idle[I]),
        .ev_fire   (ev_fire[I]),
        .ev_fwd    (ev_fwd[I]),
        .ev_stall  (ev_stall[I]),
        .ev_sent   (ev_sent[I])
      );

      hoplite_router #(.NX(NX), .NY(NY), .MY_X(x), .MY_Y(y)) u_router (
        .clk, .rst_n,
        .w_valid   (e_v[WI]), .w_pkt(e_p[WI]),
        .n_valid   (s_v[NI]), .n_pkt(s_p[NI]),
        .e_valid   (e_v[I]),  .e_pkt(e_p[I]),
        .s_valid   (s_v[I]),  .s_pkt(s_p[I]),
        .inj_valid (inj_v),   .inj_pkt(inj_p), .inj_ready(inj_r),
        .exit_valid(x_v[I]),  .exit_pkt(x_p[I]),
        .ev_deflect(ev_deflect[I])
      );

      assign link_busy[I] = e_v[I] || s_v[I] || x_v[I];
    end
  end

  // readback: data arrives one cycle after the address, so select with the
  // PE coordinates of the previous cycle
  logic [COORD_W-1:0] rd_x_q, rd_y_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_x_q <= '0;
      rd_y_q <= '0;
    end else begin
      rd_x_q <= ld_x;
      rd_y_q <= ld_y;
    end
  end

  logic [$clog2(NPE)-1:0] rd_sel, now_sel;
  always_comb begin
    rd_sel  = '0;
    now_sel = '0;
    for (int unsigned i = 0; i < NPE; i++) begin
      if (COORD_W'(i % NX) == rd_x_q && COORD_W'(i / NX) == rd_y_q) rd_sel  = ($clog2(NPE))'(i);
      if (COORD_W'(i % NX) == ld_x   && COORD_W'(i / NX) == ld_y)   now_sel = ($clog2(NPE))'(i);
    end
  end
  assign ld_rdata = rd[rd_sel];
  assign ld_sent  = sent[now_sel];

  assign idle = (&pe_idle) && !(|link_busy);

endmodule
