// hoplite_router: bufferless deflection router for a unidirectional 2D torus.
//
// Each PE sits on one router. Packets travel east along X rings and south
// along Y rings; a packet first moves east until its x matches, then south
// until its y matches, then leaves to the PE (dimension-ordered routing).
// The router has no buffers: every cycle each incoming packet gets an output.
// Arbitration, in priority order:
//   1. the north input (already on its Y ring) takes south or the PE exit;
//   2. the west input takes east, or south / exit if those are still free;
//      when they are taken it is deflected east and goes round the X ring
//      again (ev_deflect);
//   3. the PE may inject only when the output it needs is unused this cycle;
//      otherwise inj_ready is low and the PE holds the packet (congestion).
// East, south and exit outputs are registered: one cycle per hop.
// The paper names the router (56-bit Hoplite, 2D torus, one per PE) and
// cites its origin; this is a minimal router of that kind written for this
// design, and its arbitration details, the separate exit output and the
// registered exit are this design's choices.
module hoplite_router
  import tdp_pkg::*;
#(
  parameter int unsigned NX   = 16,
  parameter int unsigned NY   = 16,
  parameter int unsigned MY_X = 0,
  parameter int unsigned MY_Y = 0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic w_valid,
  input  pkt_t w_pkt,
  input  logic n_valid,
  input  pkt_t n_pkt,
  output logic e_valid,
  output pkt_t e_pkt,
  output logic s_valid,
  output pkt_t s_pkt,
  input  logic inj_valid,
  input  pkt_t inj_pkt,
  output logic inj_ready,
  output logic exit_valid,
  output pkt_t exit_pkt,
  output logic ev_deflect
);

  localparam logic [COORD_W-1:0] X = COORD_W'(MY_X);
  localparam logic [COORD_W-1:0] Y = COORD_W'(MY_Y);

  typedef enum logic [1:0] {D_E, D_S, D_X} dir_e;

  function automatic dir_e want(input pkt_t p);
    if (p.x != X)      return D_E;
    else if (p.y != Y) return D_S;
    else               return D_X;
  endfunction

  logic e_take, s_take, x_take;
  logic e_nv, s_nv, x_nv;
  pkt_t e_np, s_np, x_np;

  always_comb begin
    e_nv = 1'b0; s_nv = 1'b0; x_nv = 1'b0;
    e_np = w_pkt; s_np = n_pkt; x_np = n_pkt;
    ev_deflect = 1'b0;
    inj_ready  = 1'b0;
    // 1. north input
    if (n_valid) begin
      if (want(n_pkt) == D_X) begin x_nv = 1'b1; x_np = n_pkt; end
      else                    begin s_nv = 1'b1; s_np = n_pkt; end
    end
    // 2. west input
    if (w_valid) begin
      unique case (want(w_pkt))
        D_S: if (!s_nv) begin s_nv = 1'b1; s_np = w_pkt; end
             else begin e_nv = 1'b1; e_np = w_pkt; ev_deflect = 1'b1; end
        D_X: if (!x_nv) begin x_nv = 1'b1; x_np = w_pkt; end
             else begin e_nv = 1'b1; e_np = w_pkt; ev_deflect = 1'b1; end
        default: begin e_nv = 1'b1; e_np = w_pkt; end
      endcase
    end
    // 3. injection
    unique case (want(inj_pkt))
      D_E:     inj_ready = !e_nv;
      D_S:     inj_ready = !s_nv;
      default: inj_ready = !x_nv;
    endcase
    if (inj_valid && inj_ready) begin
      unique case (want(inj_pkt))
        D_E:     begin e_nv = 1'b1; e_np = inj_pkt; end
        D_S:     begin s_nv = 1'b1; s_np = inj_pkt; end
        default: begin x_nv = 1'b1; x_np = inj_pkt; end
      endcase
    end
  end

  assign e_take = e_nv;
  assign s_take = s_nv;
  assign x_take = x_nv;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_valid <= 1'b0; s_valid <= 1'b0; exit_valid <= 1'b0;
      e_pkt   <= '0;   s_pkt   <= '0;   exit_pkt   <= '0;
    end else begin
      e_valid    <= e_take;
      s_valid    <= s_take;
      exit_valid <= x_take;
      if (e_take) e_pkt    <= e_np;
      if (s_take) s_pkt    <= s_np;
      if (x_take) exit_pkt <= x_np;
    end
  end

endmodule
