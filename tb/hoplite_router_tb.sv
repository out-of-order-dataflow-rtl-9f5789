// hoplite_router_tb: a 4x4 torus of routers with no PEs. First, single
// packets between random router pairs on an empty network must arrive at the
// right router after exactly (hops east + hops south + 1) cycles. Then every
// router injects random traffic at once: each packet must leave the network
// exactly once, at its destination, with deflections and refused injections
// both observed.
module hoplite_router_tb;
  import tdp_pkg::*;
  localparam int NX = 4, NY = 4, N = NX * NY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic e_v [N]; pkt_t e_p [N];
  logic s_v [N]; pkt_t s_p [N];
  logic inj_v [N]; pkt_t inj_p [N]; logic inj_r [N];
  logic x_v [N]; pkt_t x_p [N]; logic defl [N];

  for (genvar y = 0; y < NY; y++) begin : g_y
    for (genvar x = 0; x < NX; x++) begin : g_x
      localparam int I = y * NX + x;
      localparam int W = y * NX + (x + NX - 1) % NX;
      localparam int NN = ((y + NY - 1) % NY) * NX + x;
      hoplite_router #(.NX(NX), .NY(NY), .MY_X(x), .MY_Y(y)) u_r (
        .clk, .rst_n,
        .w_valid(e_v[W]), .w_pkt(e_p[W]), .n_valid(s_v[NN]), .n_pkt(s_p[NN]),
        .e_valid(e_v[I]), .e_pkt(e_p[I]), .s_valid(s_v[I]), .s_pkt(s_p[I]),
        .inj_valid(inj_v[I]), .inj_pkt(inj_p[I]), .inj_ready(inj_r[I]),
        .exit_valid(x_v[I]), .exit_pkt(x_p[I]), .ev_deflect(defl[I]));
    end
  end

  int checks = 0, failures = 0, cyc = 0;
  int n_defl = 0, n_refused = 0, n_out = 0;
  bit seen [int];
  int last_exit_cyc, last_exit_id;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (rst_n) for (int i = 0; i < N; i++) begin
      if (defl[i]) n_defl++;
      if (inj_v[i] && !inj_r[i]) n_refused++;
      if (x_v[i]) begin
        // the payload carries a unique id; x/y must name this router
        chk(int'(x_p[i].x) == i % NX && int'(x_p[i].y) == i / NX,
            $sformatf("packet %0d left at router %0d", x_p[i].data, i));
        chk(!seen.exists(int'(x_p[i].data)), $sformatf("packet %0d delivered twice", x_p[i].data));
        seen[int'(x_p[i].data)] = 1;
        n_out++;
        last_exit_cyc = cyc; last_exit_id = int'(x_p[i].data);
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int id = 0, n_sent = 0;
    foreach (inj_v[i]) begin inj_v[i] = 0; inj_p[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // isolated packets: latency check
    for (int k = 0; k < 40; k++) begin
      automatic int src = int'($urandom % N);
      automatic int dx = int'($urandom % NX), dy = int'($urandom % NY);
      automatic int hops = (dx - src % NX + NX) % NX + (dy - src / NX + NY) % NY;
      automatic int t0;
      @(negedge clk);
      inj_v[src] = 1;
      inj_p[src] = '{x: 4'(dx), y: 4'(dy), node: '0, slot: 0, rsvd: '0, data: 32'(id)};
      t0 = cyc;
      @(negedge clk);
      inj_v[src] = 0;
      repeat (NX + NY + 2) @(negedge clk);
      // hops + 1 registered stages; the monitor sees the exit one edge later
      chk(last_exit_id == id && last_exit_cyc - t0 == hops + 2,
          $sformatf("packet %0d: %0d hops took %0d cycles", id, hops, last_exit_cyc - t0));
      id++; n_sent++;
    end
    // random load from all routers
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (inj_v[i] && inj_r_q[i]) begin inj_v[i] = 0; n_sent++; end
        if (!inj_v[i] && ($urandom % 2) == 0) begin
          inj_v[i] = 1;
          inj_p[i] = '{x: 4'($urandom % NX), y: 4'($urandom % NY), node: '0, slot: 0,
                       rsvd: '0, data: 32'(id)};
          id++;
        end
      end
    end
    @(negedge clk);
    for (int i = 0; i < N; i++) if (inj_v[i] && inj_r_q[i]) n_sent++;
    foreach (inj_v[i]) inj_v[i] = 0;
    repeat (200) @(negedge clk);
    chk(n_out == n_sent, $sformatf("%0d packets out of %0d injected", n_out, n_sent));
    chk(n_defl > 0, "deflection exercised");
    chk(n_refused > 0, "injection refused under load");
    $display("deflections=%0d refused=%0d delivered=%0d", n_defl, n_refused, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ready as sampled at the last rising edge (when the injection took place)
  logic inj_r_q [N];
  always @(posedge clk) foreach (inj_r_q[i]) inj_r_q[i] <= inj_r[i] && inj_v[i];
endmodule
