// tdp_workload_tb: end-to-end test of the overlay with a workload-sized
// graph of about 31K nodes on the default 16x16 array, the graph size from
// which out-of-order scheduling pays off in the evaluation.
// A random layered dataflow graph (tdp_tb_pkg) is spread over all PEs, laid
// out in each PE's graph memory in decreasing criticality, loaded through the
// host port, and the sources are flagged ready. The overlay then runs until
// it reports idle. Checks: every node's result, read back through the host
// port, equals the reference value; every node's SENT flag is set; the
// number of firings equals the number of computed nodes. It counts how often
// each mechanism occurred (firing, operand forwarding inside a PE, a PE held
// back by a congested router, a deflected packet, a node fully sent) and
// counts a failure for any that never happened.
module tdp_workload_tb;
  import tdp_pkg::*;
  import tdp_tb_pkg::*;
  localparam int NX = 16, NY = 16, NPE = NX * NY;

  logic clk = 0, rst_n = 0, run = 0;
  logic ld_we = 0, ld_set_rdy = 0;
  logic [3:0] ld_x = '0, ld_y = '0;
  logic [11:0] ld_addr = '0; logic [39:0] ld_wdata = '0;
  logic [39:0] ld_rdata; logic ld_sent, idle;
  logic [NPE-1:0] ev_fire, ev_fwd, ev_stall, ev_sent, ev_deflect;

  tdp_overlay dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  longint n_fire = 0, n_fwd = 0, n_stall = 0, n_sent = 0, n_defl = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && run) begin
      n_fire += $countones(ev_fire); n_fwd  += $countones(ev_fwd);
      n_stall += $countones(ev_stall); n_sent += $countones(ev_sent);
      n_defl += $countones(ev_deflect);
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sel(input int pe);
    ld_x = 4'(pe % NX); ld_y = 4'(pe / NX);
  endtask

  initial begin
    graph_c g;
    logic [39:0] w; state_t st;
    int t_run, n_comp, nerr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    g = new(NX, NY, 1024, 6, 5000, NPE);
    $display("graph: %0d nodes, %0d edges, max %0d words in one PE", g.n.size(), g.n_edges, g.max_words());
    foreach (g.loads[i]) begin
      @(negedge clk);
      sel(g.loads[i].pe); ld_addr = 12'(g.loads[i].addr); ld_wdata = g.loads[i].word; ld_we = 1;
    end
    @(negedge clk); ld_we = 0;
    foreach (g.rdy_addr[i]) begin
      @(negedge clk);
      sel(g.rdy_pe[i]); ld_addr = 12'(g.rdy_addr[i]); ld_set_rdy = 1;
    end
    @(negedge clk); ld_set_rdy = 0; run = 1;
    t_run = cyc;
    repeat (10) @(posedge clk);
    while (!idle) @(posedge clk);
    $display("ran %0d cycles", cyc - t_run);
    @(negedge clk); run = 0;
    n_comp = g.n.size() - g.n_src;
    chk(n_fire == n_comp, $sformatf("%0d firings for %0d computed nodes", n_fire, n_comp));
    chk(n_sent == g.n.size(), $sformatf("%0d nodes sent of %0d", n_sent, g.n.size()));
    foreach (g.n[i]) begin
      @(negedge clk);
      sel(g.n[i].pe); ld_addr = 12'(g.n[i].addr + 1);
      @(negedge clk);
      st = state_t'(ld_rdata);
      checks++;
      if (st.data !== g.n[i].value) begin
        failures++;
        if (nerr++ < 10) $display("FAIL: node %0d value %h expected %h", i, st.data, g.n[i].value);
      end
      ld_addr = 12'(g.n[i].addr);
      #1;
      checks++;
      if (!ld_sent) begin
        failures++;
        if (nerr++ < 10) $display("FAIL: node %0d SENT flag clear", i);
      end
    end
    $display("events: fire=%0d forward=%0d congestion_stall=%0d deflect=%0d sent=%0d",
             n_fire, n_fwd, n_stall, n_defl, n_sent);
    chk(n_fire > 0,  "node firing never happened");
    chk(n_fwd > 0,   "operand forwarding never happened");
    chk(n_stall > 0, "congestion stall never happened");
    chk(n_defl > 0,  "router deflection never happened");
    chk(n_sent > 0,  "fanout completion never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
