// tdp_pe_tb: one processing element running a whole graph on its own.
// The testbench is the network: it takes the PE's packets (refusing some at
// random to create congestion) and feeds them back into the PE in random
// order, at most one per cycle. A random layered graph (tdp_tb_pkg) is
// loaded with criticality-ordered placement, the source flags are set and
// the PE runs until idle. Checks: every node's result read back from graph
// memory equals the reference value, every node's SENT flag is set, one
// firing per computed node. A directed part then sends two operands of one
// node in consecutive cycles (exercising the forwarding path) and checks the
// result and the cycle count from the second operand to the node's first
// output packet.
module tdp_pe_tb;
  import tdp_pkg::*;
  import tdp_tb_pkg::*;

  logic clk = 0, rst_n = 0, run = 0;
  logic in_valid = 0; pkt_t in_pkt = '0;
  logic out_valid, out_ready = 0; pkt_t out_pkt;
  logic ld_we = 0, ld_set_rdy = 0; logic [11:0] ld_addr = '0; logic [39:0] ld_wdata = '0;
  logic [39:0] ld_rdata; logic ld_sent;
  logic idle, ev_fire, ev_fwd, ev_stall, ev_sent;

  tdp_pe dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  int n_fire = 0, n_fwd = 0, n_stall = 0, n_sent = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      n_fire += int'(ev_fire); n_fwd += int'(ev_fwd);
      n_stall += int'(ev_stall); n_sent += int'(ev_sent);
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // loopback network
  pkt_t net_q [$];
  bit   loop_on = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) net_q.push_back(out_pkt);
  always @(negedge clk) begin
    if (loop_on) begin
      out_ready = ($urandom % 4) != 0;
      if (net_q.size() > 0 && ($urandom % 3) != 0) begin
        automatic int k = int'($urandom % net_q.size());
        in_pkt = net_q[k]; net_q.delete(k); in_valid = 1;
      end else in_valid = 0;
    end
  end

  task automatic host_write(input int a, input logic [39:0] w);
    @(negedge clk); ld_we = 1; ld_addr = 12'(a); ld_wdata = w;
    @(negedge clk); ld_we = 0;
  endtask

  task automatic host_set(input int a);
    @(negedge clk); ld_set_rdy = 1; ld_addr = 12'(a);
    @(negedge clk); ld_set_rdy = 0;
  endtask

  task automatic host_read(input int a, output logic [39:0] w, output logic s);
    @(negedge clk); ld_addr = 12'(a); #1 s = ld_sent;
    @(negedge clk); w = ld_rdata;
  endtask

  initial begin
    graph_c g;
    logic [39:0] w; logic s; state_t st; hdr_t h; edge_t e;
    int t2, tout, n_comp;
    repeat (3) @(posedge clk);
    rst_n = 1;
    g = new(1, 1, 24, 6, 40, 1);
    $display("graph: %0d nodes, %0d edges, %0d words", g.n.size(), g.n_edges, g.max_words());
    foreach (g.loads[i]) host_write(g.loads[i].addr, g.loads[i].word);
    foreach (g.rdy_addr[i]) host_set(g.rdy_addr[i]);
    @(negedge clk);
    run = 1; loop_on = 1;
    repeat (20) @(posedge clk);
    while (!(idle && net_q.size() == 0 && !in_valid)) @(posedge clk);
    loop_on = 0; in_valid = 0; run = 0;
    n_comp = g.n.size() - g.n_src;
    chk(n_fire == n_comp, $sformatf("%0d firings for %0d computed nodes", n_fire, n_comp));
    chk(n_sent == g.n.size(), $sformatf("%0d nodes sent of %0d", n_sent, g.n.size()));
    foreach (g.n[i]) begin
      host_read(g.n[i].addr + 1, w, s);
      st = state_t'(w);
      chk(st.data == g.n[i].value, $sformatf("node %0d value %h expected %h", i, st.data, g.n[i].value));
      host_read(g.n[i].addr, w, s);
      chk(s, $sformatf("node %0d SENT flag", i));
    end
    chk(n_stall > 0, "network congestion exercised");

    // directed: two operands of one node back to back
    h  = '{rsvd: '0, fanout: 12'd1};
    st = '{present: 1'b0, slot: 1'b0, op: OP_MUL, rsvd: '0, data: '0};
    e  = '{x: 4'd0, y: 4'd0, node: 12'd3500, slot: 1'b0, rsvd: '0};
    host_write(3000, h);
    host_write(3001, st);
    host_write(3002, e);
    out_ready = 1; run = 1;
    @(negedge clk);
    in_valid = 1; in_pkt = '{x: 0, y: 0, node: 12'd3000, slot: 1'b1, rsvd: '0, data: 32'h40400000}; // 3.0
    @(negedge clk);
    in_pkt = '{x: 0, y: 0, node: 12'd3000, slot: 1'b0, rsvd: '0, data: 32'hC0000000};               // -2.0
    t2 = cyc;
    @(negedge clk);
    in_valid = 0;
    while (!out_valid) @(posedge clk);
    tout = cyc;
    chk(out_pkt.data == 32'hC0C00000 && out_pkt.node == 12'd3500, $sformatf("forwarded result %h", out_pkt.data));
    chk(tout - t2 == 9, $sformatf("second operand to first packet: %0d cycles", tout - t2));
    chk(n_fwd > 0, "forwarding exercised");
    $display("events: fire=%0d fwd=%0d stall=%0d sent=%0d", n_fire, n_fwd, n_stall, n_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
