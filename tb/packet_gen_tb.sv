// packet_gen_tb: a registered-read memory model holds a few node records;
// the testbench offers their addresses as picks and compares every emitted
// packet, in order, with the record's fanout list and result value, once with
// a network that always accepts (checking one packet per cycle and the cycle
// count per node) and once with random refusals (checking that nothing is
// lost or duplicated). It also checks each node's SENT pulse.
module packet_gen_tb;
  import tdp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic pick_valid = 0, pick_ready; logic [11:0] pick_node = '0;
  logic [11:0] mem_addr; logic [39:0] mem_rdata;
  logic out_valid, out_ready = 0; pkt_t out_pkt;
  logic sent_valid; logic [11:0] sent_node; logic busy, ev_stall;
  packet_gen dut (.*);
  always #5 clk = ~clk;

  logic [39:0] mem [4096];
  always_ff @(posedge clk) mem_rdata <= mem[mem_addr];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;
  pkt_t exp_q [$];
  int   sent_q [$];
  int   n_stall = 0;
  always @(posedge clk) if (ev_stall) n_stall++;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic make_node(input int base, input int fo, input logic [31:0] val);
    hdr_t h; edge_t e; pkt_t p;
    h = '{fanout: 12'(fo), rsvd: '0};
    mem[base] = h; mem[base+1] = {8'd0, val};
    for (int i = 0; i < fo; i++) begin
      e = '{x: 4'($urandom), y: 4'($urandom), node: 12'($urandom), slot: 1'($urandom), rsvd: '0};
      mem[base+2+i] = e;
      p = '{x: e.x, y: e.y, node: e.node, slot: e.slot, rsvd: '0, data: val};
      exp_q.push_back(p);
    end
    sent_q.push_back(base);
  endtask

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      chk(exp_q.size() > 0 && out_pkt == exp_q[0], $sformatf("packet %h", out_pkt));
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
    if (rst_n && sent_valid) begin
      chk(sent_q.size() > 0 && int'(sent_node) == sent_q[0], $sformatf("sent %0d expected %0d at cycle %0d", sent_node, sent_q.size() ? sent_q[0] : -1, cyc));
      if (sent_q.size() > 0) void'(sent_q.pop_front());
    end
  end

  task automatic pick(input int node);
    @(negedge clk);
    while (!pick_ready) @(negedge clk);
    pick_valid = 1; pick_node = 12'(node);
    @(negedge clk);
    pick_valid = 0;
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, first, last;
    foreach (mem[i]) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // always-accepting network: 20 fanouts go out in 20 consecutive cycles
    out_ready = 1;
    make_node(400, 20, 32'h4049_0FDB);
    t0 = cyc; first = -1; last = -1;
    fork
      pick(400);
      begin
        while (exp_q.size() > 0) begin
          @(posedge clk);
          if (out_valid) begin if (first < 0) first = cyc; last = cyc; end
        end
      end
    join
    chk(last - first == 19, $sformatf("20 packets over %0d cycles", last - first + 1));
    chk(first - t0 <= 6, $sformatf("first packet %0d cycles after pick", first - t0));
    repeat (3) @(posedge clk);
    // node with no fanouts, then nodes under random congestion
    make_node(300, 0, 32'h3F80_0000);
    pick(300);
    repeat (4) @(posedge clk);
    chk(sent_q.size() == 0, "fanout-free node reported sent");
    fork
      forever begin @(negedge clk); out_ready = ($urandom % 3) == 0; end
      begin
        for (int n = 0; n < 30; n++) begin
          automatic int base = 512 + n * 40;
          make_node(base, 1 + ($urandom % 30), $urandom);
          pick(base);
        end
        while (exp_q.size() > 0 || sent_q.size() > 0) @(posedge clk);
      end
    join_any
    disable fork;
    chk(n_stall > 0, "congestion was exercised");
    chk(!busy || !out_valid, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
