// ooo_scheduler_tb: self-checking test of the hierarchical scheduler.
// Phase 1 loads a random set of RDY flags with run low, then runs with the
// consumer always ready: picks must come out in increasing address order
// (most critical first), each exactly once, the first 2 cycles after run
// rises and then one every 2 cycles (the 2-cycle pass). Phase 2 sets flags
// while running with a randomly stalling consumer: every node must be picked
// exactly once. SENT flags are set and read back.
module ooo_scheduler_tb;
  import tdp_pkg::*;
  localparam int N = 4096;

  logic clk = 0, rst_n = 0, run = 0;
  logic set_valid = 0; logic [11:0] set_node = '0;
  logic pick_valid, pick_ready = 0; logic [11:0] pick_node;
  logic sent_valid = 0; logic [11:0] sent_node = '0;
  logic [11:0] sent_rd_node = '0; logic sent_rd_bit;
  logic rdy_any, busy, ev_pass;

  ooo_scheduler dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit expected [N];
  bit picked   [N];
  int n_expected;
  int order [$];
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    int first_cyc, prev_cyc, prev_node, got;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // phase 1: preload 200 random flags
    n_expected = 0;
    for (int i = 0; i < 200; i++) begin
      automatic int k = 256 + ($urandom % (N - 256));
      @(negedge clk);
      set_valid = 1; set_node = k[11:0];
      if (!expected[k]) n_expected++;
      expected[k] = 1;
    end
    @(negedge clk); set_valid = 0;
    @(negedge clk);
    chk(rdy_any && !pick_valid, "flags pending and nothing picked while run is low");
    pick_ready = 1; run = 1;
    first_cyc = cyc;
    prev_cyc = -1; prev_node = -1; got = 0;
    while (got < n_expected) begin
      @(posedge clk);
      if (pick_valid) begin
        got++;
        chk(expected[pick_node], $sformatf("picked node %0d was not ready", pick_node));
        chk(!picked[pick_node], $sformatf("node %0d picked twice", pick_node));
        chk(int'(pick_node) > prev_node, $sformatf("node %0d picked after %0d", pick_node, prev_node));
        if (prev_cyc < 0) chk(cyc - first_cyc == 2, $sformatf("first pick after %0d cycles", cyc - first_cyc));
        else chk(cyc - prev_cyc == 2, $sformatf("picks %0d cycles apart", cyc - prev_cyc));
        picked[pick_node] = 1;
        prev_cyc = cyc; prev_node = int'(pick_node);
      end
    end
    @(posedge clk); @(posedge clk);
    chk(!rdy_any && !pick_valid, "all flags consumed");

    // phase 2: sets while running, random consumer stalls
    foreach (expected[k]) begin expected[k] = 0; picked[k] = 0; end
    n_expected = 0; got = 0;
    fork
      begin
        for (int i = 0; i < 400; i++) begin
          automatic int k = 256 + ($urandom % (N - 256));
          @(negedge clk);
          if (!expected[k]) begin
            set_valid = 1; set_node = k[11:0]; expected[k] = 1; n_expected++;
          end else set_valid = 0;
        end
        @(negedge clk); set_valid = 0;
      end
      begin
        forever begin
          @(negedge clk); pick_ready = ($urandom % 3) != 0;
        end
      end
      begin
        forever begin
          @(posedge clk);
          if (pick_valid && pick_ready) begin
            got++;
            chk(expected[pick_node] && !picked[pick_node],
                $sformatf("phase 2 bad pick %0d", pick_node));
            picked[pick_node] = 1;
          end
        end
      end
    join_any
    repeat (2000) @(posedge clk);
    chk(got == n_expected, $sformatf("phase 2 picked %0d of %0d", got, n_expected));
    disable fork;

    // SENT flags
    @(negedge clk); pick_ready = 0;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); sent_valid = 1; sent_node = 12'(300 + 7 * i);
    end
    @(negedge clk); sent_valid = 0;
    for (int i = 0; i < 160; i++) begin
      sent_rd_node = 12'(300 + i);
      #1;
      chk(sent_rd_bit == ((i % 7 == 0) && i < 140), $sformatf("SENT flag of %0d", 300 + i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
