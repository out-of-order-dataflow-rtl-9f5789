// graph_mem_tb: random reads and writes on all four ports of the graph
// memory, compared with a reference array. Checks the one-cycle read latency,
// read-before-write in a cycle, and that the highest-numbered port wins a
// write collision. Every word is written first so nothing uninitialised is read.
module graph_mem_tb;
  import tdp_pkg::*;
  localparam int NP = 4, D = 4096;
  logic clk = 0;
  logic we [NP]; logic [11:0] addr [NP]; logic [39:0] wdata [NP]; logic [39:0] rdata [NP];
  graph_mem dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [39:0] model [D];
  logic [39:0] exp_rd [NP];
  bit          exp_v  [NP];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (we[p]) begin we[p] = 0; addr[p] = '0; wdata[p] = '0; exp_v[p] = 0; end
    // fill through all ports
    for (int a = 0; a < D; a += NP) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        we[p] = 1; addr[p] = 12'(a + p); wdata[p] = {$urandom, $urandom} ; model[a+p] = wdata[p];
      end
    end
    @(negedge clk);
    foreach (we[p]) we[p] = 0;
    // random traffic, concentrated on a few addresses to make collisions
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        if (exp_v[p]) begin
          checks++;
          if (rdata[p] !== exp_rd[p]) begin
            failures++; $display("FAIL port %0d rdata=%h exp=%h", p, rdata[p], exp_rd[p]);
          end
        end
      end
      for (int p = 0; p < NP; p++) begin
        we[p]    = ($urandom % 2) == 1;
        addr[p]  = (n % 2 == 0) ? 12'($urandom % 8) : 12'($urandom);
        wdata[p] = {$urandom, $urandom};
        exp_v[p] = !we[p];
        exp_rd[p] = model[addr[p]];            // value before this cycle's writes
      end
      for (int p = 0; p < NP; p++) if (we[p]) model[addr[p]] = wdata[p];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
