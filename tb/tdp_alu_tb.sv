// tdp_alu_tb: fires a stream of ADD and MUL operations (back to back and with
// gaps) on exactly representable small-integer floats, so the expected values
// can be computed with integer arithmetic, and checks result, tag and the
// one-cycle latency.
module tdp_alu_tb;
  import tdp_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  opcode_e op = OP_ADD;
  logic [31:0] a = '0, b = '0, result;
  logic [11:0] in_tag = '0, out_tag;
  tdp_alu dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // float of a small signed integer (|v| < 2^24), built from its bits
  function automatic logic [31:0] i2f(input int v);
    int unsigned m; int e;
    if (v == 0) return 32'd0;
    m = (v < 0) ? -v : v;
    e = 0;
    while ((m >> e) > 1) e++;
    return {1'(v < 0), 8'(127 + e), 23'((m << (23 - e)) & 32'h7F_FFFF)};
  endfunction

  typedef struct { bit v; logic [31:0] r; logic [11:0] t; } exp_t;
  exp_t pend;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pend.v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      automatic int x = int'($urandom % 2001) - 1000;
      automatic int y = int'($urandom % 2001) - 1000;
      automatic bit fire = ($urandom % 4) != 0;
      @(negedge clk);
      // check the result of the previous cycle
      if (pend.v) begin
        checks++;
        if (!out_valid || result !== pend.r || out_tag !== pend.t) begin
          failures++;
          $display("FAIL got v=%0d r=%h t=%0d exp r=%h t=%0d", out_valid, result, out_tag, pend.r, pend.t);
        end
      end else begin
        checks++;
        if (out_valid) begin failures++; $display("FAIL spurious out_valid"); end
      end
      in_valid = fire;
      op       = ($urandom % 2) ? OP_MUL : OP_ADD;
      a        = i2f(x);
      b        = i2f(y);
      in_tag   = 12'($urandom);
      pend.v   = fire;
      pend.r   = (op == OP_MUL) ? i2f(x * y) : i2f(x + y);
      pend.t   = in_tag;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
