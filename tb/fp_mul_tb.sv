// fp_mul_tb: compares fp_mul with the simulator's own floating-point
// arithmetic (operands widened to double, the result rounded once to single
// precision, which is exact for these operand ranges) on directed and random
// normal operands, exact rounding ties, and checks the one-cycle latency of the pipeline stage.
module fp_mul_tb;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [31:0] a = '0, b = '0, y;
  fp_mul dut (.*);
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic logic [31:0] rnd_float();
    // normal numbers with exponents 100..154, random sign and mantissa
    return {1'($urandom), 8'(100 + $urandom % 55), 23'($urandom)};
  endfunction

  // binary32 -> binary64 bits for normal numbers and zero
  function automatic logic [63:0] f2d(input logic [31:0] f);
    if (f[30:23] == 8'h00) return {f[31], 63'd0};
    return {f[31], 11'(f[30:23]) + 11'd896, f[22:0], 29'd0};
  endfunction

  // binary64 -> binary32, round to nearest even (normal range only)
  function automatic logic [31:0] d2f(input logic [63:0] d);
    logic [10:0] e11; logic [23:0] m; logic up; logic [7:0] e8;
    if (d[62:0] == 63'd0) return 32'd0;
    e11 = d[62:52];
    up  = d[28] & ((|d[27:0]) | d[29]);
    m   = {1'b0, d[51:29]} + 24'(up);
    e8  = 8'(e11 - 11'd896) + 8'(m[23]);
    return {d[63], e8, m[22:0]};
  endfunction

  function automatic logic [31:0] ref_op(input logic [31:0] p, input logic [31:0] q);
    real r;
    r = $bitstoreal(f2d(p)) * $bitstoreal(f2d(q));
    return d2f($realtobits(r));
  endfunction

  task automatic run(input logic [31:0] p, input logic [31:0] q, input logic [31:0] e);
    @(negedge clk);
    a = p; b = q; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || y !== e) begin
      failures++;
      $display("FAIL a=%h b=%h y=%h valid=%0d exp=%h", p, q, y, out_valid, e);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(32'h3F800000, 32'h40000000, ref_op(32'h3F800000, 32'h40000000));   // 1 op 2
    run(32'h40400000, 32'hC0400000, ref_op(32'h40400000, 32'hC0400000));   // 3 op -3
    run(32'h3F800001, 32'h3F800003, ref_op(32'h3F800001, 32'h3F800003));
    run(32'h00000000, 32'h40A00000, ref_op(32'h00000000, 32'h40A00000));   // 0 op 5
    run(32'h7F7FFFFF, 32'h7F7FFFFF, 32'h7F800000);                         // overflow
    // exact ties: an odd mantissa times 1.5 lands half-way between two floats
    for (int i = 0; i < 200; i++) begin
      automatic logic [31:0] p = {1'b0, 8'd127, 23'($urandom) | 23'd1};
      run(p, 32'h3FC00000, ref_op(p, 32'h3FC00000));
    end
    for (int i = 0; i < 5000; i++) begin
      automatic logic [31:0] p = rnd_float();
      automatic logic [31:0] q = (i % 4 == 0) ? (p ^ 32'h8000_0000) + 32'($urandom % 4) : rnd_float();
      run(p, q, ref_op(p, q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
