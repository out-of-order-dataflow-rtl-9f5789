// fp_add: single-precision floating-point adder, the PE's ADD DSP.
//
// The paper uses an Arria 10 hard floating-point DSP block in add mode,
// configured as a single-stage pipeline. This module gives the same function
// in plain logic: y = a + b, IEEE-754 binary32, round-to-nearest-even, using
// the usual swap / align with guard-round-sticky bits / add or subtract /
// normalise / round sequence.
// Own choices where the paper is silent: subnormal inputs are read as zero and
// subnormal results flushed to zero, overflow gives infinity, NaN inputs and
// inf-inf give the quiet NaN 0x7FC00000, an exact zero difference is +0.
// Timing: in_valid/a/b sampled on a clock edge, y and out_valid registered,
// so the result appears one cycle later (one pipeline stage).
module fp_add (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        out_valid,
  output logic [31:0] y
);

  logic [31:0] res;

  always_comb begin
    logic [31:0] x, z;                  // |x| >= |z|
    logic [7:0]  ex, ez, d;
    logic [26:0] mx, mz;                // hidden bit at 26, 3 extra low bits
    logic [49:0] sh;
    logic [27:0] sum;
    logic [26:0] v;
    logic [4:0]  lz;
    logic        up;
    logic [23:0] mr;
    logic signed [9:0] e;
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    ex = x[30:23]; ez = z[30:23];
    d  = ex - ez;
    mx = {1'b1, x[22:0], 3'b000};
    // align the smaller operand; bits shifted past the round bit become sticky
    sh = {1'b1, z[22:0], 26'd0} >> ((d > 8'd31) ? 8'd31 : d);
    mz = {sh[49:24], |sh[23:0]};
    if (ez == 8'h00) mz = '0;           // zero or subnormal operand
    e = 10'(ex);
    if (x[31] == z[31]) sum = {1'b0, mx} + {1'b0, mz};
    else                sum = {1'b0, mx} - {1'b0, mz};
    if (sum[27]) begin
      v = {sum[27:2], sum[1] | sum[0]};
      e = e + 10'sd1;
    end else begin
      v = sum[26:0];
    end
    lz = '0;
    for (int i = 26; i >= 0; i--) begin
      if (v[i]) break;
      lz = lz + 5'd1;
    end
    if (lz != 5'd27) begin
      v = v << lz;
      e = e - 10'(lz);
    end
    up = v[2] & (v[1] | v[0] | v[3]);
    mr = {1'b0, v[25:3]} + 24'(up);
    if (mr[23]) e = e + 10'sd1;

    if ((ex == 8'hFF && x[22:0] != 0) || (ez == 8'hFF && z[22:0] != 0) ||
        (ex == 8'hFF && ez == 8'hFF && x[31] != z[31]))
      res = 32'h7FC0_0000;
    else if (ex == 8'hFF)
      res = {x[31], 8'hFF, 23'd0};
    else if (ex == 8'h00)
      res = 32'd0;                      // both operands zero or subnormal
    else if (lz == 5'd27)
      res = 32'd0;                      // exact cancellation
    else if (e >= 10'sd255)
      res = {x[31], 8'hFF, 23'd0};
    else if (e <= 10'sd0)
      res = {x[31], 31'd0};
    else
      res = {x[31], e[7:0], mr[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= res;
    end
  end

endmodule
