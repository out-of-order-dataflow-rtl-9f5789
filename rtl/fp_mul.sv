// fp_mul: single-precision floating-point multiplier, the PE's MULTIPLY DSP.
//
// The paper uses an Arria 10 hard floating-point DSP block in multiply mode,
// configured as a single-stage pipeline. This module gives the same function
// in plain logic: y = a * b, IEEE-754 binary32 with round-to-nearest-even.
// Own choices where the paper is silent: subnormal inputs are read as zero and
// subnormal results flushed to zero, overflow gives infinity, a NaN or
// inf*0 gives the quiet NaN 0x7FC00000.
// Timing: in_valid/a/b sampled on a clock edge, y and out_valid registered,
// so the result appears one cycle later (one pipeline stage).
module fp_mul (
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
    logic        sa, sb, s;
    logic [7:0]  ea, eb;
    logic [23:0] ma, mb;
    logic [47:0] prod;
    logic [22:0] mant;
    logic        g, st, up;
    logic [23:0] mr;
    logic signed [10:0] e;
    sa = a[31]; sb = b[31]; s = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]}; mb = {1'b1, b[22:0]};
    prod = ma * mb;
    if (prod[47]) begin
      mant = prod[46:24]; g = prod[23]; st = |prod[22:0];
      e = 11'(ea) + 11'(eb) - 11'sd126;
    end else begin
      mant = prod[45:23]; g = prod[22]; st = |prod[21:0];
      e = 11'(ea) + 11'(eb) - 11'sd127;
    end
    up = g & (st | mant[0]);
    mr = {1'b0, mant} + 24'(up);
    if (mr[23]) e = e + 11'sd1;
    if ((ea == 8'hFF && (a[22:0] != 0 || eb == 8'h00)) ||
        (eb == 8'hFF && (b[22:0] != 0 || ea == 8'h00)))
      res = 32'h7FC0_0000;                       // NaN, or inf * 0
    else if (ea == 8'hFF || eb == 8'hFF)
      res = {s, 8'hFF, 23'd0};                   // infinity
    else if (ea == 8'h00 || eb == 8'h00)
      res = {s, 31'd0};                          // zero (subnormals flushed)
    else if (e >= 11'sd255)
      res = {s, 8'hFF, 23'd0};                   // overflow
    else if (e <= 11'sd0)
      res = {s, 31'd0};                          // underflow, flushed
    else
      res = {s, e[7:0], mr[22:0]};
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
