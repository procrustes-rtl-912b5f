// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// Product of two FP32 operands, rounded to nearest even. This design supports
// normal numbers only: a zero or subnormal operand (exponent field 0) is taken
// as zero, a result below the normal range flushes to a signed zero, and one
// above it saturates to a signed infinity. NaN and infinity inputs are not
// treated specially. The paper asks only for FP32 MAC units; the
// operand handling described here is this design's choice.
module fp32_mul
  import procrustes_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  logic        s;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        g, st;
  logic [24:0] mr;
  logic signed [10:0] e;

  always_comb begin
    s    = a[31] ^ b[31];
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e    = 11'(signed'({3'b0, a[30:23]})) + 11'(signed'({3'b0, b[30:23]})) - 11'sd127;
    if (prod[47]) begin
      mant = prod[47:24];
      g    = prod[23];
      st   = |prod[22:0];
      e    = e + 11'sd1;
    end else begin
      mant = prod[46:23];
      g    = prod[22];
      st   = |prod[21:0];
    end
    mr = {1'b0, mant} + 25'((g && (st || mant[0])) ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 11'sd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0 || e <= 11'sd0) y = {s, 31'd0};
    else if (e >= 11'sd255)                                  y = {s, 8'hff, 23'd0};
    else                                                     y = {s, e[7:0], mr[22:0]};
  end
endmodule
