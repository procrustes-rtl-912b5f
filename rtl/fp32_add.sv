// fp32_add: combinational IEEE-754 single-precision adder.
//
// Sum of two FP32 operands, rounded to nearest even. The larger-magnitude
// operand is aligned with the smaller one shifted right through guard, round
// and sticky bits; after an effective subtraction the result is renormalised
// with a leading-zero count. Normal numbers only: an operand with exponent
// field 0 is zero, results below the normal range flush to zero, results
// above it saturate to infinity, and an exact cancellation gives +0. These
// limits are this design's choice; the paper only specifies FP32 arithmetic.
module fp32_add
  import procrustes_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);
  fp32_t       big, sml;
  logic [7:0]  d;
  logic [26:0] mb, ms, sh;
  logic        stk;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic [26:0] nrm;
  logic [24:0] mr;
  logic signed [9:0] e;
  logic        rup;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin
      big = a; sml = b;
    end else begin
      big = b; sml = a;
    end
    d   = big[30:23] - sml[30:23];
    mb  = {1'b1, big[22:0], 3'b000};
    ms  = (sml[30:23] == 8'd0) ? 27'd0 : {1'b1, sml[22:0], 3'b000};
    // align the smaller operand, folding shifted-out bits into the sticky bit
    if (d >= 8'd27) begin
      sh  = 27'd0;
      stk = |ms;
    end else begin
      sh  = ms >> d;
      stk = |(ms & ~(27'h7ffffff << d));
    end
    sh[0] = sh[0] | stk;
    e   = 10'(signed'({2'b0, big[30:23]}));
    lz  = 5'd0;
    nrm = 27'd0;
    if (big[31] == sml[31]) sum = {1'b0, mb} + {1'b0, sh};
    else                    sum = {1'b0, mb} - {1'b0, sh};
    if (sum[27]) begin
      nrm = sum[27:1];
      nrm[0] = nrm[0] | sum[0];
      e   = e + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      nrm = sum[26:0] << lz;
      e   = e - 10'(lz);
    end
    rup = nrm[2] && (nrm[1] || nrm[0] || nrm[3]);
    mr  = {1'b0, nrm[26:3]} + 25'(rup ? 1 : 0);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'sd1;
    end
    if (big[30:23] == 8'd0)    y = 32'd0;          // both operands zero
    else if (sum[26:0] == 27'd0 && !sum[27]) y = 32'd0;  // exact cancellation
    else if (e <= 10'sd0)      y = {big[31], 31'd0};
    else if (e >= 10'sd255)    y = {big[31], 8'hff, 23'd0};
    else                       y = {big[31], e[7:0], mr[22:0]};
  end
endmodule
