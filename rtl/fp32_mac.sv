// fp32_mac: the PE's FP32 multiply-accumulate unit (paper Fig. 17: MAC
// followed by an output register).
//
// Each cycle with en=1 it computes acc <= acc + a*b, with the product and the
// sum each rounded to nearest even by fp32_mul and fp32_add (not a fused
// multiply-add). clr=1 in the same cycle makes the old accumulator value count
// as zero, so the first product of a new partial sum can enter without a
// bubble. The accumulated value is on acc one cycle after the operands. The
// paper gives the unit's role and precision; the two-rounding structure and
// the clear-with-enable timing are this design's choices.
module fp32_mac
  import procrustes_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  en,
  input  logic  clr,
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t acc
);
  fp32_t prod, sum, base;

  assign base = clr ? 32'd0 : acc;

  fp32_mul u_mul (.a(a),    .b(b),    .y(prod));
  fp32_add u_add (.a(base), .b(prod), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (en)  acc <= sum;
    else if (clr) acc <= '0;
  end
endmodule
