// weight_recompute (WR): regenerates a weight's initial value on demand.
//
// Dropback-style training resets pruned weights to their initial values; the
// paper recreates these values instead of storing them. Three xorshift
// generators, each seeded differently and all fed the weight index, give
// three uniform 16-bit samples (the top half of each output). Their sum,
// centred by subtracting 3*2^15, is approximately Gaussian (standard deviation
// 2^15). The integer scaling factor multiplies it into a signed 32-bit
// integer; that is converted to FP32 (round to nearest even) and read as a
// fixed-point number with FRAC_BITS fraction bits, i.e. the result is
// g * scale * 2^-FRAC_BITS. The scaling factor sets the initialisation
// spread (Xavier, Kaiming) and, by being shrunk every iteration, implements
// the initial-weight decay. A zero scale gives exactly +0.
//
// Combinational: index -> value in the same cycle. Following the paper: 3
// xorshift RNGs summed, stateless, integer scaling, FP32 conversion. This
// design's choices: 16-bit samples, 14-bit scale, the fixed-point reading and
// its FRAC_BITS default.
module weight_recompute
  import procrustes_pkg::*;
#(
  parameter int unsigned FRAC_BITS = 32
) (
  input  logic [N_RNG-1:0][31:0] seeds,
  input  logic [31:0]            index,
  input  logic [SCALE_W-1:0]     scale,
  output fp32_t                  init_w
);
  logic [N_RNG-1:0][31:0] r;

  for (genvar i = 0; i < N_RNG; i++) begin : g_rng
    xorshift32 u_rng (.seed(seeds[i]), .index(index), .y(r[i]));
  end

  logic [17:0]        usum;
  logic signed [18:0] g;
  logic signed [31:0] prod;
  logic [31:0]        mag, nrm;
  logic [4:0]         lz;
  logic [24:0]        mr;
  logic signed [9:0]  e;

  always_comb begin
    usum = '0;
    for (int i = 0; i < N_RNG; i++) usum = usum + 18'(r[i][31:16]);
    g    = signed'({1'b0, usum}) - 19'sd98304;  // 3 * 2^15
    prod = 32'(g * signed'({1'b0, scale}));
    mag  = prod[31] ? 32'(-prod) : 32'(prod);
    lz   = 5'd0;
    for (int i = 0; i < 32; i++) begin
      if (mag[i]) lz = 5'(31 - i);
    end
    nrm  = mag << lz;
    mr   = {1'b0, nrm[31:8]} + 25'((nrm[7] && ((|nrm[6:0]) || nrm[8])) ? 1 : 0);
    e    = 10'sd127 + 10'sd31 - 10'(lz) - 10'(FRAC_BITS);
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'sd1;
    end
    if (mag == 32'd0 || e <= 10'sd0) init_w = 32'd0;
    else                             init_w = {prod[31], e[7:0], mr[22:0]};
  end
endmodule
