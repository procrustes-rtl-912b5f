// xorshift32: one stateless xorshift pseudo-random generator (Marsaglia).
//
// y = three rounds of x ^= x<<13; x ^= x>>17; x ^= x<<5 applied to
// x = seed + index (or to 1 if that sum is zero, since zero is the
// generator's fixed point). The integer addition matters: xorshift is linear
// over GF(2), so with seed ^ index the three generators of a WR unit would
// differ only by a constant XOR and their sum would not be Gaussian.
// Being a pure function of seed and index, it has no
// hidden state, as the paper requires of the weight recomputation unit. The
// shift triple (13,17,5) is Marsaglia's standard 32-bit one; the three rounds
// and the seed+index mixing are this design's choice.
module xorshift32 (
  input  logic [31:0] seed,
  input  logic [31:0] index,
  output logic [31:0] y
);
  function automatic logic [31:0] step(logic [31:0] x);
    logic [31:0] t;
    t = x ^ (x << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  logic [31:0] x0;
  always_comb begin
    x0 = seed + index;
    if (x0 == 32'd0) x0 = 32'd1;
    y = step(step(step(x0)));
  end
endmodule
