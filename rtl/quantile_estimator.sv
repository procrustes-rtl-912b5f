// quantile_estimator (QE): threshold selection of accumulated gradients on
// the global-buffer -> DRAM path (paper Sec. III-B, Alg. 3, Sec. V).
//
// Instead of sorting all accumulated gradients to keep the largest, the QE
// keeps a running estimate theta of the q-th quantile of their magnitudes and
// discards every gradient whose magnitude is not above it. The estimate is
// DUMIQUE's multiplicative update, applied once per group of four gradients to
// their mean magnitude d (the paper's four-per-cycle variant):
//   theta < d :  theta <- theta * (1 + rho*q)
//   otherwise :  theta <- theta * (1 - rho*(1-q))
// with theta(0) = 1e-6 and rho = 1e-3 as in the paper. QUANTILE defaults to
// 1 - 1/7.5, the 7.5x sparsity target the paper uses with VGG-S.
//
// Interface: each cycle in_valid may present four lanes (in_lane_valid,
// in_data, in_index). One cycle later out_valid/out_data/out_index appear with
// out_keep[l] set for every valid lane that survives. With filter=0 the QE is
// a pass-through (all valid lanes kept, theta untouched), used when a region
// that is not gradients (activations, partial sums) is written back. theta is
// updated only for groups whose four lanes are all valid, one cycle after
// the group; the comparison of a group uses theta as it was when that group
// arrived. There is no back-pressure: the sender must make sure the output
// can be accepted. The eviction of the lowest tracked entry that the paper
// describes for the tracked set is not part of this unit. Arithmetic is FP32
// (fp32_add, fp32_mul), and magnitudes are compared as unsigned integers,
// which orders non-negative floats correctly.
module quantile_estimator
  import procrustes_pkg::*;
#(
  parameter real QUANTILE = 1.0 - 1.0 / 7.5,
  parameter real RHO      = 1.0e-3,
  parameter real Q_INIT   = 1.0e-6
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   filter,
  input  logic                   in_valid,
  input  logic [3:0]             in_lane_valid,
  input  fp32_t [3:0]            in_data,
  input  logic [31:0]            in_index,   // index of lane 0; lane l is in_index + l
  output logic                   out_valid,
  output logic [3:0]             out_keep,
  output fp32_t [3:0]            out_data,
  output logic [31:0]            out_index,
  output fp32_t                  theta
);
  localparam fp32_t UP    = real_to_fp32(1.0 + RHO * QUANTILE);
  localparam fp32_t DOWN  = real_to_fp32(1.0 - RHO * (1.0 - QUANTILE));
  localparam fp32_t THETA0 = real_to_fp32(Q_INIT);

  fp32_t [3:0] mag;
  fp32_t       s01, s23, s4;
  logic [30:0] avg;                   // mean magnitude of the group (positive)
  always_comb begin
    for (int l = 0; l < 4; l++) mag[l] = {1'b0, in_data[l][30:0]};
  end
  fp32_add u_a01 (.a(mag[0]), .b(mag[1]), .y(s01));
  fp32_add u_a23 (.a(mag[2]), .b(mag[3]), .y(s23));
  fp32_add u_a4  (.a(s01),    .b(s23),    .y(s4));
  // divide by four: exponent minus two (zero and tiny sums flush to zero)
  assign avg = (!s4[31] && s4[30:23] > 8'd2) ? {s4[30:23] - 8'd2, s4[22:0]} : 31'd0;

  logic  upd;
  logic [30:0] avg_q;                 // mean magnitude (sign is always 0)
  fp32_t factor, theta_nx;
  assign factor = (theta[30:0] < avg_q[30:0]) ? UP : DOWN;
  fp32_mul u_mul (.a(theta), .b(factor), .y(theta_nx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta     <= THETA0;
      upd       <= 1'b0;
      avg_q     <= '0;
      out_valid <= 1'b0;
      out_keep  <= '0;
      out_data  <= '0;
      out_index <= '0;
    end else begin
      upd       <= in_valid && filter && (&in_lane_valid);
      avg_q     <= avg;
      if (upd) theta <= theta_nx;
      out_valid <= in_valid;
      out_data  <= in_data;
      out_index <= in_index;
      for (int l = 0; l < 4; l++)
        out_keep[l] <= in_valid && in_lane_valid[l] && (!filter || (mag[l][30:0] > theta[30:0]));
    end
  end
endmodule
