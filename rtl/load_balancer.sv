// load_balancer: pairs dense and sparse half-tiles into balanced work tiles
// (paper Sec. IV-C, Fig. 12).
//
// Input: the packed sizes (non-zero counts) of N_HALF half-tiles, which the
// controller obtains by subtracting adjacent CSB pointers. The unit sorts
// them by density and matches them from opposite ends: the densest with the
// sparsest, the second densest with the second sparsest, and so on, so that
// each of the N_HALF/2 new work tiles is as close as possible to the average
// density. pair_dense[t] and pair_sparse[t] are the half-tile indices that
// form tile t (tile 0 holds the densest half-tile).
//
// Implementation: the sort is a rank computation, every count compared with
// every other in one cycle (ties broken by index, so the order is total);
// the second cycle inverts the ranks into the sorted order and forms the
// pairs. A pulse on start gives a done pulse two cycles later with the pairs
// held until the next start. The pairing rule is the paper's; the rank-based
// sort and the timing are this design's choice.
module load_balancer #(
  parameter int unsigned N_HALF = 32,
  parameter int unsigned CNT_W  = 5,
  parameter int unsigned IW     = $clog2(N_HALF)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [N_HALF-1:0][CNT_W-1:0]  cnt,
  output logic                          done,
  output logic [N_HALF/2-1:0][IW-1:0]   pair_dense,
  output logic [N_HALF/2-1:0][IW-1:0]   pair_sparse
);
  logic [N_HALF-1:0][IW-1:0] rank, rank_q, order;
  logic                      st1;

  // rank[i] = number of half-tiles denser than i (earlier index wins ties)
  always_comb begin
    for (int i = 0; i < N_HALF; i++) begin
      rank[i] = '0;
      for (int j = 0; j < N_HALF; j++) begin
        if (cnt[j] > cnt[i] || (cnt[j] == cnt[i] && j < i)) rank[i] = rank[i] + 1'b1;
      end
    end
    order = '0;
    for (int i = 0; i < N_HALF; i++) order[rank_q[i]] = IW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rank_q      <= '0;
      st1         <= 1'b0;
      done        <= 1'b0;
      pair_dense  <= '0;
      pair_sparse <= '0;
    end else begin
      st1  <= start;
      done <= st1;
      if (start) rank_q <= rank;
      if (st1) begin
        for (int t = 0; t < N_HALF / 2; t++) begin
          pair_dense[t]  <= order[t];
          pair_sparse[t] <= order[N_HALF - 1 - t];
        end
      end
    end
  end
endmodule
