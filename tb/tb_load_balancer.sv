// tb_load_balancer: random half-tile densities (uniform, skewed and all
// equal). Checks that the output
// is a permutation of the half-tiles, that tile t pairs the t-th densest
// with the t-th sparsest (compared by count against an independent sort),
// that the worst tile is no worse than the unbalanced pairing (2t, 2t+1), and
// that done comes two cycles after start.
// Densest-with-sparsest pairing is the paper's; the tie order (lower index first) and the two-cycle latency are this design's own choices.
`timescale 1ns/1ps
module tb_load_balancer;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [N-1:0][4:0] cnt;
  logic [N/2-1:0][4:0] pd, ps;
  int checks = 0, failures = 0;
  int improved = 0;

  load_balancer dut (.clk, .rst_n, .start, .cnt, .done, .pair_dense(pd), .pair_sparse(ps));
  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  initial begin
    int srt [N];
    int seen [N];
    int lat, worst_b, worst_u, t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < N; i++) begin
        case (t % 4)
          0: cnt[i] = 5'($urandom % 17);
          1: cnt[i] = 5'((i < 8) ? 12 + $urandom % 5 : $urandom % 4);
          2: cnt[i] = 5'd6;
          default: cnt[i] = 5'($urandom % 10);
        endcase
      end
      // independent descending sort of the counts (insertion sort)
      for (int i = 0; i < N; i++) srt[i] = cnt[i];
      for (int i = 1; i < N; i++) begin
        int v, j;
        v = srt[i]; j = i - 1;
        while (j >= 0 && srt[j] < v) begin srt[j+1] = srt[j]; j--; end
        srt[j+1] = v;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2) fail($sformatf("latency %0d", lat));
      for (int i = 0; i < N; i++) seen[i] = 0;
      worst_b = 0; worst_u = 0;
      for (int k = 0; k < N/2; k++) begin
        seen[pd[k]]++; seen[ps[k]]++;
        checks += 2;
        if (int'(cnt[pd[k]]) != srt[k]) fail($sformatf("dense %0d", k));
        if (int'(cnt[ps[k]]) != srt[N-1-k]) fail($sformatf("sparse %0d", k));
        if (int'(cnt[pd[k]]) + int'(cnt[ps[k]]) > worst_b) worst_b = cnt[pd[k]] + cnt[ps[k]];
        if (int'(cnt[2*k]) + int'(cnt[2*k+1]) > worst_u) worst_u = cnt[2*k] + cnt[2*k+1];
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (seen[i] != 1) fail($sformatf("half-tile %0d used %0d times", i, seen[i]));
      end
      checks++;
      if (worst_b > worst_u) fail("balanced worse than unbalanced");
      if (worst_b < worst_u) improved++;
    end
    checks++;
    if (improved == 0) fail("balancing never helped");
    $display("balancing shortened the slowest tile in %0d of 400 trials", improved);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
