// tb_quantile_estimator: two instances of the QE.
//  * dut (paper's rho = 1e-3): random gradient groups, some with invalid
//    lanes, some with filtering off. theta is checked every cycle against a
//    reference recurrence in double precision rounded to FP32 at each
//    operation (mean of four magnitudes, multiplicative DUMIQUE step with the
//    update landing two cycles after the group), and every keep flag
//    against |g| > theta as it was when the group arrived.
//  * fast (rho = 0.02): fed groups whose four lanes are equal and uniform in
//    [0,1); theta must settle near the 0.8667 quantile and about 13% of the
//    values must survive, the 7.5x target.
`timescale 1ns/1ps
module tb_quantile_estimator;
  import fp_ref_pkg::*;
  localparam real Q = 1.0 - 1.0 / 7.5;
  logic clk = 0, rst_n = 0;
  logic filter = 1, in_valid = 0;
  logic [3:0] lv = 0;
  logic [3:0][31:0] din = '0;
  logic [31:0] idx = 0;
  logic ov; logic [3:0] keep; logic [3:0][31:0] od; logic [31:0] oi; logic [31:0] theta;
  logic fin_valid = 0; logic [3:0][31:0] fdin = '0;
  logic fov; logic [3:0] fkeep; logic [3:0][31:0] fod; logic [31:0] foi; logic [31:0] ftheta;
  int checks = 0, failures = 0;

  quantile_estimator dut (.clk, .rst_n, .filter, .in_valid, .in_lane_valid(lv), .in_data(din),
    .in_index(idx), .out_valid(ov), .out_keep(keep), .out_data(od), .out_index(oi), .theta(theta));
  quantile_estimator #(.RHO(0.02)) fast (.clk, .rst_n, .filter(1'b1), .in_valid(fin_valid),
    .in_lane_valid(4'hf), .in_data(fdin), .in_index(32'd0), .out_valid(fov), .out_keep(fkeep),
    .out_data(fod), .out_index(foi), .theta(ftheta));
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string m);
    failures++;
    if (failures < 10) $display("FAIL %s", m);
  endtask

  function automatic logic [31:0] absf(logic [31:0] a); return {1'b0, a[30:0]}; endfunction

  localparam int NCYC = 6000;
  logic [31:0] th [NCYC + 3];

  initial begin
    logic [31:0] up, dn, s01, s23, s4, avg, exp_th;
    bit full;
    int kept, tot;
    up = r2f(1.0 + 1.0e-3 * Q);
    dn = r2f(1.0 - 1.0e-3 * (1.0 - Q));
    th[0] = r2f(1.0e-6); th[1] = th[0];
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (theta !== th[0]) fail($sformatf("reset theta %h", theta));
    for (int k = 0; k < NCYC; k++) begin
      // present group k in cycle k
      in_valid = ($urandom % 8) != 0;
      filter   = (k % 500) < 480;
      lv       = ((k % 13) == 7) ? 4'($urandom) : 4'hf;
      idx      = 32'(k * 4);
      for (int l = 0; l < 4; l++) begin
        // magnitudes around the estimate so that both update directions occur
        din[l] = (k < 3000) ? rnd_fp(105, 20) : rnd_fp(110, 12);
      end
      full = in_valid && filter && (lv == 4'hf);
      s01 = r2f(f2r(absf(din[0])) + f2r(absf(din[1])));
      s23 = r2f(f2r(absf(din[2])) + f2r(absf(din[3])));
      s4  = r2f(f2r(s01) + f2r(s23));
      avg = (s4[30:23] > 2) ? r2f(f2r(s4) / 4.0) : 32'd0;
      th[k+2] = full ? r2f(f2r(th[k+1]) * f2r((f2r(th[k+1]) < f2r(avg)) ? up : dn)) : th[k+1];
      @(posedge clk); #1;
      checks++;
      if (theta !== th[k+1]) fail($sformatf("theta k=%0d got %h exp %h", k, theta, th[k+1]));
      checks++;
      if (ov !== in_valid || oi !== idx) fail($sformatf("out valid/index k=%0d", k));
      for (int l = 0; l < 4; l++) begin
        bit e;
        e = in_valid && lv[l] && (!filter || f2r(absf(din[l])) > f2r(th[k]));
        checks++;
        if (keep[l] !== e || od[l] !== din[l]) fail($sformatf("keep k=%0d lane %0d got %b exp %b", k, l, keep[l], e));
      end
      @(negedge clk);
    end
    in_valid = 0;
    // convergence of the fast instance on uniform [0,1) samples
    kept = 0; tot = 0;
    for (int k = 0; k < 30000; k++) begin
      real u;
      @(negedge clk);
      u = real'($urandom % 1000000) / 1000000.0;
      fin_valid = 1;
      for (int l = 0; l < 4; l++) fdin[l] = r2f(u);
      @(posedge clk); #1;
      if (k >= 20000) begin tot += 4; kept += $countones(fkeep); end
    end
    fin_valid = 0;
    checks += 2;
    if (f2r(ftheta) < Q - 0.06 || f2r(ftheta) > Q + 0.06) fail($sformatf("theta did not settle: %f", f2r(ftheta)));
    if (real'(kept) / tot < 0.08 || real'(kept) / tot > 0.19) fail($sformatf("kept fraction %f", real'(kept) / tot));
    $display("settled theta=%f kept fraction=%f", f2r(ftheta), real'(kept) / tot);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
