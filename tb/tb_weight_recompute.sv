// tb_weight_recompute: checks the WR unit against an independent reference
// (the xorshift sum computed with integers, the scaling and fixed-point
// reading done in double precision and rounded to FP32). Also checks that the
// unit is stateless (same index, same value, whatever came before), that a
// zero scale gives +0, and that the samples are roughly Gaussian: mean near
// 0 and standard deviation near 2^15 over many indices.
// Three summed xorshift generators scaled by an integer are the paper's; the seed/index mixing and fixed-point position are this design's own choices.
`timescale 1ns/1ps
module tb_weight_recompute;
  import fp_ref_pkg::*;
  logic [2:0][31:0] seeds;
  logic [31:0] index;
  logic [13:0] scale;
  logic [31:0] init_w;
  int checks = 0, failures = 0;

  weight_recompute dut (.seeds, .index, .scale, .init_w);

  initial begin
    #1000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] exp, string what);
    checks++;
    if (init_w !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s idx=%h scale=%0d got %h exp %h", what, index, scale, init_w, exp);
    end
  endtask

  initial begin
    real sum, sq, v, mean, sd;
    logic [31:0] first_val;
    seeds = {32'h9e3779b9, 32'h85ebca6b, 32'hc2b2ae35};
    for (int i = 0; i < 3000; i++) begin
      index = (i < 1000) ? i : $urandom;
      scale = (i % 50 == 0) ? 14'd0 : 14'($urandom);
      #1;
      chk(wr_ref(seeds, index, scale), "random");
    end
    // zero scale -> exactly +0
    scale = 0; index = 32'h1234; #1; chk(32'd0, "zero scale");
    // stateless: revisit an index after others
    scale = 14'd8192; index = 32'd77; #1; first_val = init_w;
    for (int i = 0; i < 10; i++) begin index = $urandom; #1; end
    index = 32'd77; #1; chk(first_val, "stateless");
    // distribution of the centred sum (scale 1, frac 0 view through 2^-32)
    sum = 0; sq = 0;
    scale = 14'd1;
    for (int i = 0; i < 4000; i++) begin
      index = i; #1;
      v = f2r(init_w) * (2.0 ** 32);
      sum += v; sq += v * v;
    end
    mean = sum / 4000.0;
    sd = $sqrt(sq / 4000.0 - mean * mean);
    checks++;
    if (mean > 2000.0 || mean < -2000.0 || sd < 0.85 * 32768.0 || sd > 1.15 * 32768.0) begin
      failures++;
      $display("FAIL distribution mean=%f sd=%f", mean, sd);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
