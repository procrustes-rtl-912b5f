// tb_fp32_mac: self-checking test of the FP32 MAC unit.
// Drives random operands (including sign mixes and cancellations), a clear at
// the start of every 8-term sum, and idle cycles, and compares the
// accumulator each cycle with a double-precision reference rounded to FP32
// after every multiply and every add. It also checks that the result
// appears exactly one cycle after the operands.
// The paper only asks for FP32 MAC units; the expected values use this design's own rounding choice (nearest-even, flush-to-zero).
`timescale 1ns/1ps
module tb_fp32_mac;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, clr = 0;
  logic [31:0] a = 0, b = 0, acc;
  int checks = 0, failures = 0;
  logic [31:0] ref_acc;

  fp32_mac dut (.clk, .rst_n, .en, .clr, .a, .b, .acc);

  always #5 clk = ~clk;

  initial begin
    #200000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] exp, string what);
    checks++;
    if (acc !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, acc, exp);
    end
  endtask

  initial begin
    ref_acc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(32'd0, "reset");
    // a few directed cases
    en = 1; clr = 1; a = 32'h3fc00000; b = 32'h40200000;  // 1.5*2.5 = 3.75
    @(negedge clk); check(32'h40700000, "1.5*2.5");
    clr = 0; a = 32'hc0700000; b = 32'h3f800000;          // -3.75 -> 0
    @(negedge clk); check(32'h00000000, "cancel");
    a = 32'h00000000; b = 32'h40000000;                   // zero operand
    @(negedge clk); check(32'h00000000, "zero");
    for (int i = 0; i < 4000; i++) begin
      logic [31:0] p;
      en  = ($urandom % 8) != 0;
      clr = (i % 8) == 0;
      a   = rnd_fp(120, 14);
      b   = rnd_fp(120, 14);
      if (i % 97 == 5) a = {~ref_acc[31], ref_acc[30:0]};  // force cancellation
      if (i % 97 == 5) b = 32'h3f800000;
      p = r2f(f2r(a) * f2r(b));
      if (en) ref_acc = r2f(f2r(clr ? 32'd0 : ref_acc) + f2r(p));
      else if (clr) ref_acc = 0;
      @(negedge clk);
      check(ref_acc, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
