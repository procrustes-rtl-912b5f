// tb_global_buffer: random line writes with random word enables against a
// shadow copy of the whole 128 KB buffer, random reads checked one cycle
// after the address, and a same-cycle read/write of one line returning the
// old contents.
// The 128 KB size is the paper's; the 128-bit line, word enables and one-cycle read latency are this design's own choices.
`timescale 1ns/1ps
module tb_global_buffer;
  logic clk = 0, re = 0, we = 0;
  logic [12:0] raddr = 0, waddr = 0;
  logic [3:0] wen = 0;
  logic [127:0] wdata = 0, rdata;
  logic [127:0] sh [8192];
  int checks = 0, failures = 0;

  global_buffer dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wen, .wdata);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [127:0] rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  initial begin
    logic [127:0] e;
    for (int l = 0; l < 8192; l++) begin
      @(negedge clk); we = 1; wen = 4'hf; waddr = 13'(l); wdata = rnd128(); sh[l] = wdata;
    end
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      we = $urandom % 2; wen = 4'($urandom); waddr = 13'($urandom); wdata = rnd128();
      re = 1; raddr = (i % 8 == 0) ? waddr : 13'($urandom);
      e = sh[raddr];
      @(posedge clk); #1;
      if (we) for (int w = 0; w < 4; w++) if (wen[w]) sh[waddr][w*32 +: 32] = wdata[w*32 +: 32];
      checks++;
      if (rdata !== e) begin
        failures++;
        if (failures < 10) $display("FAIL line %0d got %h exp %h", raddr, rdata, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
