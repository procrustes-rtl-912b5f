// tb_pe_regfile: writes random words to random addresses and reads them back
// on both read ports, against a shadow array; checks the one-cycle read
// latency and read-before-write behaviour on a same-cycle collision.
// The 1 KB size is the paper's; the two read ports and one-cycle latency are this design's own choices.
`timescale 1ns/1ps
module tb_pe_regfile;
  logic clk = 0, we = 0;
  logic [7:0] waddr = 0, raddr0 = 0, raddr1 = 0;
  logic [31:0] wdata = 0, rdata0, rdata1;
  logic [31:0] shadow [256];
  int checks = 0, failures = 0;

  pe_regfile dut (.clk, .we, .waddr, .wdata, .raddr0, .rdata0, .raddr1, .rdata1);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e0, e1;
    // fill every word
    for (int a = 0; a < 256; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a); wdata = $urandom; shadow[a] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 8'($urandom); wdata = $urandom;
      raddr0 = 8'($urandom); raddr1 = (i % 10 == 0) ? waddr : 8'($urandom);
      e0 = shadow[raddr0]; e1 = shadow[raddr1];   // old values
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      checks += 2;
      if (rdata0 !== e0) begin failures++; $display("FAIL port0 %h %h", rdata0, e0); end
      if (rdata1 !== e1) begin failures++; $display("FAIL port1 %h %h", rdata1, e1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
