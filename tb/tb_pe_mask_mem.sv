// tb_pe_mask_mem: writes random masks to both slots and checks the stored
// masks and their population counts (the packed block sizes) against a
// shadow copy, including the all-zero state after reset.
// The paper names a per-PE mask memory; its two-slot, 16-bit organisation is this design's own choice.
`timescale 1ns/1ps
module tb_pe_mask_mem;
  logic clk = 0, rst_n = 0, we = 0;
  logic wslot = 0;
  logic [15:0] wmask = 0;
  logic [1:0][15:0] mask;
  logic [1:0][4:0] nnz;
  logic [15:0] sh [2];
  int checks = 0, failures = 0;

  pe_mask_mem dut (.clk, .rst_n, .we, .wslot, .wmask, .mask, .nnz);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk;
    for (int s = 0; s < 2; s++) begin
      int pc;
      pc = 0;
      for (int b = 0; b < 16; b++) pc += sh[s][b];
      checks += 2;
      if (mask[s] !== sh[s]) begin failures++; $display("FAIL mask %0d %h %h", s, mask[s], sh[s]); end
      if (nnz[s] !== 5'(pc)) begin failures++; $display("FAIL nnz %0d %0d %0d", s, nnz[s], pc); end
    end
  endtask

  initial begin
    sh[0] = 0; sh[1] = 0;
    #12 rst_n = 1;
    #1 chk();
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      we = $urandom % 2; wslot = 1'($urandom); wmask = 16'($urandom);
      if (i == 3) wmask = 16'hffff;
      @(posedge clk); #1;
      if (we) sh[wslot] = wmask;
      chk();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
