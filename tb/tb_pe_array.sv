// tb_pe_array: loads a 4x4 array (reduced from 16x16 to keep the test short;
// the array is regular) with random CSB blocks on each row bus and random
// activations on each column bus, runs it and reads every partial sum back
// through the unicast select. Each result is compared with the reference
// model, which also gives each PE's cycle count; busy_any must last exactly
// as long as the slowest PE. This checks that a row bus reaches only its row
// and a column bus only its column: every PE (r,c) must combine the blocks
// of row r with the activations of column c.
// The row/column multicast and unicast collection follow the paper's dataflow figure; the bus encodings are this design's own.
`timescale 1ns/1ps
module tb_pe_array;
  import procrustes_pkg::*;
  import fp_ref_pkg::*;
  localparam int R = 4, C = 4;
  logic clk = 0, rst_n = 0, start = 0, busy_any;
  hbus_t [R-1:0] hbus;
  vbus_t [C-1:0] vbus;
  pe_cfg_t cfg;
  logic [1:0] sel_row, sel_col;
  logic sel_slot;
  logic [31:0] res_out;
  int checks = 0, failures = 0;

  pe_array #(.ROWS(R), .COLS(C)) dut (.clk, .rst_n, .hbus, .vbus, .cfg, .start, .busy_any,
    .sel_row, .sel_col, .sel_slot, .res_out);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] m [R][2];
    logic [31:0] vals [R][2][16];
    logic [31:0] acts [C][16];
    logic [31:0] wb [R][2];
    int len, ph, vis, worst, cyc, pe_cyc;
    hbus = '0; vbus = '0; cfg = '0;
    cfg.seeds = {32'h11111111, 32'h22222222, 32'h33333333};
    sel_row = 0; sel_col = 0; sel_slot = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 24; t++) begin
      len = (t % 2) ? 9 : 16;
      ph  = t % 3;
      cfg.phase = phase_e'(ph);
      cfg.blk_len = 5'(len);
      cfg.scale = (t % 4 < 2) ? 14'd0 : 14'd5000;
      // rows: all rows written in the same cycles (multicast per row)
      for (int r = 0; r < R; r++)
        for (int s = 0; s < 2; s++) begin
          m[r][s] = 16'($urandom) & 16'((1 << len) - 1);
          wb[r][s] = $urandom % 5000;
          for (int k = 0; k < 16; k++) vals[r][s][k] = rnd_fp(119, 6);
        end
      for (int s = 0; s < 2; s++) begin
        @(negedge clk);
        for (int r = 0; r < R; r++) hbus[r] = '{1'b1, HW_MASK, 1'(s), 4'd0, {16'd0, m[r][s]}};
        @(negedge clk);
        for (int r = 0; r < R; r++) hbus[r] = '{1'b1, HW_WBASE, 1'(s), 4'd0, wb[r][s]};
        for (int k = 0; k < 16; k++) begin
          @(negedge clk);
          for (int r = 0; r < R; r++) hbus[r] = '{1'b1, HW_GRAD, 1'(s), 4'(k), vals[r][s][k]};
        end
      end
      @(negedge clk);
      for (int r = 0; r < R; r++) hbus[r] = '0;
      for (int j = 0; j < len; j++) begin
        for (int c = 0; c < C; c++) acts[c][j] = rnd_fp(121, 6);
        @(negedge clk);
        for (int c = 0; c < C; c++) vbus[c] = '{1'b1, 4'(j), acts[c][j]};
      end
      @(negedge clk);
      for (int c = 0; c < C; c++) vbus[c] = '0;
      // expected cycle count of the slowest PE (rows differ, columns do not)
      worst = 0;
      for (int r = 0; r < R; r++) begin
        int v0, v1, run_c, last_i;
        void'(block_ref(m[r][0], vals[r][0], acts[0], wb[r][0], ph, len, int'(cfg.scale), cfg.seeds, v0));
        void'(block_ref(m[r][1], vals[r][1], acts[0], wb[r][1], ph, len, int'(cfg.scale), cfg.seeds, v1));
        run_c  = v0 + (v0 == 0) + v1 + (v1 == 0);
        last_i = (v1 > 0) ? run_c : (v0 > 0) ? v0 : -100;
        pe_cyc = (run_c + 1 > last_i + 4) ? run_c + 1 : last_i + 4;
        if (pe_cyc > worst) worst = pe_cyc;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (busy_any) begin @(negedge clk); cyc++; end
      cyc--;
      checks++;
      if (cyc != worst) begin
        failures++; $display("FAIL t=%0d array cycles %0d exp %0d", t, cyc, worst);
      end
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++)
          for (int s = 0; s < 2; s++) begin
            logic [31:0] e;
            e = block_ref(m[r][s], vals[r][s], acts[c], wb[r][s], ph, len, int'(cfg.scale), cfg.seeds, vis);
            if (vis == 0) e = 0;
            sel_row = 2'(r); sel_col = 2'(c); sel_slot = 1'(s);
            #1;
            checks++;
            if (res_out !== e) begin
              failures++;
              if (failures < 10) $display("FAIL t=%0d pe(%0d,%0d) slot %0d got %h exp %h", t, r, c, s, res_out, e);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
