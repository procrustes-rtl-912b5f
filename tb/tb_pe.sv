// tb_pe: self-checking test of one processing element.
// Each trial loads two random CSB blocks (masks, packed values, weight-index
// bases) over the horizontal bus and an activation vector over the vertical
// bus, starts the PE and compares both partial sums with the reference model
// in fp_ref_pkg (weights rebuilt as gradient + recomputed initial value,
// rotated activations in the backward pass, CSB values times dense
// operand in the weight-update pass). It also checks the cycle count: one
// cycle per visited position, one per empty block, and a four-cycle drain.
// Trials cover all three phases, scale zero (pruned positions skipped) and
// non-zero (every position visited), block lengths 1..16 and empty blocks.
// The datapath checked here (mask mux, WR add, MAC) follows the paper's PE figure; the one-position-per-cycle timing and the skip/rotation placement are this design's own choices.
`timescale 1ns/1ps
module tb_pe;
  import procrustes_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  hbus_t hbus;
  vbus_t vbus;
  pe_cfg_t cfg;
  logic busy, done;
  fp32_t [1:0] res;
  int checks = 0, failures = 0;
  int n_skip = 0, n_dense = 0, n_bw = 0, n_wu = 0, n_empty = 0;

  pe dut (.clk, .rst_n, .hbus, .vbus, .cfg, .start, .busy, .done, .res);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwr(hkind_e k, int slot, int addr, logic [31:0] d);
    @(negedge clk);
    hbus = '{valid: 1'b1, kind: k, slot: 1'(slot), addr: 4'(addr), data: d};
    @(negedge clk);
    hbus.valid = 1'b0;
  endtask

  task automatic vwr(int addr, logic [31:0] d);
    @(negedge clk);
    vbus = '{valid: 1'b1, addr: 4'(addr), data: d};
    @(negedge clk);
    vbus.valid = 1'b0;
  endtask

  initial begin
    logic [15:0] m [2];
    logic [31:0] vals [2][16];
    logic [31:0] acts [16];
    logic [31:0] wb [2];
    logic [31:0] exp_r [2];
    int vis [2];
    int len, ph, nnz, cyc, exp_cyc, empties;
    hbus = '0; vbus = '0;
    cfg = '0;
    cfg.seeds = {32'h2545f491, 32'h6c8e9cf5, 32'h1b873593};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      len = (t % 3 == 0) ? 9 : 1 + int'($urandom % 16);
      ph  = int'($urandom % 3);
      cfg.phase   = phase_e'(ph);
      cfg.blk_len = 5'(len);
      cfg.scale   = ($urandom % 2) ? 14'd0 : 14'(1 + $urandom % 16000);
      for (int s = 0; s < 2; s++) begin
        m[s] = 16'($urandom) & 16'($urandom) & 16'((1 << len) - 1);
        if (t % 7 == 3 && s == 1) m[s] = 0;
        wb[s] = $urandom % 100000;
        nnz = $countones(m[s]);
        hwr(HW_MASK, s, 0, {16'd0, m[s]});
        hwr(HW_WBASE, s, 0, wb[s]);
        for (int k = 0; k < nnz; k++) begin
          vals[s][k] = rnd_fp(118, 8);
          hwr(HW_GRAD, s, k, vals[s][k]);
        end
      end
      for (int j = 0; j < len; j++) begin
        acts[j] = rnd_fp(120, 8);
        vwr(j, acts[j]);
      end
      empties = 0;
      for (int s = 0; s < 2; s++) begin
        exp_r[s] = block_ref(m[s], vals[s], acts, wb[s], ph, len, int'(cfg.scale), cfg.seeds, vis[s]);
        if (vis[s] == 0) begin empties++; exp_r[s] = 0; end
      end
      begin
        int run_c, last_i;
        run_c  = vis[0] + (vis[0] == 0) + vis[1] + (vis[1] == 0);
        last_i = (vis[1] > 0) ? run_c : (vis[0] > 0) ? vis[0] : -100;
        exp_cyc = (run_c + 1 > last_i + 4) ? run_c + 1 : last_i + 4;
      end
      if (ph == 2 || cfg.scale == 0) n_skip++; else n_dense++;
      if (ph == 1) n_bw++;
      if (ph == 2) n_wu++;
      if (empties > 0) n_empty++;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (busy) begin @(negedge clk); cyc++; end
      cyc--;
      for (int s = 0; s < 2; s++) begin
        checks++;
        if (res[s] !== exp_r[s]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d ph=%0d len=%0d scale=%0d slot=%0d got %h exp %h",
                                      t, ph, len, cfg.scale, s, res[s], exp_r[s]);
        end
      end
      checks++;
      if (cyc != exp_cyc) begin
        failures++;
        if (failures < 10) $display("FAIL cycles t=%0d got %0d exp %0d", t, cyc, exp_cyc);
      end
    end
    checks++;
    if (n_skip == 0 || n_dense == 0 || n_bw == 0 || n_wu == 0 || n_empty == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("skip=%0d dense=%0d bw=%0d wu=%0d empty=%0d", n_skip, n_dense, n_bw, n_wu, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
