// tb_procrustes_top: end-to-end test of the accelerator at its default size
// (16x16 PEs, 128 KB GLB). It builds one layer tile in CSB format (32 blocks
// of 9 positions: rows 0-7 dense, rows 8-15 sparse, one empty block), 16
// activation vectors and a region of 1024 accumulated gradients, loads them
// through the DRAM fill port and then runs:
//   1. SET_SCALE, forward pass with initial weights present (every position
//      visited), while the DRAM port keeps writing another region, so the
//      fill port is held off during partial-sum collection;
//   2. DECAY until the scaling factor reaches zero, each step checked;
//   3. forward passes with initial weights gone (pruned positions skipped),
//      unbalanced and load-balanced: same results, fewer PE cycles;
//   4. backward pass (rotated blocks) and weight-update pass;
//   5. write-back of the gradient region with QE filtering, with a DRAM that
//      is not always ready, and of the second region without filtering.
// After every pass all 512 partial sums are read back through the DRAM
// write-back port and compared with the reference model; the PE cycle count
// is compared with the one the model predicts for the slowest PE. Kept
// gradients are checked against the threshold the QE showed when their
// group arrived. Each mechanism is counted and must occur at least once.
// Sizes (16x16 PEs, 128 KB GLB, 64-bit DRAM link) are the paper's; the tile contents, memory map and command sequence are this design's own test choices.
`timescale 1ns/1ps
module tb_procrustes_top;
  import procrustes_pkg::*;
  import fp_ref_pkg::*;
  localparam int ROWS = 16, COLS = 16, NB = 32, L = 9;
  localparam int PTR_B = 0, MASK_B = 64, WGT_B = 128, ACT_B = 1024, OUT_B = 2048;
  localparam int GRAD_B = 4096, NGRAD = 1024, AUX_B = 8192, NAUX = 256;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  cmd_e cmd;
  ctrl_cfg_t cfg;
  logic dram_in_valid = 0, dram_in_ready;
  logic [14:0] dram_in_addr = 0;
  logic [63:0] dram_in_data = 0;
  logic dram_out_valid, dram_out_ready = 1;
  logic [63:0] dram_out_data;
  logic [31:0] theta, run_cycles, stall_cycles;
  logic [13:0] scale;

  procrustes_top dut (.clk, .rst_n, .cmd_valid, .cmd, .cfg, .cmd_ready, .done,
    .dram_in_valid, .dram_in_addr, .dram_in_data, .dram_in_ready,
    .dram_out_valid, .dram_out_data, .dram_out_ready,
    .theta, .run_cycles, .stall_cycles, .scale);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_dense = 0, n_skip = 0, n_bw = 0, n_wu = 0, n_decay = 0, n_lb_gain = 0;
  int n_qe_drop = 0, n_qe_keep = 0, n_wb_stall = 0, n_fill_held = 0, n_out_held = 0;
  int n_empty = 0;

  initial begin
    #20000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string m);
    failures++;
    if (failures < 15) $display("FAIL %s", m);
  endtask

  // ---------------- layer data ----------------
  logic [15:0] mask [NB];
  logic [31:0] vals [NB][16];
  logic [31:0] acts [COLS][16];
  logic [31:0] ptr [NB+1];
  logic [31:0] grads [NGRAD];
  logic [31:0] aux [NAUX];
  logic [2:0][31:0] seeds = {32'h3c6ef372, 32'ha54ff53a, 32'h510e527f};
  localparam logic [31:0] WID_BASE = 32'd1000;

  // DRAM output collector: index -> value
  logic [31:0] got [int];
  always @(posedge clk) begin
    if (dram_out_valid && dram_out_ready) got[int'(dram_out_data[63:32])] = dram_out_data[31:0];
    if (dram_out_valid && !dram_out_ready) n_out_held++;
  end
  bit out_ready_random = 0;
  always @(negedge clk) dram_out_ready <= out_ready_random ? ($urandom % 3 != 0) : 1'b1;

  // QE monitor: threshold seen by every group entering the QE
  logic [31:0] grp_theta [int];
  bit          grp_filter [int];
  always @(posedge clk) begin
    if (dut.u_qe.in_valid) begin
      grp_theta[int'(dut.u_qe.in_index)] = theta;
      grp_filter[int'(dut.u_qe.in_index)] = dut.u_qe.filter;
    end
  end

  task automatic fill_word_pair(int a, logic [31:0] w0, logic [31:0] w1);
    @(negedge clk);
    dram_in_valid = 1; dram_in_addr = 15'(a); dram_in_data = {w1, w0};
    @(posedge clk);
    while (!dram_in_ready) begin n_fill_held++; @(posedge clk); end
    #1 dram_in_valid = 0;
  endtask

  task automatic fill_word(int a, logic [31:0] w);
    // single words are written as a pair with the neighbour kept in a shadow
    fill_word_pair(a & ~1, shadow_rd(a & ~1, a, w), shadow_rd((a & ~1) + 1, a, w));
  endtask

  logic [31:0] shadow [int];
  function automatic logic [31:0] shadow_rd(int at, int a, logic [31:0] w);
    if (at == a) begin shadow[a] = w; return w; end
    return shadow.exists(at) ? shadow[at] : 32'd0;
  endfunction

  task automatic run_cmd(cmd_e c, ctrl_cfg_t cf);
    int n;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cfg = cf; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    n = 0;
    while (!done) begin @(negedge clk); n++; if (n > 200000) begin fail("command hung"); break; end end
  endtask

  function automatic ctrl_cfg_t base_cfg();
    ctrl_cfg_t c;
    c = '0;
    c.blk_len = 5'(L);
    c.seeds = seeds;
    c.ptr_base = 15'(PTR_B); c.mask_base = 15'(MASK_B); c.wgt_base = 15'(WGT_B);
    c.act_base = 15'(ACT_B); c.out_base = 15'(OUT_B); c.wid_base = WID_BASE;
    return c;
  endfunction

  task automatic writeback(int word_base, int nwords, bit filt);
    ctrl_cfg_t c;
    c = base_cfg();
    c.wb_line = 13'(word_base / 4); c.wb_lines = 13'(nwords / 4); c.qe_filter = filt;
    got.delete();
    run_cmd(CMD_WRITEBACK, c);
    repeat (40) @(negedge clk);  // drain the DRAM queue
    if (stall_cycles > 0) n_wb_stall++;
  endtask

  // expected cycles of the slowest PE row under a given pairing
  function automatic int pe_cycles(int b0, int b1, int ph, int sc);
    int v0, v1, run_c, last_i;
    void'(block_ref(mask[b0], vals[b0], acts[0], WID_BASE + b0 * L, ph, L, sc, seeds, v0));
    void'(block_ref(mask[b1], vals[b1], acts[0], WID_BASE + b1 * L, ph, L, sc, seeds, v1));
    run_c  = v0 + (v0 == 0) + v1 + (v1 == 0);
    last_i = (v1 > 0) ? run_c : (v0 > 0) ? v0 : -100;
    return (run_c + 1 > last_i + 4) ? run_c + 1 : last_i + 4;
  endfunction

  // run one pass and check every partial sum and the cycle count
  task automatic pass_and_check(int ph, bit lb, output int cyc);
    ctrl_cfg_t c;
    int sc, worst, srt [NB], cnt [NB];
    int pd [ROWS], ps [ROWS];
    c = base_cfg();
    c.phase = phase_e'(ph); c.lb_en = lb;
    sc = int'(scale);
    run_cmd(CMD_PASS, c);
    cyc = int'(run_cycles);
    // pairing the controller should use
    for (int b = 0; b < NB; b++) cnt[b] = int'(ptr[b+1] - ptr[b]);
    for (int b = 0; b < NB; b++) begin
      int rk;
      rk = 0;
      for (int o = 0; o < NB; o++) if (cnt[o] > cnt[b] || (cnt[o] == cnt[b] && o < b)) rk++;
      srt[rk] = b;
    end
    worst = 0;
    for (int r = 0; r < ROWS; r++) begin
      int pc;
      pd[r] = lb ? srt[r] : 2 * r;
      ps[r] = lb ? srt[NB - 1 - r] : 2 * r + 1;
      pc = pe_cycles(pd[r], ps[r], ph, sc);
      if (pc > worst) worst = pc;
    end
    if (ph == 0 && sc == 0) begin
      $write("work per row, lb=%0d:", lb);
      for (int r = 0; r < ROWS; r++) $write(" %0d+%0d", cnt[pd[r]], cnt[ps[r]]);
      $display("");
    end
    checks++;
    if (cyc != worst + 1) fail($sformatf("pass ph=%0d lb=%0d: run_cycles %0d exp %0d", ph, lb, cyc, worst + 1));
    // read back all partial sums
    writeback(OUT_B, NB * COLS, 1'b0);
    for (int b = 0; b < NB; b++)
      for (int n = 0; n < COLS; n++) begin
        int vis;
        logic [31:0] e;
        e = block_ref(mask[b], vals[b], acts[n], WID_BASE + b * L, ph, L, sc, seeds, vis);
        if (vis == 0) e = 0;
        checks++;
        if (!got.exists(OUT_B + b * COLS + n)) fail($sformatf("psum b=%0d n=%0d missing", b, n));
        else if (got[OUT_B + b * COLS + n] !== e)
          fail($sformatf("psum ph=%0d lb=%0d b=%0d n=%0d got %h exp %h", ph, lb, b, n, got[OUT_B + b * COLS + n], e));
      end
    if (ph != 2 && sc != 0) n_dense++; else n_skip++;
    if (ph == 1) n_bw++;
    if (ph == 2) n_wu++;
  endtask

  initial begin
    int p, cyc_unbal, cyc_bal, cyc;
    ctrl_cfg_t c;
    cmd = CMD_PASS; cfg = '0;
    // layer: rows 0-7 (blocks 0-15) dense, rows 8-15 sparse, block 5 empty
    p = 0;
    for (int b = 0; b < NB; b++) begin
      int nz;
      mask[b] = 0;
      for (int j = 0; j < L; j++) begin
        int rv;
        rv = int'($urandom_range(99, 0));
        mask[b][j] = (rv < ((b < 16) ? 85 : 25));
      end
      if (b == 5) mask[b] = 0;
      if (b == 5) n_empty++;
      ptr[b] = p;
      nz = $countones(mask[b]);
      for (int k = 0; k < 16; k++) vals[b][k] = rnd_fp(118, 8);
      p += nz;
    end
    ptr[NB] = p;
    for (int n = 0; n < COLS; n++) for (int j = 0; j < 16; j++) acts[n][j] = rnd_fp(121, 6);
    for (int i = 0; i < NGRAD; i++) grads[i] = rnd_fp(100 + (i % 16), 8);
    for (int i = 0; i < NAUX; i++) aux[i] = $urandom;

    repeat (3) @(negedge clk);
    rst_n = 1;
    // load through the DRAM fill port
    for (int b = 0; b <= NB; b++) fill_word(PTR_B + b, ptr[b]);
    for (int b = 0; b < NB; b++) fill_word(MASK_B + b, {16'd0, mask[b]});
    for (int b = 0; b < NB; b++)
      for (int k = 0; k < $countones(mask[b]); k++) fill_word(WGT_B + ptr[b] + k, vals[b][k]);
    for (int n = 0; n < COLS; n++) for (int j = 0; j < L; j++) fill_word(ACT_B + n * L + j, acts[n][j]);
    for (int i = 0; i < NGRAD; i += 2) fill_word_pair(GRAD_B + i, grads[i], grads[i+1]);

    // 1. forward pass with initial weights, DRAM fill running concurrently
    c = base_cfg(); c.scale = 14'd6000;
    run_cmd(CMD_SET_SCALE, c);
    checks++; if (scale !== 14'd6000) fail("set scale");
    fork
      pass_and_check(0, 1'b0, cyc);
      begin
        // fill the aux region while the pass runs (collection holds it off)
        for (int i = 0; i < NAUX; i += 2) begin
          fill_word_pair(AUX_B + i, aux[i], aux[i+1]);
          repeat (8) @(negedge clk);
        end
      end
    join

    // 2. decay the initial weights to zero
    while (scale != 0) begin
      int e;
      e = (int'(scale) * 58982) >>> 16;
      run_cmd(CMD_DECAY, base_cfg());
      n_decay++;
      checks++;
      if (int'(scale) != e) fail($sformatf("decay got %0d exp %0d", scale, e));
    end

    // 3. skip pruned positions; unbalanced vs load-balanced
    pass_and_check(0, 1'b0, cyc_unbal);
    pass_and_check(0, 1'b1, cyc_bal);
    checks++;
    if (cyc_bal < cyc_unbal) n_lb_gain++;
    else fail($sformatf("load balancing did not help: %0d vs %0d", cyc_bal, cyc_unbal));
    $display("PE cycles: unbalanced %0d, balanced %0d", cyc_unbal, cyc_bal);

    // 4. backward and weight-update passes
    pass_and_check(1, 1'b1, cyc);
    pass_and_check(2, 1'b1, cyc);

    // 5a. gradients through the QE, DRAM not always ready
    out_ready_random = 1;
    writeback(GRAD_B, NGRAD, 1'b1);
    out_ready_random = 0;
    for (int i = 0; i < NGRAD; i++) begin
      int g;
      bit e;
      g = (GRAD_B + i) & ~3;
      e = f2r({1'b0, grads[i][30:0]}) > f2r(grp_theta[g]);
      checks++;
      if (e != got.exists(GRAD_B + i)) fail($sformatf("QE keep of gradient %0d: got %0d exp %0d", i, got.exists(GRAD_B + i), e));
      else if (e && got[GRAD_B + i] !== grads[i]) fail($sformatf("QE value of gradient %0d", i));
      if (e) n_qe_keep++; else n_qe_drop++;
    end
    checks++;
    if (theta == r2f(1.0e-6)) fail("theta never moved");
    $display("QE kept %0d of %0d gradients, theta now %h", n_qe_keep, NGRAD, theta);

    // 5b. aux region without filtering: all words, unchanged
    writeback(AUX_B, NAUX, 1'b0);
    for (int i = 0; i < NAUX; i++) begin
      checks++;
      if (!got.exists(AUX_B + i) || got[AUX_B + i] !== aux[i]) fail($sformatf("aux word %0d", i));
    end

    // every mechanism must have happened
    $display("dense=%0d skip=%0d bw=%0d wu=%0d decay=%0d lb_gain=%0d empty=%0d",
             n_dense, n_skip, n_bw, n_wu, n_decay, n_lb_gain, n_empty);
    $display("qe_keep=%0d qe_drop=%0d wb_stall=%0d fill_held=%0d out_held=%0d",
             n_qe_keep, n_qe_drop, n_wb_stall, n_fill_held, n_out_held);
    checks++;
    if (n_dense == 0 || n_skip == 0 || n_bw == 0 || n_wu == 0 || n_decay == 0 || n_lb_gain == 0 ||
        n_qe_keep == 0 || n_qe_drop == 0 || n_wb_stall == 0 || n_fill_held == 0 || n_out_held == 0 ||
        n_empty == 0)
      fail("a mechanism never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
