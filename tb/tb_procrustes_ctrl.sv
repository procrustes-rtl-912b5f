// tb_procrustes_ctrl: tests the sequencer alone, with behavioural stand-ins
// for the global buffer (a word array with one-cycle reads), the load
// balancer (answers two cycles after start with a fixed permutation), the
// PE array (records what each row and column bus delivers, stays busy for a
// random number of cycles, returns a distinct value per PE and slot) and the
// DRAM write queue (a free count the test varies).
// Checked: every row receives the weight-index base, mask and packed values
// of the two blocks the pairing gives it (with and without balancing), every
// column receives its activation vector, run_cycles equals the time the
// array is busy, each partial sum lands at out_base + block*COLS + column, the
// write-back streams consecutive lines to the QE and never reads while the
// queue has fewer than 12 free entries, and SET_SCALE / DECAY compute the
// scaling factor.
// The pass order (pointers, balance, multicast, compute, unicast collect) follows the paper's dataflow; the command set, GLB map and bus timing are this design's own.
`timescale 1ns/1ps
module tb_procrustes_ctrl;
  import procrustes_pkg::*;
  localparam int ROWS = 16, COLS = 16, NB = 32, L = 9;
  localparam int PTR_B = 0, MASK_B = 40, WGT_B = 100, ACT_B = 800, OUT_B = 1200;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, done;
  cmd_e cmd = CMD_PASS;
  ctrl_cfg_t cfg = '0;
  logic glb_re, glb_we;
  logic [12:0] glb_raddr, glb_waddr;
  logic [127:0] glb_rdata;
  logic [3:0] glb_wen;
  logic [127:0] glb_wdata;
  logic lb_start, lb_done;
  logic [NB-1:0][4:0] lb_cnt;
  logic [ROWS-1:0][4:0] lb_dense, lb_sparse;
  hbus_t [ROWS-1:0] hbus;
  vbus_t [COLS-1:0] vbus;
  pe_cfg_t pe_cfg;
  logic pe_start, pe_busy;
  logic [3:0] sel_row, sel_col;
  logic sel_slot;
  logic [31:0] pe_res;
  logic qe_filter, qe_valid;
  logic [3:0][31:0] qe_data;
  logic [31:0] qe_index;
  logic [4:0] q_free;
  logic [31:0] run_cycles, stall_cycles;
  logic [13:0] scale;

  procrustes_ctrl dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic fail(string m);
    failures++;
    if (failures < 15) $display("FAIL %s", m);
  endtask

  initial begin
    #20000000;
    $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- GLB model ----
  logic [31:0] mem [8192];
  always_ff @(posedge clk) begin
    if (glb_re) glb_rdata <= {mem[{glb_raddr, 2'd3}], mem[{glb_raddr, 2'd2}],
                              mem[{glb_raddr, 2'd1}], mem[{glb_raddr, 2'd0}]};
    if (glb_we) for (int w = 0; w < 4; w++)
      if (glb_wen[w]) mem[{glb_waddr, 2'(w)}] <= glb_wdata[w*32 +: 32];
  end

  // ---- load balancer model: tile t = (t, 31-t) ----
  logic lb_d1;
  always_ff @(posedge clk) begin
    lb_d1   <= lb_start;
    lb_done <= lb_d1;
  end
  always_comb for (int t = 0; t < ROWS; t++) begin
    lb_dense[t]  = 5'(t);
    lb_sparse[t] = 5'(31 - t);
  end

  // ---- PE array model ----
  logic [31:0] rx_mask [ROWS][2], rx_wbase [ROWS][2], rx_val [ROWS][2][16];
  int          rx_nval [ROWS][2];
  logic [31:0] rx_act [COLS][16];
  int busy_left = 0, busy_len = 0;
  always @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) if (hbus[r].valid) begin
      case (hbus[r].kind)
        HW_MASK:  rx_mask[r][hbus[r].slot] = hbus[r].data;
        HW_WBASE: rx_wbase[r][hbus[r].slot] = hbus[r].data;
        HW_GRAD:  begin rx_val[r][hbus[r].slot][hbus[r].addr] = hbus[r].data; rx_nval[r][hbus[r].slot]++; end
        default: ;
      endcase
    end
    for (int c = 0; c < COLS; c++) if (vbus[c].valid) rx_act[c][vbus[c].addr] = vbus[c].data;
    if (pe_start) begin busy_len = 3 + int'($urandom % 40); busy_left = busy_len; end
    else if (busy_left > 0) busy_left--;
  end
  assign pe_busy = busy_left > 0;
  assign pe_res  = {8'hab, 4'(sel_row), 4'(sel_col), 15'd0, sel_slot};

  // ---- write-back monitor ----
  int wb_expect_line, wb_lines_seen;
  bit wb_bad_read;
  always @(posedge clk) begin
    if (glb_re && dut.state == dut.S_WB && q_free < 12) wb_bad_read = 1;
    if (rst_n && qe_valid) begin
      checks++;
      if (qe_index != 32'(wb_expect_line * 4)) fail($sformatf("wb index %0d exp %0d", qe_index, wb_expect_line * 4));
      for (int w = 0; w < 4; w++)
        if (qe_data[w] !== mem[wb_expect_line * 4 + w]) fail("wb data");
      wb_expect_line++;
      wb_lines_seen++;
    end
  end
  always @(negedge clk) q_free <= ($urandom % 4 == 0) ? 5'(4 + $urandom % 8) : 5'd16;

  task automatic run_cmd(cmd_e c, ctrl_cfg_t cf);
    int n;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cfg = cf; cmd_valid = 1;
    @(negedge clk);
    cmd_valid = 0;
    n = 0;
    while (!done) begin @(negedge clk); n++; if (n > 100000) begin fail("hung"); break; end end
  endtask

  function automatic ctrl_cfg_t base_cfg();
    ctrl_cfg_t c;
    c = '0;
    c.blk_len = 5'(L); c.ptr_base = 15'(PTR_B); c.mask_base = 15'(MASK_B);
    c.wgt_base = 15'(WGT_B); c.act_base = 15'(ACT_B); c.out_base = 15'(OUT_B);
    c.wid_base = 32'd5000;
    return c;
  endfunction

  int ptr [NB+1];
  logic [15:0] msk [NB];

  task automatic check_pass(bit lb);
    for (int r = 0; r < ROWS; r++)
      for (int s = 0; s < 2; s++) begin
        int b, n;
        b = lb ? ((s == 0) ? r : 31 - r) : 2 * r + s;
        n = ptr[b+1] - ptr[b];
        checks += 3;
        if (rx_mask[r][s] !== {16'd0, msk[b]}) fail($sformatf("row %0d slot %0d mask", r, s));
        if (rx_wbase[r][s] !== 32'(5000 + b * L)) fail($sformatf("row %0d slot %0d wbase %0d", r, s, rx_wbase[r][s]));
        if (rx_nval[r][s] != n) fail($sformatf("row %0d slot %0d got %0d values exp %0d", r, s, rx_nval[r][s], n));
        for (int k = 0; k < n; k++) begin
          checks++;
          if (rx_val[r][s][k] !== mem[WGT_B + ptr[b] + k]) fail($sformatf("row %0d slot %0d value %0d", r, s, k));
        end
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (mem[OUT_B + b * COLS + c] !== {8'hab, 4'(r), 4'(c), 15'd0, 1'(s)})
            fail($sformatf("psum of block %0d col %0d at wrong place", b, c));
        end
      end
    for (int c = 0; c < COLS; c++)
      for (int j = 0; j < L; j++) begin
        checks++;
        if (rx_act[c][j] !== mem[ACT_B + c * L + j]) fail($sformatf("act col %0d pos %0d", c, j));
      end
    checks++;
    if (int'(run_cycles) != busy_len) fail($sformatf("run_cycles %0d exp %0d", run_cycles, busy_len));
  endtask

  initial begin
    ctrl_cfg_t c;
    int p;
    for (int i = 0; i < 8192; i++) mem[i] = $urandom;
    p = 0;
    for (int b = 0; b < NB; b++) begin
      msk[b] = 16'($urandom) & 16'h1ff;
      if (b == 7) msk[b] = 0;
      ptr[b] = p;
      p += $countones(msk[b]);
    end
    ptr[NB] = p;
    for (int b = 0; b <= NB; b++) mem[PTR_B + b] = ptr[b];
    for (int b = 0; b < NB; b++) mem[MASK_B + b] = {16'd0, msk[b]};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < ROWS; r++) begin rx_nval[r][0] = 0; rx_nval[r][1] = 0; end
      c = base_cfg(); c.lb_en = t[0];
      run_cmd(CMD_PASS, c);
      check_pass(t[0]);
    end
    // write-back of 64 lines starting at line 10
    c = base_cfg(); c.wb_line = 13'd10; c.wb_lines = 13'd64; c.qe_filter = 1;
    wb_expect_line = 10; wb_lines_seen = 0; wb_bad_read = 0;
    run_cmd(CMD_WRITEBACK, c);
    repeat (3) @(negedge clk);
    checks += 4;
    if (wb_lines_seen != 64) fail($sformatf("wb lines %0d", wb_lines_seen));
    if (wb_bad_read) fail("read while the queue was short of space");
    if (stall_cycles == 0) fail("no stall counted");
    if (qe_filter !== 1'b1) fail("qe_filter");
    // scale
    c = base_cfg(); c.scale = 14'd12345;
    run_cmd(CMD_SET_SCALE, c);
    checks++;
    if (scale !== 14'd12345 || pe_cfg.scale !== 14'd12345) fail("set scale");
    for (int i = 0; i < 5; i++) begin
      int e;
      e = (int'(scale) * 58982) >> 16;
      run_cmd(CMD_DECAY, base_cfg());
      checks++;
      if (int'(scale) != e) fail($sformatf("decay %0d exp %0d", scale, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
