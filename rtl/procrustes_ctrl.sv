// procrustes_ctrl: the accelerator's sequencer.
//
// CMD_PASS runs one work pass of the K,N dataflow (paper Sec. IV-C) over the
// PE array. The array holds 2*ROWS CSB blocks per pass (ROWS work tiles of two
// half-tiles each; block b is one output-channel half-tile) and COLS
// activation vectors (one per minibatch sample). The steps are:
//   1. PTR   read the CSB pointer array P[0..2*ROWS]; the packed size of block
//            b is P[b+1]-P[b] (the paper's "subtract pointers of adjacent
//            work tiles").
//   2. BAL   with lb_en, have the load balancer pair the densest block with
//            the sparsest; otherwise row r gets blocks 2r and 2r+1.
//   3. LDW   for each row, multicast on the row's horizontal bus the weight
//            index base, the mask M[b] and the packed values
//            W[P[b] .. P[b+1]-1] of each of its two blocks.
//   4. LDX   for each column n, multicast on the column's vertical bus the
//            activation vector act[n*blk_len .. (n+1)*blk_len-1].
//   5. RUN   start all PEs and wait until none is busy; the cycle count is
//            kept in run_cycles.
//   6. COL   collect every partial sum through the unicast network and write
//            it to out_base + b*COLS + n (b = the block's original index, so
//            results land in dense order whatever the balancing did).
// CMD_WRITEBACK streams GLB lines wb_line .. wb_line+wb_lines-1, four words
// per cycle, through the quantile estimator into the DRAM write queue; it
// stalls while the queue could overflow (counted in stall_cycles).
// CMD_SET_SCALE loads the WR scaling factor; CMD_DECAY multiplies it by
// lambda = 0.9 (one iteration of the paper's initial-weight decay).
//
// Handshake: a command is taken when cmd_valid and cmd_ready are both high;
// cmd_ready is high only while idle, and done pulses when the command ends.
// GLB reads take one cycle; words are 32 bits, four to a 128-bit line.
// The pass structure follows the paper's dataflow; the GLB memory map, the
// command set, the bus protocol and the serial one-word-per-two-cycles loading
// are this design's choices.
// The assertions are switched off by the asynchronous reset (disable iff);
// lint reports rst_n as used both synchronously and asynchronously because of
// this. It concerns only the checks, not the circuit, so it is left as is.
module procrustes_ctrl
  import procrustes_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 16,
  parameter int unsigned GLB_AW = 13,   // line address width (8192 lines)
  parameter int unsigned QDEPTH = 16,
  localparam int unsigned NB    = 2 * ROWS,
  localparam int unsigned BW    = $clog2(NB),
  localparam int unsigned RW    = $clog2(ROWS),
  localparam int unsigned CW    = $clog2(COLS),
  localparam int unsigned QAW   = $clog2(QDEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // command interface
  input  logic                   cmd_valid,
  input  cmd_e                   cmd,
  input  ctrl_cfg_t              cfg,
  output logic                   cmd_ready,
  output logic                   done,
  // global buffer
  output logic                   glb_re,
  output logic [GLB_AW-1:0]      glb_raddr,
  input  logic [127:0]           glb_rdata,
  output logic                   glb_we,
  output logic [GLB_AW-1:0]      glb_waddr,
  output logic [3:0]             glb_wen,
  output logic [127:0]           glb_wdata,
  // load balancer
  output logic                   lb_start,
  output logic [NB-1:0][POS_W:0] lb_cnt,
  input  logic                   lb_done,
  input  logic [ROWS-1:0][BW-1:0] lb_dense,
  input  logic [ROWS-1:0][BW-1:0] lb_sparse,
  // PE array
  output hbus_t [ROWS-1:0]       hbus,
  output vbus_t [COLS-1:0]       vbus,
  output pe_cfg_t                pe_cfg,
  output logic                   pe_start,
  input  logic                   pe_busy,
  output logic [RW-1:0]          sel_row,
  output logic [CW-1:0]          sel_col,
  output logic [SLOT_W-1:0]      sel_slot,
  input  fp32_t                  pe_res,
  // quantile estimator and DRAM write queue
  output logic                   qe_filter,
  output logic                   qe_valid,
  output fp32_t [3:0]            qe_data,
  output logic [31:0]            qe_index,
  input  logic [QAW:0]           q_free,
  // status
  output logic [31:0]            run_cycles,
  output logic [31:0]            stall_cycles,
  output logic [SCALE_W-1:0]     scale
);
  typedef enum logic [4:0] {
    S_IDLE, S_PTR_RD, S_PTR_USE, S_BAL, S_BAL_WAIT,
    S_W_BASE, S_W_MRD, S_W_MUSE, S_W_VRD, S_W_VUSE,
    S_X_RD, S_X_USE, S_RUN_GO, S_RUN_WAIT, S_COL, S_WB, S_WB_DRAIN, S_DONE
  } state_e;

  state_e    state;
  // the fields of the command configuration that a pass keeps using
  typedef struct packed {
    phase_e                 phase;
    logic                   lb_en;
    logic [POS_W:0]         blk_len;
    logic [N_RNG-1:0][31:0] seeds;
    logic [GLB_AW_W-1:0]    mask_base, wgt_base, act_base, out_base;
    logic [31:0]            wid_base;
    logic                   qe_filter;
  } pass_cfg_t;
  pass_cfg_t cq;                      // configuration of the running command
  logic [GLB_AW_W-1:0] ptr [NB+1];
  logic [NB-1:0][BW-1:0] blk_of;      // blk_of[2r+s] = block in row r, slot s
  logic [BW:0]         pi;            // pointer index being read
  logic [RW-1:0]       r;
  logic [CW-1:0]       c;
  logic [SLOT_W-1:0]   s;
  logic [POS_W:0]      k;             // position inside a block / vector
  logic [GLB_AW_W-1:0] waddr_w;       // word address of the current read
  logic [GLB_AW-1:0]   wb_l, wb_end;
  logic                wb_rv;         // a line read issued last cycle
  logic [GLB_AW-1:0]   wb_rl;

  // current block and its packed size
  logic [BW-1:0]       b_cur;
  logic [POS_W:0]      n_cur;
  fp32_t               rd_word;
  assign b_cur   = blk_of[{r, s}];
  assign n_cur   = lb_cnt[b_cur];
  assign rd_word = glb_rdata[waddr_w[1:0]*32 +: 32];

  always_comb begin
    for (int i = 0; i < NB; i++) lb_cnt[i] = (POS_W+1)'(ptr[i+1] - ptr[i]);
  end

  assign cmd_ready = state == S_IDLE;
  assign pe_cfg    = '{phase: cq.phase, blk_len: cq.blk_len, scale: scale, seeds: cq.seeds};
  assign qe_filter = cq.qe_filter;
  assign sel_row   = r;
  assign sel_col   = c;
  assign sel_slot  = s;

  // combinational GLB / bus outputs
  logic [GLB_AW_W-1:0] oa;  // word address of the partial sum being collected
  always_comb begin
    oa        = '0;
    glb_re    = 1'b0;
    glb_raddr = GLB_AW'(waddr_w >> 2);
    glb_we    = 1'b0;
    glb_waddr = '0;
    glb_wen   = '0;
    glb_wdata = '0;
    hbus      = '0;
    vbus      = '0;
    lb_start  = 1'b0;
    pe_start  = 1'b0;
    qe_valid  = wb_rv;
    qe_data   = glb_rdata;
    qe_index  = 32'({wb_rl, 2'b00});
    unique case (state)
      S_PTR_RD, S_W_MRD, S_W_VRD, S_X_RD: glb_re = 1'b1;
      S_BAL:    lb_start = cq.lb_en;
      S_W_BASE: begin
        hbus[r].valid = 1'b1;
        hbus[r].kind  = HW_WBASE;
        hbus[r].slot  = s;
        hbus[r].data  = cq.wid_base + 32'(b_cur) * 32'(cq.blk_len);
      end
      S_W_MUSE: begin
        hbus[r].valid = 1'b1;
        hbus[r].kind  = HW_MASK;
        hbus[r].slot  = s;
        hbus[r].data  = rd_word;
      end
      S_W_VUSE: begin
        hbus[r].valid = 1'b1;
        hbus[r].kind  = HW_GRAD;
        hbus[r].slot  = s;
        hbus[r].addr  = POS_W'(k);
        hbus[r].data  = rd_word;
      end
      S_X_USE: begin
        vbus[c].valid = 1'b1;
        vbus[c].addr  = POS_W'(k);
        vbus[c].data  = rd_word;
      end
      S_RUN_GO: pe_start = 1'b1;
      S_COL: begin
        oa = cq.out_base + GLB_AW_W'(32'(b_cur) * COLS + 32'(c));
        glb_we    = 1'b1;
        glb_waddr = GLB_AW'(oa >> 2);
        glb_wen   = 4'b0001 << oa[1:0];
        glb_wdata = {4{pe_res}};
      end
      S_WB: begin
        glb_re    = wb_l != wb_end && q_free >= (QAW+1)'(12);
        glb_raddr = wb_l;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cq           <= '0;
      for (int i = 0; i <= NB; i++) ptr[i] <= '0;
      blk_of       <= '0;
      pi           <= '0;
      r            <= '0;
      c            <= '0;
      s            <= '0;
      k            <= '0;
      waddr_w      <= '0;
      wb_l         <= '0;
      wb_end       <= '0;
      wb_rv        <= 1'b0;
      wb_rl        <= '0;
      done         <= 1'b0;
      run_cycles   <= '0;
      stall_cycles <= '0;
      scale        <= '0;
    end else begin
      done  <= 1'b0;
      wb_rv <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          cq <= '{phase: cfg.phase, lb_en: cfg.lb_en, blk_len: cfg.blk_len,
                  seeds: cfg.seeds, mask_base: cfg.mask_base, wgt_base: cfg.wgt_base,
                  act_base: cfg.act_base, out_base: cfg.out_base,
                  wid_base: cfg.wid_base, qe_filter: cfg.qe_filter};
          unique case (cmd)
            CMD_PASS: begin
              pi      <= '0;
              waddr_w <= cfg.ptr_base;
              state   <= S_PTR_RD;
            end
            CMD_WRITEBACK: begin
              wb_l   <= GLB_AW'(cfg.wb_line);
              wb_end <= GLB_AW'(cfg.wb_line) + GLB_AW'(cfg.wb_lines);
              stall_cycles <= '0;
              state  <= S_WB;
            end
            CMD_SET_SCALE: begin
              scale <= cfg.scale;
              state <= S_DONE;
            end
            CMD_DECAY: begin
              scale <= SCALE_W'((32'(scale) * 32'(LAMBDA_Q16)) >> 16);
              state <= S_DONE;
            end
            default: state <= S_DONE;
          endcase
        end
        // ---- 1. CSB pointers ----
        S_PTR_RD: state <= S_PTR_USE;
        S_PTR_USE: begin
          ptr[pi] <= GLB_AW_W'(rd_word);
          if (32'(pi) == NB) state <= S_BAL;
          else begin
            pi      <= pi + 1'b1;
            waddr_w <= waddr_w + 1'b1;
            state   <= S_PTR_RD;
          end
        end
        // ---- 2. load balancing ----
        S_BAL: begin
          if (cq.lb_en) state <= S_BAL_WAIT;
          else begin
            for (int i = 0; i < NB; i++) blk_of[i] <= BW'(i);
            r <= '0; s <= '0;
            state <= S_W_BASE;
          end
        end
        S_BAL_WAIT: if (lb_done) begin
          for (int t = 0; t < ROWS; t++) begin
            blk_of[2*t]     <= lb_dense[t];
            blk_of[2*t + 1] <= lb_sparse[t];
          end
          r <= '0; s <= '0;
          state <= S_W_BASE;
        end
        // ---- 3. weights, row multicast ----
        S_W_BASE: begin
          waddr_w <= cq.mask_base + GLB_AW_W'(b_cur);
          state   <= S_W_MRD;
        end
        S_W_MRD: state <= S_W_MUSE;
        S_W_MUSE: begin
          k       <= '0;
          waddr_w <= cq.wgt_base + ptr[(BW+1)'(b_cur)];
          state   <= S_W_VRD;
          if (n_cur == '0) begin
            // empty block: go straight to the next one
            if (s == SLOT_W'(PE_SLOTS - 1)) begin
              s <= '0;
              if (32'(r) == ROWS - 1) begin c <= '0; waddr_w <= cq.act_base; state <= S_X_RD; end
              else begin r <= r + 1'b1; state <= S_W_BASE; end
            end else begin
              s <= s + 1'b1;
              state <= S_W_BASE;
            end
          end
        end
        S_W_VRD: state <= S_W_VUSE;
        S_W_VUSE: begin
          if (k + 1'b1 == n_cur) begin
            k <= '0;
            if (s == SLOT_W'(PE_SLOTS - 1)) begin
              s <= '0;
              if (32'(r) == ROWS - 1) begin c <= '0; waddr_w <= cq.act_base; state <= S_X_RD; end
              else begin r <= r + 1'b1; state <= S_W_BASE; end
            end else begin
              s <= s + 1'b1;
              state <= S_W_BASE;
            end
          end else begin
            k       <= k + 1'b1;
            waddr_w <= waddr_w + 1'b1;
            state   <= S_W_VRD;
          end
        end
        // ---- 4. activations, column multicast ----
        S_X_RD: state <= S_X_USE;
        S_X_USE: begin
          waddr_w <= waddr_w + 1'b1;
          if (k + 1'b1 == cq.blk_len) begin
            k <= '0;
            if (32'(c) == COLS - 1) state <= S_RUN_GO;
            else begin c <= c + 1'b1; state <= S_X_RD; end
          end else begin
            k     <= k + 1'b1;
            state <= S_X_RD;
          end
        end
        // ---- 5. compute ----
        S_RUN_GO: begin
          run_cycles <= '0;
          state      <= S_RUN_WAIT;
        end
        S_RUN_WAIT: begin
          run_cycles <= run_cycles + 1'b1;
          if (!pe_busy) begin
            r <= '0; c <= '0; s <= '0;
            state <= S_COL;
          end
        end
        // ---- 6. unicast collection ----
        S_COL: begin
          if (s == SLOT_W'(PE_SLOTS - 1)) begin
            s <= '0;
            if (32'(c) == COLS - 1) begin
              c <= '0;
              if (32'(r) == ROWS - 1) state <= S_DONE;
              else r <= r + 1'b1;
            end else c <= c + 1'b1;
          end else s <= s + 1'b1;
        end
        // ---- write-back through the quantile estimator ----
        S_WB: begin
          if (glb_re) begin
            wb_l  <= wb_l + 1'b1;
            wb_rv <= 1'b1;
            wb_rl <= wb_l;
          end else if (wb_l != wb_end) begin
            stall_cycles <= stall_cycles + 1'b1;
          end
          if (wb_l == wb_end || (glb_re && wb_l + 1'b1 == wb_end)) state <= S_WB_DRAIN;
        end
        S_WB_DRAIN: state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_block_fits: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_W_MUSE |-> n_cur <= (POS_W+1)'(BLOCK_MAX));
endmodule
