// pe: one processing element of the Procrustes array (paper Fig. 17).
//
// The PE holds PE_SLOTS CSB blocks (the two half-tiles of its balanced work
// tile) and one dense activation vector. For each block it computes one
// partial sum  y[s] = sum_j w_s[j] * act[j'], where
//   w_s[j] = (mask_s[j] ? packed gradient : 0) + WR(wbase_s + j)
// is the weight rebuilt from its accumulated gradient and its recomputed
// initial value, and j' = j in the forward pass or blk_len-1-j in the
// backward pass (the 180-degree kernel rotation, done by reading the block in
// reverse). Pruned positions carry weight 0 once the WR scaling factor has
// decayed to zero, and are then skipped: the PE visits only the set mask bits
// (one MAC per stored value). While the scaling factor is non-zero every
// position has a non-zero initial value and all blk_len positions are visited.
// In the weight-update phase the CSB operand holds compressed activations,
// the WR is not used, and only set mask bits are visited.
//
// Interfaces: the horizontal bus (row multicast) writes masks, packed values
// and weight-index bases into block slots; the vertical bus (column
// multicast) writes activations. The two never write in the same cycle (the
// controller loads them in separate phases; an assertion checks it). A pulse
// on start runs the PE; busy is high until the partial sums res[] are final,
// and done pulses in the cycle busy falls.
//
// Timing: one visited position per cycle with no bubble between blocks; a
// block with nothing to visit costs one cycle. The pipeline is issue ->
// register-file read -> weight rebuild -> MAC -> result register, so busy
// falls four cycles after the last visited position was issued, or one
// cycle after the last block was passed, whichever is later.
// The datapath (mask-controlled mux between 0 and the gradient, WR adder,
// MAC, output register) follows Fig. 17; the skip rule, the rotation by
// reverse reading, the slot organisation and the pipeline are this design's.
// The assertions are switched off by the asynchronous reset (disable iff);
// lint reports rst_n as used both synchronously and asynchronously because of
// this. It concerns only the checks, not the circuit, so it is left as is.
module pe
  import procrustes_pkg::*;
#(
  parameter int unsigned RF_WORDS  = 256,  // 1 KB of 32-bit words
  parameter int unsigned FRAC_BITS = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  hbus_t   hbus,
  input  vbus_t   vbus,
  input  pe_cfg_t cfg,
  input  logic    start,
  output logic    busy,
  output logic    done,
  output fp32_t [PE_SLOTS-1:0] res
);
  localparam int unsigned AW = $clog2(RF_WORDS);

  fp32_t mac_acc;  // running partial sum (MAC output register)

  // ---------------- storage ----------------
  logic          rf_we;
  logic [AW-1:0] rf_waddr, ra_act, ra_grad;
  fp32_t         rf_wdata, rd_act, rd_grad;

  always_comb begin
    rf_we    = hbus.valid && hbus.kind == HW_GRAD || vbus.valid;
    rf_waddr = (hbus.valid && hbus.kind == HW_GRAD)
             ? AW'(BLOCK_MAX * (32'(hbus.slot) + 1) + 32'(hbus.addr))
             : AW'(vbus.addr);
    rf_wdata = (hbus.valid && hbus.kind == HW_GRAD) ? hbus.data : vbus.data;
  end

  pe_regfile #(.WORDS(RF_WORDS)) u_rf (
    .clk, .we(rf_we), .waddr(rf_waddr), .wdata(rf_wdata),
    .raddr0(ra_act), .rdata0(rd_act), .raddr1(ra_grad), .rdata1(rd_grad)
  );

  mask_t [PE_SLOTS-1:0]             masks;
  logic  [PE_SLOTS-1:0][POS_W:0]    nnz_unused;
  pe_mask_mem u_mask (
    .clk, .rst_n,
    .we(hbus.valid && hbus.kind == HW_MASK), .wslot(hbus.slot),
    .wmask(hbus.data[BLOCK_MAX-1:0]), .mask(masks), .nnz(nnz_unused)
  );

  logic [PE_SLOTS-1:0][31:0] wbase;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wbase <= '0;
    else if (hbus.valid && hbus.kind == HW_WBASE) wbase[hbus.slot] <= hbus.data;
  end

  // ---------------- issue stage ----------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e            state;
  logic [SLOT_W-1:0] slot;
  mask_t             rem;      // positions of the current block still to visit
  logic [POS_W-1:0]  ptr;      // packed index of the next stored value
  logic              first;    // next issued position starts a partial sum

  logic   use_wr, dense;
  mask_t  len_mask;
  always_comb begin
    use_wr   = cfg.phase != PH_WU && cfg.scale != '0;
    dense    = use_wr;
    len_mask = (cfg.blk_len >= (POS_W+1)'(BLOCK_MAX)) ? '1
             : mask_t'((mask_t'(1) << cfg.blk_len) - mask_t'(1));
  end

  function automatic mask_t visit_set(mask_t m, logic dn, mask_t lm);
    return dn ? lm : (m & lm);
  endfunction

  logic [POS_W-1:0] j;
  mask_t            rem_nx;
  logic             issue, mbit;
  always_comb begin
    j = '0;
    for (int i = BLOCK_MAX - 1; i >= 0; i--) if (rem[i]) j = POS_W'(i);
    rem_nx = rem & ~(mask_t'(1) << j);
    issue  = state == S_RUN && rem != '0;
    mbit   = masks[slot][j];
    ra_act = (cfg.phase == PH_BW) ? AW'(32'(cfg.blk_len) - 32'd1 - 32'(j)) : AW'(j);
    ra_grad = AW'(BLOCK_MAX * (32'(slot) + 1) + 32'(ptr));
  end

  // pipeline registers
  logic              v1, m1, f1, l1;
  logic [SLOT_W-1:0] s1;
  logic [31:0]       widx1;
  logic              v2, f2, l2;
  logic [SLOT_W-1:0] s2;
  fp32_t             w2, x2;
  logic              fin3;
  logic [SLOT_W-1:0] s3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      slot  <= '0;
      rem   <= '0;
      ptr   <= '0;
      first <= 1'b0;
      v1 <= 1'b0; m1 <= 1'b0; f1 <= 1'b0; l1 <= 1'b0; s1 <= '0; widx1 <= '0;
      res   <= '0;
    end else begin
      v1 <= issue;
      m1 <= mbit;
      f1 <= first;
      l1 <= issue && rem_nx == '0;
      s1 <= slot;
      widx1 <= wbase[slot] + 32'(j);
      if (fin3) res[s3] <= mac_acc;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          slot  <= '0;
          ptr   <= '0;
          first <= 1'b1;
          rem   <= visit_set(masks[0], dense, len_mask);
        end
        S_RUN: begin
          if (issue) begin
            rem   <= rem_nx;
            ptr   <= ptr + POS_W'(mbit);
            first <= 1'b0;
          end else begin
            res[slot] <= '0;  // block with nothing to visit
          end
          if (!issue || rem_nx == '0) begin
            if (32'(slot) == PE_SLOTS - 1) state <= S_DRAIN;
            else begin
              slot  <= slot + 1'b1;
              ptr   <= '0;
              first <= 1'b1;
              rem   <= visit_set(masks[slot + 1'b1], dense, len_mask);
            end
          end
        end
        S_DRAIN: if (!v1 && !v2 && !fin3) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- weight rebuild stage ----------------
  fp32_t init_w, grad_or_0, w_full;
  weight_recompute #(.FRAC_BITS(FRAC_BITS)) u_wr (
    .seeds(cfg.seeds), .index(widx1), .scale(use_wr ? cfg.scale : '0), .init_w(init_w)
  );
  assign grad_or_0 = m1 ? rd_grad : 32'd0;
  fp32_add u_wadd (.a(grad_or_0), .b(init_w), .y(w_full));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0; s2 <= '0; w2 <= '0; x2 <= '0;
      fin3 <= 1'b0; s3 <= '0;
    end else begin
      v2 <= v1; f2 <= f1; l2 <= l1; s2 <= s1;
      w2 <= w_full;
      x2 <= rd_act;
      fin3 <= v2 && l2;
      s3 <= s2;
    end
  end

  // ---------------- MAC stage ----------------
  fp32_mac u_mac (.clk, .rst_n, .en(v2), .clr(v2 && f2), .a(w2), .b(x2), .acc(mac_acc));

  assign busy = state != S_IDLE;
  assign done = state == S_DRAIN && !v1 && !v2 && !fin3;

  // the two multicast buses are never loaded in the same cycle
  a_no_bus_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(hbus.valid && hbus.kind == HW_GRAD && vbus.valid));
  // buses are not written while the PE is computing
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(hbus.valid || vbus.valid));
endmodule
