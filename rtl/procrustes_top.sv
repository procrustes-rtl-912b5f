// procrustes_top: the Procrustes sparse-training accelerator (paper Fig. 17).
//
// A 16x16 array of FP32 PEs with K (output channels) along the rows and N
// (minibatch) along the columns, a 128 KB global buffer, the load balancer
// next to the buffer, and the quantile estimator on the path from the buffer
// to off-chip DRAM. Weights are kept in the compressed sparse block (CSB)
// format; each PE rebuilds its weights from accumulated gradients and
// recomputed initial values (WR unit) and skips pruned positions once the
// initial values have decayed to zero.
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   * command port: cmd/cfg are taken when cmd_valid && cmd_ready; done pulses
//     at the end of the command (see procrustes_ctrl for the commands);
//   * DRAM fill port (DRAM -> GLB, 64 bits): one pair of words per cycle,
//     dram_in_addr is an even word address; accepted when dram_in_ready,
//     which is low only while the controller itself writes the GLB;
//   * DRAM write-back port (GLB -> QE -> DRAM, 64 bits): {index, value} of
//     each word that survived the QE, valid/ready handshake;
//   * status: the QE threshold theta, the PE cycles of the last pass, the
//     write-back stall cycles and the current WR scaling factor.
// The DRAM itself is outside the chip and not modelled here.
module procrustes_top
  import procrustes_pkg::*;
#(
  parameter int unsigned ROWS      = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned GLB_BYTES = 131072,
  parameter int unsigned RF_WORDS  = 256,
  parameter int unsigned FRAC_BITS = 32,
  localparam int unsigned GLB_AW   = $clog2(GLB_BYTES / 16)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                cmd_valid,
  input  cmd_e                cmd,
  input  ctrl_cfg_t           cfg,
  output logic                cmd_ready,
  output logic                done,
  input  logic                dram_in_valid,
  input  logic [GLB_AW_W-1:0] dram_in_addr,
  input  logic [63:0]         dram_in_data,
  output logic                dram_in_ready,
  output logic                dram_out_valid,
  output logic [63:0]         dram_out_data,
  input  logic                dram_out_ready,
  output fp32_t               theta,
  output logic [31:0]         run_cycles,
  output logic [31:0]         stall_cycles,
  output logic [SCALE_W-1:0]  scale
);
  localparam int unsigned NB     = 2 * ROWS;
  localparam int unsigned BW     = $clog2(NB);
  localparam int unsigned QDEPTH = 16;

  // GLB ports
  logic               c_re, c_we, g_we;
  logic [GLB_AW-1:0]  c_raddr, c_waddr, g_waddr;
  logic [3:0]         c_wen, g_wen;
  logic [127:0]       g_rdata, c_wdata, g_wdata;

  // DRAM fill has the write port whenever the controller does not
  assign dram_in_ready = !c_we;
  always_comb begin
    if (c_we) begin
      g_we = 1'b1; g_waddr = c_waddr; g_wen = c_wen; g_wdata = c_wdata;
    end else begin
      g_we    = dram_in_valid;
      g_waddr = GLB_AW'(dram_in_addr >> 2);
      g_wen   = dram_in_addr[1] ? 4'b1100 : 4'b0011;
      g_wdata = {2{dram_in_data}};
    end
  end

  global_buffer #(.BYTES(GLB_BYTES)) u_glb (
    .clk, .re(c_re), .raddr(c_raddr), .rdata(g_rdata),
    .we(g_we), .waddr(g_waddr), .wen(g_wen), .wdata(g_wdata)
  );

  // load balancer
  logic                    lb_start, lb_done;
  logic [NB-1:0][POS_W:0]  lb_cnt;
  logic [ROWS-1:0][BW-1:0] lb_dense, lb_sparse;
  load_balancer #(.N_HALF(NB), .CNT_W(POS_W + 1)) u_lb (
    .clk, .rst_n, .start(lb_start), .cnt(lb_cnt), .done(lb_done),
    .pair_dense(lb_dense), .pair_sparse(lb_sparse)
  );

  // PE array
  hbus_t [ROWS-1:0]          hbus;
  vbus_t [COLS-1:0]          vbus;
  pe_cfg_t                   pe_cfg;
  logic                      pe_start, pe_busy;
  logic [$clog2(ROWS)-1:0]   sel_row;
  logic [$clog2(COLS)-1:0]   sel_col;
  logic [SLOT_W-1:0]         sel_slot;
  fp32_t                     pe_res;
  pe_array #(.ROWS(ROWS), .COLS(COLS), .RF_WORDS(RF_WORDS), .FRAC_BITS(FRAC_BITS)) u_array (
    .clk, .rst_n, .hbus, .vbus, .cfg(pe_cfg), .start(pe_start), .busy_any(pe_busy),
    .sel_row, .sel_col, .sel_slot, .res_out(pe_res)
  );

  // quantile estimator and DRAM write queue
  logic               qe_filter, qe_valid, qo_valid;
  fp32_t [3:0]        qe_data, qo_data;
  logic [31:0]        qe_index, qo_index;
  logic [3:0]         qo_keep;
  logic [$clog2(QDEPTH):0] q_free;
  quantile_estimator u_qe (
    .clk, .rst_n, .filter(qe_filter), .in_valid(qe_valid), .in_lane_valid(4'hf),
    .in_data(qe_data), .in_index(qe_index), .out_valid(qo_valid), .out_keep(qo_keep),
    .out_data(qo_data), .out_index(qo_index), .theta(theta)
  );
  dram_wr_queue #(.DEPTH(QDEPTH)) u_q (
    .clk, .rst_n, .in_keep(qo_keep & {4{qo_valid}}), .in_data(qo_data), .in_index(qo_index),
    .free(q_free), .out_valid(dram_out_valid), .out_data(dram_out_data), .out_ready(dram_out_ready)
  );

  procrustes_ctrl #(.ROWS(ROWS), .COLS(COLS), .GLB_AW(GLB_AW), .QDEPTH(QDEPTH)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd, .cfg, .cmd_ready, .done,
    .glb_re(c_re), .glb_raddr(c_raddr), .glb_rdata(g_rdata),
    .glb_we(c_we), .glb_waddr(c_waddr), .glb_wen(c_wen), .glb_wdata(c_wdata),
    .lb_start, .lb_cnt, .lb_done, .lb_dense, .lb_sparse,
    .hbus, .vbus, .pe_cfg, .pe_start, .pe_busy, .sel_row, .sel_col, .sel_slot, .pe_res,
    .qe_filter, .qe_valid, .qe_data, .qe_index, .q_free,
    .run_cycles, .stall_cycles, .scale
  );
endmodule
