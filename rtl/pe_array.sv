// pe_array: the 16x16 PE array and its three interconnects (paper Fig. 17,
// K,N mapping of Fig. 14).
//
// Rows index the output-channel dimension K and columns the minibatch
// dimension N. The three on-chip networks are:
//   * horizontal multicast: hbus[r] reaches every PE of row r, carrying the
//     CSB blocks (weights) shared by all samples of the minibatch;
//   * vertical multicast: vbus[c] reaches every PE of column c, carrying the
//     activations of sample c, shared by all output channels;
//   * unicast collection: one partial sum, chosen by (sel_row, sel_col,
//     sel_slot), is returned to the global buffer per cycle.
// cfg and start are broadcast. busy_any is high while any PE is busy.
// Fig. 17 draws the row and column links passing from PE to PE; here each
// bus is a plain broadcast wire, and the collection network is a
// multiplexer, both this design's simplifications. Combinational paths:
// the select inputs reach res_out without a register.
// The assertions are switched off by the asynchronous reset (disable iff);
// lint reports rst_n as used both synchronously and asynchronously because of
// this. It concerns only the checks, not the circuit, so it is left as is.
module pe_array
  import procrustes_pkg::*;
#(
  parameter int unsigned ROWS      = 16,
  parameter int unsigned COLS      = 16,
  parameter int unsigned RF_WORDS  = 256,
  parameter int unsigned FRAC_BITS = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  hbus_t [ROWS-1:0]           hbus,
  input  vbus_t [COLS-1:0]           vbus,
  input  pe_cfg_t                    cfg,
  input  logic                       start,
  output logic                       busy_any,
  input  logic [$clog2(ROWS)-1:0]    sel_row,
  input  logic [$clog2(COLS)-1:0]    sel_col,
  input  logic [SLOT_W-1:0]          sel_slot,
  output fp32_t                      res_out
);
  logic  [ROWS-1:0][COLS-1:0]               busy, done;
  fp32_t [ROWS-1:0][COLS-1:0][PE_SLOTS-1:0] res;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      pe #(.RF_WORDS(RF_WORDS), .FRAC_BITS(FRAC_BITS)) u_pe (
        .clk, .rst_n, .hbus(hbus[r]), .vbus(vbus[c]), .cfg, .start,
        .busy(busy[r][c]), .done(done[r][c]), .res(res[r][c])
      );
    end
  end

  assign busy_any = |busy;
  assign res_out  = res[sel_row][sel_col][sel_slot];

  // every PE of the array runs in lock-step with the others' start
  a_done_only_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    |done |-> busy_any);
endmodule
