// global_buffer (GLB): the on-chip SRAM shared by all PEs (paper: 128 KB).
//
// Organised as BYTES/16 lines of 128 bits (four FP32 words), so that the
// quantile estimator can be fed four accumulated gradients per cycle, the
// paper's peak rate. One synchronous read port (data one cycle after the
// address) and one write port with per-word enables; a read and a write of
// the same line in one cycle return the old data. The capacity is the
// paper's; the line width and port arrangement are this design's choice.
// Written as an array so that a synthesis tool can map it to an SRAM macro.
module global_buffer #(
  parameter int unsigned BYTES = 131072,
  parameter int unsigned LINES = BYTES / 16,
  parameter int unsigned AW    = $clog2(LINES)
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [127:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [3:0]    wen,
  input  logic [127:0]  wdata
);
  logic [127:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (we) begin
      for (int w = 0; w < 4; w++) begin
        if (wen[w]) mem[waddr][w*32 +: 32] <= wdata[w*32 +: 32];
      end
    end
    if (re) rdata <= mem[raddr];
  end
endmodule
