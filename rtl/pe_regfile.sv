// pe_regfile: the PE's local register file (paper: 1 KB per PE).
//
// WORDS x 32-bit array with one write port and two synchronous read ports,
// so that the PE can fetch an activation and a packed accumulated gradient in
// the same cycle. Read data appear on the cycle after the address. A write and
// a read of the same word in one cycle return the old value. The size is the
// paper's; the port arrangement and timing are this design's choice.
module pe_regfile #(
  parameter int unsigned WORDS = 256,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr0,
  output logic [31:0]   rdata0,
  input  logic [AW-1:0] raddr1,
  output logic [31:0]   rdata1
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata0 <= mem[raddr0];
    rdata1 <= mem[raddr1];
  end
endmodule
