// pe_mask_mem: per-PE storage of the CSB masks of the blocks the PE holds.
//
// One mask per block slot. A mask has one bit per dense position of the block;
// a set bit marks a stored (non-zero / tracked) value, so the mask's
// population count is also the block's packed size, which this memory
// reports for every slot. The mask memory is listed in the paper as a
// per-PE addition; its organisation (one word per slot, reset to all-zero,
// popcount outputs) is this design's choice. Writes take effect at the clock
// edge; reads are combinational.
module pe_mask_mem
  import procrustes_pkg::*;
#(
  parameter int unsigned SLOTS = PE_SLOTS,
  parameter int unsigned MBITS = BLOCK_MAX
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          we,
  input  logic [$clog2(SLOTS)-1:0]      wslot,
  input  logic [MBITS-1:0]              wmask,
  output logic [SLOTS-1:0][MBITS-1:0]   mask,
  output logic [SLOTS-1:0][$clog2(MBITS+1)-1:0] nnz
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  mask <= '0;
    else if (we) mask[wslot] <= wmask;
  end

  always_comb begin
    for (int s = 0; s < SLOTS; s++) nnz[s] = $countones(mask[s]);
  end
endmodule
