// dram_wr_queue: the buffer between the quantile estimator and the 64-bit
// DRAM write port.
//
// The QE can hand over up to four surviving gradients per cycle, but the
// DRAM port (64 bits wide in the paper's Fig. 17) takes one {index, value}
// pair per cycle. This FIFO accepts any subset of four lanes per cycle,
// compacting them in lane order, and releases one 64-bit word {index[31:0],
// value[31:0]} per cycle when out_ready is high. free reports how many
// entries are empty so that the sender can stall early enough; pushing more
// than free is a protocol error checked by an assertion. Its presence,
// depth and word format are this design's choices.
// The assertions are switched off by the asynchronous reset (disable iff);
// lint reports rst_n as used both synchronously and asynchronously because of
// this. It concerns only the checks, not the circuit, so it is left as is.
module dram_wr_queue #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [3:0]        in_keep,
  input  logic [3:0][31:0]  in_data,
  input  logic [31:0]       in_index,   // index of lane 0
  output logic [AW:0]       free,
  output logic              out_valid,
  output logic [63:0]       out_data,
  input  logic              out_ready
);
  logic [63:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   count;
  logic [2:0]    npush;
  logic          pop;

  assign npush     = 3'(in_keep[0]) + 3'(in_keep[1]) + 3'(in_keep[2]) + 3'(in_keep[3]);
  assign out_valid = count != '0;
  assign out_data  = mem[rp];
  assign pop       = out_valid && out_ready;
  assign free      = (AW+1)'(DEPTH) - count;

  // slot of each kept lane: lanes are compacted in order
  logic [3:0][AW-1:0] slot;
  always_comb begin
    logic [AW-1:0] p;
    p = wp;
    for (int l = 0; l < 4; l++) begin
      slot[l] = p;
      if (in_keep[l]) p = p + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < 4; l++) begin
      if (in_keep[l]) mem[slot[l]] <= {in_index + 32'(l), in_data[l]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      wp    <= wp + AW'(npush);
      if (pop) rp <= rp + 1'b1;
      count <= count + (AW+1)'(npush) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (AW+1)'(npush) <= free);
endmodule
