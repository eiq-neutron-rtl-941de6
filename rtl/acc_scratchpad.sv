// acc_scratchpad: the engine's local accumulator scratchpad.
//
// Holds A 32-bit accumulators for each of the M dot-product units, so that
// the engine can work on A output pixels at once while each unit's weights
// stay in place (output-stationary flow: the wide partial sums never leave
// the engine). A row (one accumulator index, all M units) is read
// combinationally and written on the clock edge, which lets the dot-product
// engine do a read-modify-write every cycle; a read in the cycle after a
// write to the same row sees the new value.
//
// The size (M x A x 32 bit) follows the architecture (A = 2M); the
// single-row read/write organisation is this design's choice.
module acc_scratchpad #(
  parameter int unsigned M     = 16,
  parameter int unsigned A     = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                      clk,
  input  logic [$clog2(A)-1:0]      rd_idx,
  output logic [M-1:0][ACC_W-1:0]   rd_data,
  input  logic                      wr_en,
  input  logic [$clog2(A)-1:0]      wr_idx,
  input  logic [M-1:0][ACC_W-1:0]   wr_data
);
  logic [M-1:0][ACC_W-1:0] mem [A];

  always_ff @(posedge clk)
    if (wr_en) mem[wr_idx] <= wr_data;

  assign rd_data = mem[rd_idx];
endmodule
