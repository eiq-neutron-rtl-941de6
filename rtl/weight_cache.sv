// weight_cache: the engine's parameter scratchpad of W_C bytes.
//
// In a convolution or embedding layer the same parameters serve every output
// pixel. The engine fetches the parameters of a layer once, for its first
// group of pixels, writes them here as they arrive, and reads them back from
// here for all later groups instead of fetching them over the parameter bus
// again. The size, 8 kB (512 words of 128 bits), is the configured W_C; the
// one-write/one-read word organisation with a registered read (data one cycle
// after rd_en) is this design's choice, as for a simple two-port SRAM.
module weight_cache #(
  parameter int unsigned BYTES  = 8192,
  parameter int unsigned WORD_W = 128
) (
  input  logic                                     clk,
  input  logic                                     wr_en,
  input  logic [$clog2(BYTES/(WORD_W/8))-1:0]      wr_addr,
  input  logic [WORD_W-1:0]                        wr_data,
  input  logic                                     rd_en,
  input  logic [$clog2(BYTES/(WORD_W/8))-1:0]      rd_addr,
  output logic [WORD_W-1:0]                        rd_data
);
  localparam int unsigned DEPTH = BYTES / (WORD_W / 8);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
