// dot_product_engine: M dot-product units with a shared operand and
// output-stationary accumulation.
//
// All M units receive the same operand vector (op_a, N bytes) each cycle;
// each unit multiplies it with its own N-byte weight vector held in a
// register. The M sums go to the accumulator scratchpad row op_idx
// (A rows), so A different pixels can be accumulated while the weights stay
// in place: a weight vector loaded once serves up to A cycles. The weight
// registers are double buffered: w_load_* fills a shadow copy one unit at
// a time while the active copy is in use, and w_swap makes the shadow copy
// active at the next clock edge.
//
// An operation with op_clear starts its accumulator from zero; one with
// op_last also delivers the updated row on res_* (all M 32-bit values).
// 8x16-bit dot products take two operations into the same row: low bytes
// with op_a_unsigned, then high bytes with op_a_shift8.
//
// Timing: one operation per cycle, no stalls. An operation's scratchpad row
// is written 1 + log2(N) cycles after issue, and res_* show it one cycle
// later (LATENCY = 2 + log2(N) = 6 for N = 16). Sharing, the A accumulators and the 8x16 decomposition
// follow the architecture; the double-buffered weight registers and the
// interface are choices of this design.
module dot_product_engine #(
  parameter int unsigned N     = 16,
  parameter int unsigned M     = 16,
  parameter int unsigned A     = 32,
  parameter int unsigned ACC_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // operations
  input  logic                      op_valid,
  input  logic [N-1:0][7:0]         op_a,
  input  logic                      op_a_unsigned,
  input  logic                      op_a_shift8,
  input  logic [$clog2(A)-1:0]      op_idx,
  input  logic                      op_clear,
  input  logic                      op_last,
  // weight loading
  input  logic                      w_load_valid,
  input  logic [$clog2(M)-1:0]      w_load_unit,
  input  logic [N-1:0][7:0]         w_load_data,
  input  logic                      w_swap,
  // results
  output logic                      res_valid,
  output logic [$clog2(A)-1:0]      res_idx,
  output logic [M-1:0][ACC_W-1:0]   res_data
);
  localparam int unsigned IW    = $clog2(A);
  localparam int unsigned TAG_W = IW + 2;
  localparam int unsigned SUM_W = 27;

  logic [M-1:0][N-1:0][7:0] w_act, w_shadow;

  always_ff @(posedge clk) begin
    if (w_load_valid) w_shadow[w_load_unit] <= w_load_data;
    if (w_swap)       w_act <= w_shadow;
  end

  logic [M-1:0]                  u_valid;
  logic [M-1:0][TAG_W-1:0]       u_tag;
  logic signed [SUM_W-1:0]       u_sum [M];

  for (genvar m = 0; m < M; m++) begin : g_unit
    dot_product_unit #(.N(N), .TREE_IN_W(24), .TREE_OUT_W(SUM_W), .TAG_W(TAG_W)) u_dpu (
      .clk, .rst_n,
      .in_valid  (op_valid),
      .a         (op_a),
      .b         (w_act[m]),
      .a_unsigned(op_a_unsigned),
      .a_shift8  (op_a_shift8),
      .in_tag    ({op_idx, op_clear, op_last}),
      .out_valid (u_valid[m]),
      .out_tag   (u_tag[m]),
      .out_sum   (u_sum[m])
    );
  end

  // All units run in lockstep; unit 0's sideband stands for all.
  logic          s_valid, s_clear, s_last;
  logic [IW-1:0] s_idx;
  assign s_valid = u_valid[0];
  assign {s_idx, s_clear, s_last} = u_tag[0];

  logic [M-1:0][ACC_W-1:0] sp_rd, sp_wr;

  acc_scratchpad #(.M(M), .A(A), .ACC_W(ACC_W)) u_sp (
    .clk,
    .rd_idx (s_idx),
    .rd_data(sp_rd),
    .wr_en  (s_valid),
    .wr_idx (s_idx),
    .wr_data(sp_wr)
  );

  always_comb begin
    for (int m = 0; m < int'(M); m++)
      sp_wr[m] = (s_clear ? '0 : sp_rd[m]) + ACC_W'(u_sum[m]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_valid <= 1'b0;
    else        res_valid <= s_valid & s_last;
  end
  always_ff @(posedge clk) begin
    res_idx  <= s_idx;
    res_data <= sp_wr;
  end
endmodule
