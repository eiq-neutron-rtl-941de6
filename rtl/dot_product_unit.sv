// dot_product_unit: one pipelined N-entry dot product per clock.
//
// Each cycle it takes a shared operand vector a (N bytes) and this unit's
// weight vector b (N signed bytes) and, 1 + log2(N)
// cycles later, returns sum_i a[i]*b[i]. Stage 0 holds N 8-bit
// multipliers; the following log2(N) stages form a registered binary adder
// tree (Fig. 1 of the architecture: N multipliers feeding a tree of adders).
//
// 8-bit x 16-bit dot products are built from two passes over the 8-bit
// multipliers, as the architecture prescribes: the low byte of each 16-bit
// operand is multiplied as an unsigned number (a_unsigned = 1), the high
// byte as a signed number shifted left by 8 (a_shift8 = 1). The shifted
// partial products need 24-bit tree inputs and the tree output is 27 bits,
// the widths given for the design; the two partial sums are added in the
// accumulator, outside this unit. One corner case exceeds 27 bits: all 16
// high bytes and all 16 weights equal to -128 give +2^26, which wraps. The
// stated 27-bit width is kept as given.
//
// Interface: in_valid/in_tag enter with the operands and leave, delayed by
// LATENCY = 1 + log2(N) cycles, as out_valid/out_tag with out_sum. There is
// no back-pressure: the unit accepts a new vector every cycle.
module dot_product_unit #(
  parameter int unsigned N          = 16,
  parameter int unsigned TREE_IN_W  = 24,
  parameter int unsigned TREE_OUT_W = 27,
  parameter int unsigned TAG_W      = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [N-1:0][7:0]            a,          // shared operand bytes
  input  logic [N-1:0][7:0]            b,          // this unit's weights (signed)
  input  logic                         a_unsigned, // a bytes are unsigned (low byte of 16-bit data)
  input  logic                         a_shift8,   // partial product weight 2^8 (high byte)
  input  logic [TAG_W-1:0]             in_tag,
  output logic                         out_valid,
  output logic [TAG_W-1:0]             out_tag,
  output logic signed [TREE_OUT_W-1:0] out_sum
);
  localparam int unsigned LOG2N = $clog2(N);

  for (genvar l = 0; l <= LOG2N; l++) begin : g_lvl
    localparam int unsigned W   = (TREE_IN_W + l > TREE_OUT_W) ? TREE_OUT_W : TREE_IN_W + l;
    localparam int unsigned CNT = N >> l;
    logic signed [W-1:0] v [CNT];
    logic                vld;
    logic [TAG_W-1:0]    tag;

    if (l == 0) begin : g_mul
      // 8-bit multipliers: a is sign- or zero-extended to 9 bits
      always_ff @(posedge clk) begin
        for (int i = 0; i < int'(N); i++) begin
          logic signed [8:0]  ax;
          logic signed [16:0] p;
          ax = {~a_unsigned & a[i][7], a[i]};
          p  = ax * $signed(b[i]);
          v[i] <= a_shift8 ? (W'(p) <<< 8) : W'(p);
        end
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= in_valid;
      end
      always_ff @(posedge clk) tag <= in_tag;
    end else begin : g_add
      always_ff @(posedge clk) begin
        for (int i = 0; i < int'(CNT); i++)
          v[i] <= W'(g_lvl[l-1].v[2*i]) + W'(g_lvl[l-1].v[2*i+1]);
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) vld <= 1'b0;
        else        vld <= g_lvl[l-1].vld;
      end
      always_ff @(posedge clk) tag <= g_lvl[l-1].tag;
    end
  end

  assign out_valid = g_lvl[LOG2N].vld;
  assign out_tag   = g_lvl[LOG2N].tag;
  assign out_sum   = TREE_OUT_W'(g_lvl[LOG2N].v[0]);
endmodule
