// activation_unit: rescaling, nonlinear function and pooling of results.
//
// Final 32-bit accumulator rows from the dot-product engine (M lanes) pass
// through a three-stage pipeline before they are written back to memory:
//   1. add the per-channel bias and multiply by the rescale multiplier;
//   2. arithmetic right shift with round-half-up, add the output zero point
//      and clamp to [cmin, cmax] (the int8 or int16 range, or a tighter
//      range, which also gives ReLU and ReLU6);
//   3. 8-bit outputs may be replaced by a 256-entry lookup table indexed by
//      the clamped value (any function of one int8, e.g. Swish or Mish);
//      then min or max pooling over `pool` consecutive result rows.
// A row enters every cycle if wanted; out_valid carries one pooled row
// (M lanes of 16 bits; 8-bit results are sign-extended) three cycles after
// the last input row of a pooling window. absorbed pulses for an input row
// that only updated the pooling register. clear restarts the pooling window.
//
// Rescale to 8 or 16 bits, arbitrary nonlinear functions and on-the-fly
// min/max pooling are what the architecture provides; the multiplier/shift
// rescale form, the lookup table (8-bit only) and the pooling of consecutive
// rows are this design's choices.
module activation_unit
  import neutron_pkg::act_cfg_t;
#(
  parameter int unsigned M     = 16,
  parameter int unsigned ACC_W = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  act_cfg_t                   cfg,
  input  logic [M-1:0][ACC_W-1:0]    bias,
  input  logic                       clear,
  // lookup table programming
  input  logic                       lut_we,
  input  logic [7:0]                 lut_addr,
  input  logic [7:0]                 lut_wdata,
  // input rows
  input  logic                       in_valid,
  input  logic [M-1:0][ACC_W-1:0]    in_data,
  // output rows
  output logic                       out_valid,
  output logic [M-1:0][15:0]         out_data,
  output logic                       absorbed
);
  localparam int unsigned PW = ACC_W + 16;

  logic [7:0] lut [256];
  always_ff @(posedge clk)
    if (lut_we) lut[lut_addr] <= lut_wdata;

  // stage 1
  logic                      v1;
  logic signed [PW-1:0]      p1 [M];
  // stage 2
  logic                      v2;
  logic signed [15:0]        c2 [M];
  // stage 3
  logic [2:0]                pcnt;
  logic signed [15:0]        pool_q [M];

  always_ff @(posedge clk) begin
    for (int m = 0; m < int'(M); m++) begin
      logic signed [ACC_W-1:0] x;
      x = $signed(in_data[m]) + $signed(bias[m]);
      p1[m] <= PW'(x) * PW'(cfg.mult);
    end
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < int'(M); m++) begin
      logic signed [PW-1:0] r;
      r = (cfg.shift == 5'd0) ? p1[m]
                              : (p1[m] + (PW'(1) <<< (cfg.shift - 5'd1))) >>> cfg.shift;
      r = r + PW'(cfg.zp);
      if (r < PW'(cfg.cmin))      c2[m] <= cfg.cmin;
      else if (r > PW'(cfg.cmax)) c2[m] <= cfg.cmax;
      else                        c2[m] <= r[15:0];
    end
  end

  // stage 3: table and pooling
  logic signed [15:0] f3 [M];
  logic               win_last;
  always_comb begin
    for (int m = 0; m < int'(M); m++) begin
      if (cfg.lut_en && !cfg.out16) f3[m] = 16'(signed'(lut[c2[m][7:0]]));
      else                          f3[m] = c2[m];
    end
  end
  assign win_last = (cfg.pool <= 3'd1) || (pcnt == cfg.pool - 3'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; pcnt <= '0;
      out_valid <= 1'b0; absorbed <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2 && win_last;
      absorbed  <= v2 && !win_last;
      if (clear)   pcnt <= '0;
      else if (v2) pcnt <= win_last ? 3'd0 : pcnt + 3'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (v2) begin
      for (int m = 0; m < int'(M); m++) begin
        logic signed [15:0] nv;
        if (pcnt == 3'd0)                           nv = f3[m];
        else if (cfg.pool_max ? (f3[m] > pool_q[m])
                              : (f3[m] < pool_q[m])) nv = f3[m];
        else                                         nv = pool_q[m];
        pool_q[m]   <= nv;
        out_data[m] <= nv;
      end
    end
  end
endmodule
