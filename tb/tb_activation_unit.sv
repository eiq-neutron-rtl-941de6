// tb_activation_unit: random accumulator rows through rescale, clamp,
// lookup table and min/max pooling, compared with a reference model.
// Checks the three-cycle latency and the absorbed pulses of pooling.
//
// Inputs are driven one row per cycle at random gaps; the reference
// repeats the requantisation arithmetic (multiply, rounding shift, zero
// point, clamp), the table lookup and the pooling window in plain integer
// code. Rescaling to 8/16 bit, the nonlinear function and min/max pooling
// are the architecture's; the arithmetic details are this design's.
module tb_activation_unit;
  import neutron_pkg::act_cfg_t;
  localparam int M = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  always #5 clk = ~clk;

  act_cfg_t cfg;
  logic [M-1:0][31:0] bias, in_data;
  logic clear, lut_we, in_valid, out_valid, absorbed;
  logic [7:0] lut_addr, lut_wdata;
  logic [M-1:0][15:0] out_data;
  logic [7:0] lut [256];
  int checks = 0, failures = 0;

  activation_unit #(.M(M)) dut (.*);

  initial begin
    #4000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int ref_one(int acc, int b);
    longint x, p, r;
    x = longint'(int'(acc + b));
    p = x * longint'(cfg.mult);
    r = (cfg.shift == 0) ? p : ((p + (longint'(1) << (cfg.shift - 1))) >>> cfg.shift);
    r = r + longint'(cfg.zp);
    if (r < cfg.cmin) r = cfg.cmin;
    if (r > cfg.cmax) r = cfg.cmax;
    if (cfg.lut_en && !cfg.out16) r = longint'($signed(lut[8'(r)]));
    return int'(r);
  endfunction

  int exp_q [$];
  int exp_t [$];
  int cyc = 0, nout = 0, nabs = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic [M-1:0][15:0] expected [$];

  always @(posedge clk) begin
    if (absorbed && rst_n) nabs++;
    if (out_valid && rst_n) begin
      logic [M-1:0][15:0] e;
      int t;
      e = expected[0];
      t = exp_t[0];
      void'(expected.pop_front());
      void'(exp_t.pop_front());
      checks++;
      if (out_data != e) begin
        failures++; $display("FAIL row %0d got %h exp %h cyc %0d t %0d qs %0d", nout, out_data, e, cyc, t, expected.size());
      end
      checks++;
      if (cyc - t != 3) begin failures++; $display("FAIL latency %0d", cyc - t); end
      nout++;
    end
  end

  task automatic run(int rows);
    logic [M-1:0][15:0] pv;
    int pc;
    pc = 0;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int r = 0; r < rows; r++) begin
      for (int m = 0; m < M; m++) in_data[m] = $urandom_range(0, 2000000) - 1000000;
      in_valid = 1;
      for (int m = 0; m < M; m++) begin
        int v;
        v = ref_one(int'(in_data[m]), int'(bias[m]));
        if (pc == 0) pv[m] = 16'(v);
        else if (cfg.pool_max ? v > int'($signed(pv[m])) : v < int'($signed(pv[m]))) pv[m] = 16'(v);
      end
      pc++;
      if (pc == ((cfg.pool == 0) ? 1 : cfg.pool)) begin
        expected.push_back(pv);
        exp_t.push_back(cyc);
        pc = 0;
      end
      @(negedge clk);
      in_valid = $urandom_range(0, 3) == 0 ? 0 : 1;
      if (!in_valid) begin @(negedge clk); in_valid = 1; end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; clear = 0; lut_we = 0; lut_addr = 0; lut_wdata = 0; in_data = '0;
    cfg = '{mult: 16'sd1, shift: 5'd0, zp: 16'sd0, cmin: -16'sd128, cmax: 16'sd127,
            lut_en: 1'b0, out16: 1'b0, pool_max: 1'b1, pool: 3'd1};
    for (int m = 0; m < M; m++) bias[m] = $urandom_range(0, 20000) - 10000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program the table: a made-up nonlinear function
    for (int i = 0; i < 256; i++) begin
      lut[i] = 8'((i * 37 + 11) ^ (i >> 2));
      lut_we = 1; lut_addr = 8'(i); lut_wdata = lut[i];
      @(negedge clk);
    end
    lut_we = 0;
    // int8, rescale with rounding, no pooling
    cfg.mult = 16'sd77; cfg.shift = 5'd12; cfg.zp = 16'sd3;
    run(40);
    // ReLU-style clamp and 2-row max pooling
    cfg.cmin = 16'sd3; cfg.pool = 3'd2;
    run(40);
    // lookup table and 4-row min pooling
    cfg.cmin = -16'sd128; cfg.lut_en = 1; cfg.pool = 3'd4; cfg.pool_max = 0;
    run(40);
    // 16-bit output, negative multiplier, 3-row max pooling
    cfg.lut_en = 0; cfg.out16 = 1; cfg.cmin = -16'sd32768; cfg.cmax = 16'sd32767;
    cfg.mult = -16'sd300; cfg.shift = 5'd6; cfg.zp = -16'sd100; cfg.pool = 3'd3; cfg.pool_max = 1;
    run(39);
    checks++;
    if (nout != 40 + 20 + 10 + 13 || nabs != 20 + 30 + 26) begin
      failures++; $display("FAIL counts out %0d absorbed %0d", nout, nabs);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
