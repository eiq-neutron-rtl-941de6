// tb_dot_product_unit: random 8x8 and split 8x16 dot products against a
// reference model; checks the pipeline latency of 1 + log2(N) cycles and a
// throughput of one result per cycle.
//
// Operands are random bytes; 16-bit operands are split into an unsigned
// low byte and a signed high byte weighted by 2^8 and summed here, as the
// two-cycle decomposition of the architecture prescribes.
module tb_dot_product_unit;
  localparam int N = 16;
  localparam int LAT = 1 + $clog2(N);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  always #5 clk = ~clk;

  logic in_valid, a_uns, a_sh8;
  logic [N-1:0][7:0] a, b;
  logic [7:0] in_tag, out_tag;
  logic out_valid;
  logic signed [26:0] out_sum;
  int checks = 0, failures = 0;

  dot_product_unit #(.N(N), .TAG_W(8)) dut (
    .clk, .rst_n, .in_valid, .a, .b, .a_unsigned(a_uns), .a_shift8(a_sh8),
    .in_tag, .out_valid, .out_tag, .out_sum);

  // expected results indexed by tag, with issue cycle
  longint exp_sum [256];
  int     exp_cyc [256];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint ref_dot(logic [N-1:0][7:0] x, logic [N-1:0][7:0] y,
                                     bit uns, bit sh);
    longint s = 0;
    for (int i = 0; i < N; i++) begin
      longint xv = uns ? longint'(x[i]) : longint'($signed(x[i]));
      s += xv * longint'($signed(y[i])) * (sh ? 256 : 1);
    end
    return s;
  endfunction

  int got = 0;
  always @(posedge clk) if (out_valid && rst_n) begin
    checks++;
    if (longint'(out_sum) != exp_sum[out_tag] || cyc - exp_cyc[out_tag] != LAT) begin
      failures++;
      $display("FAIL tag %0d: got %0d exp %0d latency %0d", out_tag, out_sum,
               exp_sum[out_tag], cyc - exp_cyc[out_tag]);
    end
    got++;
  end

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    in_valid = 0; a = '0; b = '0; a_uns = 0; a_sh8 = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // back-to-back stream: plain int8, extremes, and 16-bit halves
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        a[i] = 8'($urandom); b[i] = 8'($urandom);
        if (t < 4) begin a[i] = (t[0]) ? 8'h80 : 8'h7f; b[i] = 8'h80; end
      end
      a_uns = (t % 3 == 1); a_sh8 = (t % 3 == 2);
      if (t == 4) begin a = '1; b = '1; a_uns = 1; a_sh8 = 0; end // 255 * -1
      in_valid = 1; in_tag = 8'(t);
      exp_sum[t] = ref_dot(a, b, a_uns, a_sh8);
      exp_cyc[t] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (got != 200) begin failures++; $display("FAIL: %0d results", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
