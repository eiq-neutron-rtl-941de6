// tb_dot_product_engine: output-stationary accumulation over several
// weight chunks with double-buffered weight loading, for 8-bit and 16-bit
// shared operands. Checks every result row against a reference model, the
// result latency (2 + log2(N) cycles after the last operation) and that one
// operation per cycle is accepted.
//
// Weights are loaded into the shadow buffer while the previous chunk
// computes, so ops issue every cycle; results are checked for value,
// latency (6 cycles from the last op) and one op per cycle. The shared
// operand and output-stationary accumulators follow the architecture.
module tb_dot_product_engine;
  localparam int N = 16, M = 16, A = 32, LAT = 2 + $clog2(N);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  always #5 clk = ~clk;

  logic op_valid, op_uns, op_sh8, op_clear, op_last, w_load_valid, w_swap, res_valid;
  logic [N-1:0][7:0] op_a, w_load_data;
  logic [4:0] op_idx, res_idx;
  logic [3:0] w_load_unit;
  logic [M-1:0][31:0] res_data;
  int checks = 0, failures = 0;

  dot_product_engine #(.N(N), .M(M), .A(A)) dut (
    .clk, .rst_n, .op_valid, .op_a, .op_a_unsigned(op_uns), .op_a_shift8(op_sh8),
    .op_idx, .op_clear, .op_last, .w_load_valid, .w_load_unit, .w_load_data, .w_swap,
    .res_valid, .res_idx, .res_data);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int K = 3, P = 32;
  logic [7:0]  w    [K][M][N];
  logic [15:0] x    [P][K][N];
  longint      expv [P][M];
  int          last_cyc [A];
  int          nres;

  always @(posedge clk) if (res_valid && rst_n) begin
    checks++;
    nres++;
    for (int m = 0; m < M; m++)
      if ($signed(res_data[m]) != int'(expv[res_idx][m])) begin
        failures++;
        $display("FAIL idx %0d unit %0d got %0d exp %0d", res_idx, m, $signed(res_data[m]), expv[res_idx][m]);
        break;
      end
    checks++;
    if (cyc - last_cyc[res_idx] != LAT) begin
      failures++; $display("FAIL latency %0d", cyc - last_cyc[res_idx]);
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic load_chunk(int k);
    for (int m = 0; m < M; m++) begin
      w_load_valid = 1; w_load_unit = 4'(m);
      for (int i = 0; i < N; i++) w_load_data[i] = w[k][m][i];
      @(negedge clk);
    end
    w_load_valid = 0;
  endtask

  task automatic run(bit in16);
    int t0;
    for (int k = 0; k < K; k++) for (int m = 0; m < M; m++) for (int i = 0; i < N; i++)
      w[k][m][i] = 8'($urandom);
    for (int p = 0; p < P; p++) for (int k = 0; k < K; k++) for (int i = 0; i < N; i++)
      x[p][k][i] = in16 ? 16'($urandom) : 16'(signed'(8'($urandom)));
    for (int p = 0; p < P; p++) for (int m = 0; m < M; m++) begin
      expv[p][m] = 0;
      for (int k = 0; k < K; k++) for (int i = 0; i < N; i++)
        expv[p][m] += longint'($signed(x[p][k][i])) * longint'($signed(w[k][m][i]));
    end
    nres = 0;
    load_chunk(0);
    w_swap = 1; @(negedge clk); w_swap = 0;
    t0 = cyc;
    for (int k = 0; k < K; k++) begin
      // shadow load of the next chunk overlaps the operations (done in
      // parallel by a forked loader)
      fork
        if (k + 1 < K) load_chunk(k + 1);
        begin
          for (int p = 0; p < P; p++) begin
            for (int h = 0; h < (in16 ? 2 : 1); h++) begin
              op_valid = 1; op_idx = 5'(p);
              for (int i = 0; i < N; i++)
                op_a[i] = in16 ? (h ? x[p][k][i][15:8] : x[p][k][i][7:0]) : x[p][k][i][7:0];
              op_uns = in16 && h == 0; op_sh8 = in16 && h == 1;
              op_clear = (k == 0 && h == 0);
              op_last  = (k == K - 1) && (h == (in16 ? 1 : 0));
              if (op_last) last_cyc[p] = cyc;
              w_swap = (k + 1 < K) && (p == P - 1) && (h == (in16 ? 1 : 0));
              @(negedge clk);
            end
          end
          op_valid = 0; w_swap = 0;
        end
      join
    end
    // one operation per cycle: K*P*(1 or 2) cycles of issue
    checks++;
    if (cyc - t0 != K * P * (in16 ? 2 : 1)) begin
      failures++; $display("FAIL issue cycles %0d", cyc - t0);
    end
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (nres != P) begin failures++; $display("FAIL %0d results", nres); end
  endtask

  initial begin
    op_valid = 0; op_a = '0; op_uns = 0; op_sh8 = 0; op_idx = 0; op_clear = 0; op_last = 0;
    w_load_valid = 0; w_load_unit = 0; w_load_data = '0; w_swap = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
