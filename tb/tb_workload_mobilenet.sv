// tb_workload_mobilenet: the two MobileNet-V2 layer types that are not dense
// convolutions, run on engine 0 of the full-size subsystem: a 3x3 depthwise
// convolution and a residual (element-wise) addition.
//
// Neither has a mode of its own: both are ordinary jobs whose weights are
// zero except on the diagonal (weight word m of chunk k holds a value only
// in byte m), so output channel m only sees input channel m.
//   * depthwise 3x3 over 16 channels: a line of 32 output pixels from three
//     input lines of 34 pixels (one word per pixel); the 9 chunks are the
//     filter taps, walked by the data engine's split reduction loop (3 taps
//     along the line, then the next line). 288 dot products, checked to run
//     within 20% of one per cycle (pipeline fill and drain included).
//   * residual add: out = sat(round((3*a + 5*b) / 4)) for two 32-pixel
//     tensors, one job of two chunks whose chunk stride is the distance
//     between the tensors; the diagonal weights 3 and 5 carry the two input
//     scales and the rescale applies the common one.
// Inputs and parameters are fetched from DDR by the DMA; the results are
// read back through the controller's TCM port and compared with a direct
// computation.
module tb_workload_mobilenet;
  import neutron_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [3:0] irq_eng;
  logic irq_dma;
  mem_req_t host_req;
  mem_rsp_t host_rsp;
  logic ext_req_valid, ext_req_ready, ext_req_we, ext_rsp_valid;
  logic [31:0] ext_req_addr;
  logic [127:0] ext_req_wdata, ext_rsp_data;
  int checks = 0, failures = 0;

  neutron_npu dut (.*);
  dram_model #(.LAT(20), .WORDS(4096), .STALL(1)) ddr (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_we(ext_req_we),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata), .rsp_valid(ext_rsp_valid),
    .rsp_data(ext_rsp_data));

  localparam int BANK = 4096;
  localparam int D_X = 0, D_A = 200, D_B = 300, D_PD = 1000, D_PA = 1200;
  localparam int T_P = 1 * BANK, T_O = 2 * BANK;

  int n_dma_done = 0, n_eng_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (irq_dma) n_dma_done++;
    if (irq_eng[0]) n_eng_done++;
  end

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(int sel, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'((sel << 12) | a); cfg_wdata = d;
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic fetch(int src, int dst, int n);
    int n0;
    n0 = n_dma_done;
    wr(5, 1, src); wr(5, 2, 1); wr(5, 3, 0); wr(5, 4, 0);
    wr(5, 5, dst); wr(5, 6, 1); wr(5, 7, 0); wr(5, 8, 0);
    wr(5, 9, n); wr(5, 10, 1); wr(5, 11, 1);
    wr(5, 0, 32'b011);
    while (n_dma_done == n0) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic host_read(int a, output logic [127:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b0, addr: 16'(a), wdata: '0};
    @(negedge clk);
    host_req = '0;
    d = host_rsp.rdata;
  endtask

  task automatic run_job(int db, int nk, int kin, int sk, int sk2, int pb, int mult, int shift,
                         int cmin, int cmax, output int cycles);
    int n0, t0;
    wr(0, 1, 32); wr(0, 2, nk); wr(0, 3, 1);
    wr(0, 4, db); wr(0, 5, 1); wr(0, 6, sk); wr(0, 7, 0);
    wr(0, 18, kin); wr(0, 19, sk2); wr(0, 20, 0);
    wr(0, 8, pb); wr(0, 9, 0); wr(0, 10, 0); wr(0, 11, T_O); wr(0, 12, 1);
    wr(0, 13, mult); wr(0, 14, shift); wr(0, 15, 0);
    wr(0, 16, {16'(cmax), 16'(cmin)}); wr(0, 17, 1);
    n0 = n_eng_done;
    @(negedge clk);
    t0 = $time;
    wr(0, 0, 1);
    while (n_eng_done == n0) @(posedge clk);
    cycles = ($time - t0) / 10;
    @(negedge clk);
  endtask

  function automatic int sbyte(logic [127:0] w, int i);
    return int'($signed(w[8 * i +: 8]));
  endfunction

  function automatic int requant(longint acc, int mult, int shift, int cmin, int cmax);
    longint r;
    r = (acc * mult + (longint'(1) << (shift - 1))) >>> shift;
    if (r < cmin) r = cmin;
    if (r > cmax) r = cmax;
    return int'(r);
  endfunction

  initial begin
    int cyc;
    logic [127:0] d, e;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; host_req = '0;
    for (int i = 0; i < 4096; i++) ddr.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    // depthwise parameters: biases, then 9 taps x 16 diagonal weight words
    for (int w = 0; w < 4; w++) for (int l = 0; l < 4; l++)
      ddr.mem[D_PD + w][32 * l +: 32] = $urandom_range(0, 2000) - 1000;
    for (int k = 0; k < 9; k++)
      for (int m = 0; m < 16; m++) begin
        ddr.mem[D_PD + 4 + k * 16 + m] = '0;
        ddr.mem[D_PD + 4 + k * 16 + m][8 * m +: 8] = 8'($urandom_range(0, 254) - 127);
      end
    // residual add parameters: zero biases, diagonal 3 (first input) and 5 (second)
    for (int w = 0; w < 4; w++) ddr.mem[D_PA + w] = '0;
    for (int k = 0; k < 2; k++)
      for (int m = 0; m < 16; m++) begin
        ddr.mem[D_PA + 4 + k * 16 + m] = '0;
        ddr.mem[D_PA + 4 + k * 16 + m][8 * m +: 8] = (k == 0) ? 8'd3 : 8'd5;
      end
    repeat (3) @(negedge clk);
    rst_n = 1;

    fetch(D_X, 0, D_B + 32);                  // both inputs into bank 0
    fetch(D_PD, T_P, 4 + 9 * 16);
    fetch(D_PA, T_P + 256, 4 + 2 * 16);

    // depthwise 3x3: inner loop 3 taps along the line, then the next line (34 words)
    run_job(D_X, 9, 3, 1, 34, T_P, 45, 11, 0, 127, cyc);
    $display("depthwise: %0d cycles for 288 dot products", cyc);
    checks++;
    if (cyc * 100 > 288 * 120) begin failures++; $display("FAIL depthwise rate"); end
    for (int x = 0; x < 32; x++) begin
      host_read(T_O + x, d);
      for (int m = 0; m < 16; m++) begin
        longint acc;
        acc = longint'(int'(ddr.mem[D_PD + m / 4][32 * (m % 4) +: 32]));
        for (int ky = 0; ky < 3; ky++)
          for (int kx = 0; kx < 3; kx++)
            acc += longint'(sbyte(ddr.mem[D_X + ky * 34 + x + kx], m)) *
                   longint'(sbyte(ddr.mem[D_PD + 4 + (ky * 3 + kx) * 16 + m], m));
        e[8 * m +: 8] = 8'(requant(acc, 45, 11, 0, 127));
      end
      checks++;
      if (d != e) begin failures++; $display("FAIL depthwise pixel %0d", x); end
    end

    // residual add: chunk 0 reads the first tensor, chunk 1 the second (stride D_B - D_A)
    run_job(D_A, 2, 0, D_B - D_A, 0, T_P + 256, 1, 2, -128, 127, cyc);
    $display("residual add: %0d cycles for 64 dot products", cyc);
    for (int x = 0; x < 32; x++) begin
      host_read(T_O + x, d);
      for (int m = 0; m < 16; m++)
        e[8 * m +: 8] = 8'(requant(3 * sbyte(ddr.mem[D_A + x], m) + 5 * sbyte(ddr.mem[D_B + x], m),
                                   1, 2, -128, 127));
      checks++;
      if (d != e) begin failures++; $display("FAIL residual add pixel %0d", x); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
