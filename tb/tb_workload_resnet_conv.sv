// tb_workload_resnet_conv: one tile of a ResNet-50 3x3 convolution layer
// (64 input channels, 64 output channels, stride 1, INT8) on the complete
// subsystem at its default size.
//
// The tile is two output lines of 32 pixels. Its input is four lines of
// 34 pixels x 64 channels, stored in DDR as HWC (4 words per pixel). The
// DMA fetches it in the fragmented format a previous depth-parallel layer
// would have left in the TCM: channel word c of every pixel in bank c, one
// word per pixel, 34 words per line. It also fetches one parameter set per
// engine (4 bias words + 36 chunks x 16 weight words = 580 words). The four engines split
// the 64 output channels (depth parallelism): the input stream is shared,
// so the engines run in lockstep from one global start, and each writes
// its own output bank. The DMA then interleaves the four fragments into an
// HWC tensor in DDR, which is compared with a reference convolution.
//
// The reduction runs over 36 chunks in three loops: the inner one rotates
// among the four channel fragments (stride one bank), the middle one steps
// a pixel to the right, the outer one steps a line down. The 576 weight words per engine
// exceed the 512-word cache, so from the second line on 32 chunks come from
// the cache and 4 are streamed. The compute phase must reach at least 90%
// of the peak rate of one dot product per unit and cycle (2 x 32 x 36 =
// 2304 cycles of work per engine).
module tb_workload_resnet_conv;
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
  dram_model #(.LAT(20), .WORDS(16384), .STALL(1)) ddr (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_we(ext_req_we),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata), .rsp_valid(ext_rsp_valid),
    .rsp_data(ext_rsp_data));

  localparam int BANK = 4096;
  localparam int CW = 4;                 // channel words per pixel (64 channels)
  localparam int WIN = 34, LP = WIN * CW; // input line width; HWC line pitch in DDR
  localparam int NK = 9 * CW, PSET = 4 + NK * 16;
  localparam int D_X = 0, D_P = 1000, D_O = 8000;

  int n_dma_done = 0, n_eng_done = 0, n_cache = 0, n_pbus = 0;
  always @(posedge clk) if (rst_n) begin
    if (irq_dma) n_dma_done++;
    n_eng_done += $countones(irq_eng);
    if (dut.g_eng[0].u_eng.c_rd_en) n_cache++;
    if (dut.g_eng[0].u_eng.p_req_valid && dut.g_eng[0].u_eng.p_req_ready) n_pbus++;
  end

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(int sel, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'((sel << 12) | a); cfg_wdata = d;
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic dma_run(bit s_ext, bit d_ext, int sb, int s0, int s1, int db, int d0, int d1,
                         int c0, int c1);
    int n0;
    n0 = n_dma_done;
    wr(5, 1, sb); wr(5, 2, s0); wr(5, 3, s1); wr(5, 4, 0);
    wr(5, 5, db); wr(5, 6, d0); wr(5, 7, d1); wr(5, 8, 0);
    wr(5, 9, c0); wr(5, 10, c1); wr(5, 11, 1);
    wr(5, 0, {29'd0, d_ext, s_ext, 1'b1});
    while (n_dma_done == n0) @(posedge clk);
    @(negedge clk);
  endtask

  logic [127:0] img [16384];

  function automatic logic [7:0] ref_out(int e, int y, int x, int m);
    longint acc, r;
    acc = 0;
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        for (int c = 0; c < CW; c++) begin
          int k;
          k = ky * 3 * CW + kx * CW + c;
          for (int i = 0; i < 16; i++)
            acc += longint'($signed(img[D_X + (y + ky) * LP + (x + kx) * CW + c][8 * i +: 8])) *
                   longint'($signed(img[D_P + e * PSET + 4 + k * 16 + m][8 * i +: 8]));
        end
    acc = longint'(int'(acc) + int'(img[D_P + e * PSET + m / 4][32 * (m % 4) +: 32]));
    r = (acc * 37 + (longint'(1) << 15)) >>> 16;
    if (r < 0) r = 0;            // ReLU through the clamp
    if (r > 127) r = 127;
    return 8'(r);
  endfunction

  initial begin
    int t0, cyc;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; host_req = '0;
    for (int i = 0; i < 16384; i++) ddr.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int e = 0; e < 4; e++)
      for (int w = 0; w < 4; w++) for (int l = 0; l < 4; l++)
        ddr.mem[D_P + e * PSET + w][32 * l +: 32] = $urandom_range(0, 40000) - 20000;
    for (int i = 0; i < 16384; i++) img[i] = ddr.mem[i];
    repeat (3) @(negedge clk);
    rst_n = 1;

    // fetch: channel word c of the input tile into bank c, parameter set e into bank 4+e
    dma_run(1, 0, D_X, CW, 1, 0, 1, BANK, 4 * WIN, CW);
    dma_run(1, 0, D_P, 1, PSET, 4 * BANK, 1, BANK, PSET, 4);

    // program all engines at once, then the per-engine bases
    wr(7, 0, 32'b01);                                          // share the data stream
    wr(4, 1, 32); wr(4, 2, NK); wr(4, 3, 2);                   // 32 pixels, 36 chunks, 2 lines
    wr(4, 4, 0); wr(4, 5, 1); wr(4, 6, BANK); wr(4, 7, WIN);
    wr(4, 18, CW); wr(4, 19, 1);                               // rotate among fragments; next pixel
    wr(4, 20, 3); wr(4, 21, WIN);                              // 3 filter columns; next line
    wr(4, 9, 32'b00100);                                       // use the weight cache
    wr(4, 10, 0); wr(4, 12, 1);
    wr(4, 13, 37); wr(4, 14, 16); wr(4, 15, 0);
    wr(4, 16, {16'sd127, 16'sd0}); wr(4, 17, 1);
    for (int e = 0; e < 4; e++) begin
      wr(e, 8, (4 + e) * BANK);
      wr(e, 11, (8 + e) * BANK);
    end
    @(negedge clk);
    t0 = $time;
    wr(4, 0, 1);
    while (n_eng_done < 4) @(posedge clk);
    cyc = ($time - t0) / 10;
    $display("compute: %0d cycles for 2304 cycles of dot products per engine (%0d%% of peak)",
             cyc, 2304 * 100 / cyc);
    checks++;
    if (cyc * 9 > 2304 * 10) begin failures++; $display("FAIL below 90%% of peak"); end
    checks++;
    if (n_cache != 32 * 16) begin failures++; $display("FAIL cache reads %0d, expected 512", n_cache); end
    checks++;
    if (n_pbus != 4 + NK * 16 + 4 * 16) begin
      failures++; $display("FAIL parameter bus reads %0d, expected %0d", n_pbus, 4 + NK * 16 + 4 * 16);
    end

    // push: interleave the four 16-channel fragments into 64-channel pixels
    dma_run(0, 1, 8 * BANK, 1, BANK, D_O, 4, 1, 64, 4);
    for (int y = 0; y < 2; y++)
      for (int x = 0; x < 32; x++)
        for (int e = 0; e < 4; e++) begin
          logic [127:0] exp_w;
          for (int m = 0; m < 16; m++) exp_w[8 * m +: 8] = ref_out(e, y, x, m);
          checks++;
          if (ddr.mem[D_O + (y * 32 + x) * 4 + e] != exp_w) begin
            failures++; $display("FAIL output y%0d x%0d channels %0d..", y, x, 16 * e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
