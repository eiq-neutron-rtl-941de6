// tb_neutron_npu: end-to-end run of the NPU subsystem at its default size
// (four engines, 1 MiB TCM in 16 banks) with a DDR model behind the DMA.
//
// Sequence, as a compiler-generated schedule would issue it:
//   1. fetch: the DMA copies an input tensor, a second input tensor and the
//      parameter sets from DDR into separate TCM banks;
//   2. depth parallelism: the four engines each compute 16 of 64 output
//      channels of a 1x1 convolution over 32 pixels, with the input stream
//      shared (broadcast) and started by one global write, so they run in
//      lockstep; each writes its own output bank. A second job with 16-bit
//      outputs and 2-pixel max pooling is queued while the first runs. The
//      controller's TCM port meanwhile reads the input bank, causing bank
//      conflicts that must be counted, and a V2P update attempted while busy
//      must be refused;
//   3. push: the DMA gathers the four output fragments into one
//      channel-interleaved tensor in DDR;
//   4. line parallelism: an l-copy (TCM-to-TCM DMA) gives each engine its
//      own, overlapping, window of input lines; the engines then compute a
//      3x1 convolution with the parameter stream shared and a lookup-table
//      activation, and the DMA pushes the result;
//   5. a V2P remap in idle mode is checked through the controller port.
// All results are compared with a reference computed here from the DDR
// image; each mechanism is counted and must occur at least once.
module tb_neutron_npu;
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
  dram_model #(.LAT(20), .WORDS(65536), .STALL(1)) ddr (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_we(ext_req_we),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata), .rsp_valid(ext_rsp_valid),
    .rsp_data(ext_rsp_data));

  localparam int BANK = 4096;

  // ------------------------------------------------------------ mechanism counters
  int n_share_d = 0, n_share_p = 0, n_cache = 0, n_pending = 0, n_pool = 0, n_lut = 0;
  int n_ext_stall = 0, n_fetch = 0, n_push = 0, n_lcopy = 0, n_remap = 0, n_refused = 0;
  int n_conflict = 0, n_dma_done = 0, n_eng_done = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.share_d && dut.u_fabric.d_rsp_valid[3] && !dut.u_fabric.tcm_rd_req[3].valid) n_share_d++;
    if (dut.share_p && dut.u_fabric.p_rsp_valid[3] && !dut.u_fabric.tcm_rd_req[7].valid) n_share_p++;
    if (dut.g_eng[0].u_eng.c_rd_en) n_cache++;
    if (dut.g_eng[0].u_eng.launch && dut.g_eng[0].u_eng.pending) n_pending++;
    if (dut.g_eng[0].u_eng.act_absorbed) n_pool++;
    if (dut.g_eng[0].u_eng.u_act.v2 && dut.g_eng[0].u_eng.job.lut_en) n_lut++;
    if (ext_req_valid && !ext_req_ready) n_ext_stall++;
    if (dut.conflict) n_conflict++;
    if (dut.v2p_err) n_refused++;
    if (irq_dma) n_dma_done++;
    n_eng_done += $countones(irq_eng);
  end

  initial begin
    #1500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------------------ helpers
  task automatic wr(int sel, int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 16'((sel << 12) | a); cfg_wdata = d;
    @(negedge clk) cfg_we = 0;
  endtask

  task automatic rd(int sel, int a, output int d);
    @(negedge clk);
    cfg_addr = 16'((sel << 12) | a);
    #1 d = cfg_rdata;
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
    if (s_ext && !d_ext) n_fetch++;
    if (!s_ext && d_ext) n_push++;
    if (!s_ext && !d_ext) n_lcopy++;
  endtask

  task automatic host_read(int a, output logic [127:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b0, addr: 16'(a), wdata: '0};
    @(negedge clk);
    host_req = '0;
    d = host_rsp.rdata;
    checks++;
    if (!host_rsp.valid) begin failures++; $display("FAIL host read not served"); end
  endtask

  task automatic host_write(int a, logic [127:0] d);
    @(negedge clk);
    host_req = '{valid: 1'b1, we: 1'b1, addr: 16'(a), wdata: d};
    @(negedge clk);
    host_req = '0;
  endtask

  task automatic wait_engines(int n);
    while (n_eng_done < n) @(posedge clk);
    @(negedge clk);
  endtask

  // ------------------------------------------------------------ reference model
  // DDR image layout
  localparam int D_X1 = 0;      // 32 pixels x 2 chunks (depth-parallel input)
  localparam int D_P1 = 1000;   // 4 parameter sets of 36 words, 64 apart
  localparam int D_X2 = 400;    // 10 lines x 4 pixels x 1 chunk (line-parallel input)
  localparam int D_P2 = 2000;   // 52 words: 4 bias + 3 chunks x 16
  localparam int D_O1 = 20000;  // depth-parallel result, 32 pixels x 4 words
  localparam int D_O2 = 30000;  // line-parallel result, 8 lines x 4 pixels

  logic [127:0] img [65536];
  logic [7:0] lut [256];

  function automatic int post(longint acc, int mult, int shift, int zp, int cmin, int cmax, bit use_lut);
    longint r;
    r = acc * mult;
    if (shift > 0) r = (r + (longint'(1) << (shift - 1))) >>> shift;
    r += zp;
    if (r < cmin) r = cmin;
    if (r > cmax) r = cmax;
    if (use_lut) r = longint'($signed(lut[8'(r)]));
    return int'(r);
  endfunction

  // accumulator of one output: data words dw[k], parameter set at pb
  function automatic longint acc_of(int dw [], int pb, int m);
    longint acc = 0;
    for (int k = 0; k < dw.size(); k++)
      for (int i = 0; i < 16; i++)
        acc += longint'($signed(img[dw[k]][8 * i +: 8])) *
               longint'($signed(img[pb + 4 + k * 16 + m][8 * i +: 8]));
    acc = longint'(int'(acc) + int'(img[pb + m / 4][32 * (m % 4) +: 32]));
    return acc;
  endfunction

  // ------------------------------------------------------------ program
  initial begin
    int st;
    logic [127:0] d;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0; host_req = '0;
    for (int i = 0; i < 65536; i++) ddr.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    for (int s = 0; s < 4; s++)
      for (int w = 0; w < 4; w++) for (int l = 0; l < 4; l++)
        ddr.mem[D_P1 + 64 * s + w][32 * l +: 32] = $urandom_range(0, 20000) - 10000;
    for (int w = 0; w < 4; w++) for (int l = 0; l < 4; l++)
      ddr.mem[D_P2 + w][32 * l +: 32] = $urandom_range(0, 20000) - 10000;
    for (int i = 0; i < 65536; i++) img[i] = ddr.mem[i];
    for (int i = 0; i < 256; i++) lut[i] = 8'((i < 128) ? i / 2 : 0);  // a leaky-style table
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. fetch inputs and parameters
    dma_run(1, 0, D_X1, 1, 0, 0, 1, 0, 64, 1);                        // bank 0
    dma_run(1, 0, D_X2, 1, 0, 256, 1, 0, 40, 1);                      // bank 0, offset 256
    dma_run(1, 0, D_P1, 1, 64, 4 * BANK, 1, BANK, 36, 4);             // banks 4..7
    dma_run(1, 0, D_P2, 1, 0, 1 * BANK, 1, 0, 52, 1);                 // bank 1

    // 2. depth parallelism: data shared, per-engine parameters and outputs
    wr(7, 0, 32'b01);                                                 // share_d
    wr(4, 1, 16); wr(4, 2, 2); wr(4, 3, 2);                           // npix, nk, ng
    wr(4, 4, 0); wr(4, 5, 2); wr(4, 6, 1); wr(4, 7, 32);              // data loops
    wr(4, 9, 32'b00100);                                              // use_cache
    wr(4, 10, 0); wr(4, 12, 1);
    wr(4, 13, 50); wr(4, 14, 13); wr(4, 15, 0);
    wr(4, 16, {16'sd127, -16'sd128}); wr(4, 17, 1);
    for (int e = 0; e < 4; e++) begin
      wr(e, 8, (4 + e) * BANK);
      wr(e, 11, (8 + e) * BANK);
    end
    wr(4, 0, 1);                                                      // global start
    // queue the follow-up job: 16-bit output, 2-pixel max pooling
    wr(4, 9, 32'b10110);                                              // pool_max, use_cache, out16
    wr(4, 13, -20); wr(4, 14, 8); wr(4, 15, 5);
    wr(4, 16, {16'sd32767, -16'sd32768}); wr(4, 17, 2); wr(4, 12, 2);
    for (int e = 0; e < 4; e++) wr(e, 11, (8 + e) * BANK + 64);
    wr(4, 0, 1);
    rd(0, 0, st);
    checks++;
    if (st[1:0] != 2'b11) begin failures++; $display("FAIL engine 0 status %b, expected busy+pending", st[1:0]); end
    // V2P update while busy: refused
    wr(6, 2, 3);
    // controller reads of the input bank collide with the shared data stream
    for (int i = 0; i < 8; i++) begin
      @(negedge clk) host_req = '{valid: 1'b1, we: 1'b0, addr: 16'(i), wdata: '0};
    end
    @(negedge clk) host_req = '0;
    wait_engines(8);
    rd(7, 1, st);
    checks++;
    if (st[3:0] != 0 || st[4] || st[5] || !st[6]) begin failures++; $display("FAIL status after jobs %b", st[6:0]); end

    // check the queued job's 16-bit pooled output through the controller port
    for (int e = 0; e < 4; e++)
      for (int g = 0; g < 2; g++)
        for (int q = 0; q < 8; q++) begin
          logic [255:0] e_row;
          logic [127:0] lo, hi;
          for (int m = 0; m < 16; m++) begin
            int best;
            for (int h = 0; h < 2; h++) begin
              int p, v;
              int dw [];
              p = g * 16 + 2 * q + h;
              dw = new[2];
              dw[0] = D_X1 + 2 * p; dw[1] = D_X1 + 2 * p + 1;
              v = post(acc_of(dw, D_P1 + 64 * e, m), -20, 8, 5, -32768, 32767, 0);
              if (h == 0 || v > best) best = v;
            end
            e_row[16 * m +: 16] = 16'(best);
          end
          host_read((8 + e) * BANK + 64 + 2 * (g * 8 + q), lo);
          host_read((8 + e) * BANK + 64 + 2 * (g * 8 + q) + 1, hi);
          checks++;
          if ({hi, lo} != e_row) begin failures++; $display("FAIL pooled row e%0d g%0d q%0d", e, g, q); end
        end

    // 3. push: gather the four channel fragments into one HWC tensor in DDR
    dma_run(0, 1, 8 * BANK, 1, BANK, D_O1, 4, 1, 32, 4);
    for (int p = 0; p < 32; p++)
      for (int e = 0; e < 4; e++) begin
        logic [127:0] e_w;
        int dw [];
        dw = new[2];
        dw[0] = D_X1 + 2 * p; dw[1] = D_X1 + 2 * p + 1;
        for (int m = 0; m < 16; m++)
          e_w[8 * m +: 8] = 8'(post(acc_of(dw, D_P1 + 64 * e, m), 50, 13, 0, -128, 127, 0));
        checks++;
        if (ddr.mem[D_O1 + 4 * p + e] != e_w) begin
          failures++; $display("FAIL depth-parallel output pixel %0d channels %0d..", p, 16 * e);
        end
      end

    // 4. line parallelism: l-copy overlapping windows, shared parameters
    dma_run(0, 0, 256, 1, 8, 12 * BANK, 1, BANK, 16, 4);              // lines 2e..2e+3 -> bank 12+e
    wr(7, 0, 32'b10);                                                 // share_p
    for (int i = 0; i < 256; i++) wr(4, 256 + i, lut[i]);
    wr(4, 1, 8); wr(4, 2, 3); wr(4, 3, 1);
    wr(4, 5, 1); wr(4, 6, 4); wr(4, 7, 0);
    wr(4, 8, 1 * BANK);
    wr(4, 9, 32'b01000);                                              // lut_en
    wr(4, 12, 1); wr(4, 13, 30); wr(4, 14, 12); wr(4, 15, 0);
    wr(4, 16, {16'sd127, -16'sd128}); wr(4, 17, 1);
    for (int e = 0; e < 4; e++) begin
      wr(e, 4, (12 + e) * BANK);
      wr(e, 11, (8 + e) * BANK);
    end
    wr(4, 0, 1);
    wait_engines(12);
    dma_run(0, 1, 8 * BANK, 1, BANK, D_O2, 1, 8, 8, 4);
    for (int e = 0; e < 4; e++)
      for (int p = 0; p < 8; p++) begin
        logic [127:0] e_w;
        int dw [];
        int line, w;
        line = 2 * e + p / 4; w = p % 4;
        dw = new[3];
        for (int k = 0; k < 3; k++) dw[k] = D_X2 + (line + k) * 4 + w;
        for (int m = 0; m < 16; m++)
          e_w[8 * m +: 8] = 8'(post(acc_of(dw, D_P2, m), 30, 12, 0, -128, 127, 1));
        checks++;
        if (ddr.mem[D_O2 + 8 * e + p] != e_w) begin
          failures++; $display("FAIL line-parallel output line %0d pixel %0d", line, w);
        end
      end

    // 5. V2P remap in idle: virtual bank 2 -> physical bank 3
    wr(7, 0, 0);
    host_write(3 * BANK + 7, 128'hC0FFEE);
    wr(6, 2, 3);
    n_remap++;
    host_read(2 * BANK + 7, d);
    checks++;
    if (d != 128'hC0FFEE) begin failures++; $display("FAIL V2P remap"); end
    wr(6, 2, 2);

    // every mechanism must have happened
    begin
      string names [14] = '{"share_d", "share_p", "weight cache", "pending job", "pooling", "lut",
                            "ext stall", "fetch", "push", "l-copy", "remap", "refused remap",
                            "bank conflict", "engine done"};
      int cnt [14];
      cnt = '{n_share_d, n_share_p, n_cache, n_pending, n_pool, n_lut, n_ext_stall, n_fetch,
              n_push, n_lcopy, n_remap, n_refused, n_conflict, n_eng_done};
      for (int i = 0; i < 14; i++) begin
        $display("mechanism %-14s : %0d", names[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[i]); end
      end
    end
    rd(7, 2, st);
    checks++;
    if (st == 0) begin failures++; $display("FAIL conflict counter"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
