// tb_compute_engine: complete jobs on one compute engine against memory
// models with latency and random stalls on all three buses. Covers 8-bit
// and 16-bit data, 8-bit and 16-bit output, byte scrolling, the lookup
// table, min/max pooling, the weight cache (parameter words read from the
// bus only for the first pixel group) and a next job programmed and started
// while the previous one runs. Each output word is compared with a
// reference convolution computed in the testbench; the steady-state rate
// (one operation per cycle) is checked on a run without stalls.
//
// Jobs are programmed through the register port as a controller would.
// Outputs written on the result bus are compared with a reference computed
// here from the memory images. The last job checks the throughput: 1024
// dot-product operations must finish within a few percent of 1024 cycles,
// the one-dot-product-per-unit-per-cycle rate of the architecture.
module tb_compute_engine;
  localparam int N = 16, M = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  always #5 clk = ~clk;

  logic cfg_we, busy, done;
  logic [8:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic d_req_valid, d_req_ready, d_rsp_valid, p_req_valid, p_req_ready, p_rsp_valid;
  logic r_req_valid, r_req_ready;
  logic [15:0] d_req_addr, p_req_addr, r_req_addr;
  logic [127:0] d_rsp_data, p_rsp_data, r_req_wdata;
  int checks = 0, failures = 0;
  bit stall_r = 1;

  compute_engine dut (.*);
  rd_mem_model #(.LAT(5), .WORDS(8192), .STALL(1)) dmem (
    .clk, .req_valid(d_req_valid), .req_ready(d_req_ready), .req_addr(d_req_addr),
    .rsp_valid(d_rsp_valid), .rsp_data(d_rsp_data));
  rd_mem_model #(.LAT(3), .WORDS(8192), .STALL(1)) pmem (
    .clk, .req_valid(p_req_valid), .req_ready(p_req_ready), .req_addr(p_req_addr),
    .rsp_valid(p_rsp_valid), .rsp_data(p_rsp_data));

  logic [127:0] rmem [int];
  int p_reqs = 0, ndone = 0;
  always @(posedge clk) if (rst_n) begin
    if (r_req_valid && r_req_ready) rmem[int'(r_req_addr)] = r_req_wdata;
    if (p_req_valid && p_req_ready) p_reqs++;
    if (done) ndone++;
  end
  int st_data = 0, st_w = 0, st_cr = 0;
  always @(posedge clk) if (rst_n && dut.issuing) begin if (!dut.armed) st_w++; else if (!dut.vec_valid) st_data++; else if (!dut.vec_ready) st_cr++; end
  always @(negedge clk) r_req_ready = stall_r ? ($urandom_range(0, 4) != 0) : 1'b1;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 9'(a); cfg_wdata = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  typedef struct {
    int npix, nk, ng, dbase, spix, sk, sg, pbase, obase, ostr;
    bit in16, out16, cache, lut, pmax;
    int scroll, mult, shift, zp, cmin, cmax, pool;
  } job_s;

  logic [7:0] lut [256];

  function automatic logic [7:0] dbyte(int waddr, int b);
    return dmem.mem[waddr + b / 16][8 * (b % 16) +: 8];
  endfunction

  task automatic program_job(job_s j);
    wr(1, j.npix); wr(2, j.nk); wr(3, j.ng); wr(4, j.dbase); wr(5, j.spix); wr(6, j.sk);
    wr(7, j.sg); wr(8, j.pbase); wr(9, {27'd0, j.pmax, j.lut, j.cache, j.out16, j.in16});
    wr(10, j.scroll); wr(11, j.obase); wr(12, j.ostr); wr(13, j.mult); wr(14, j.shift);
    wr(15, j.zp); wr(16, {j.cmax[15:0], j.cmin[15:0]}); wr(17, j.pool);
  endtask

  task automatic check(job_s j);
    int nout = 0;
    for (int g = 0; g < j.ng; g++) begin
      int pv [M];
      for (int p = 0; p < j.npix; p++) begin
        for (int m = 0; m < M; m++) begin
          longint acc = 0, r;
          for (int k = 0; k < j.nk; k++) begin
            int a = j.dbase + g * j.sg + k * j.sk + p * j.spix;
            for (int i = 0; i < N; i++) begin
              longint x;
              if (j.in16) x = longint'($signed({dbyte(a, 2 * i + 1), dbyte(a, 2 * i)}));
              else        x = longint'($signed(dbyte(a, j.scroll + i)));
              x = x * longint'($signed(pmem.mem[j.pbase + 4 + k * M + m][8 * i +: 8]));
              acc += x;
            end
          end
          acc = longint'(int'(acc) + int'(pmem.mem[j.pbase + m / 4][32 * (m % 4) +: 32]));
          r = acc * j.mult;
          if (j.shift > 0) r = (r + (longint'(1) << (j.shift - 1))) >>> j.shift;
          r += j.zp;
          if (r < j.cmin) r = j.cmin;
          if (r > j.cmax) r = j.cmax;
          if (j.lut && !j.out16) r = longint'($signed(lut[8'(r)]));
          if (p % j.pool == 0) pv[m] = int'(r);
          else if (j.pmax ? r > pv[m] : r < pv[m]) pv[m] = int'(r);
        end
        if (p % j.pool == j.pool - 1) begin
          logic [255:0] e;
          int oa;
          for (int m = 0; m < M; m++)
            if (j.out16) e[16 * m +: 16] = 16'(pv[m]);
            else         e[8 * m +: 8]   = 8'(pv[m]);
          oa = j.obase + nout * j.ostr;
          checks++;
          if (!rmem.exists(oa) || rmem[oa] != e[127:0] ||
              (j.out16 && (!rmem.exists(oa + 1) || rmem[oa + 1] != e[255:128]))) begin
            failures++;
            $display("FAIL output %0d g%0d p%0d at %0d got %h exp %h", nout, g, p, oa, rmem.exists(oa) ? rmem[oa] : 0, e[127:0]);
          end
          nout++;
        end
      end
    end
  endtask

  task automatic wait_done(int n);
    while (ndone < n) @(posedge clk);
    @(negedge clk);
  endtask

  initial begin
    job_s j1, j2, j3, j4, j5;
    int t0, p0;
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int i = 0; i < 8192; i++) begin
      dmem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
      pmem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    end
    // moderate biases
    for (int i = 0; i < 8192; i += 64)
      for (int w = 0; w < 4; w++)
        for (int l = 0; l < 4; l++) pmem.mem[i + w][32 * l +: 32] = $urandom_range(0, 40000) - 20000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      lut[i] = 8'(i * 7 + 3);
      wr(256 + i, lut[i]);
    end

    // job 1: 8-bit conv-like job with weight cache
    j1 = '{npix: 32, nk: 3, ng: 3, dbase: 0, spix: 3, sk: 1, sg: 96, pbase: 0, obase: 100, ostr: 1,
           in16: 0, out16: 0, cache: 1, lut: 0, pmax: 0, scroll: 0, mult: 93, shift: 14, zp: -5,
           cmin: -128, cmax: 127, pool: 1};
    program_job(j1);
    p0 = p_reqs;
    wr(0, 1);
    // job 2 is programmed and started while job 1 runs (overlapped programming)
    j2 = '{npix: 8, nk: 2, ng: 2, dbase: 1000, spix: 2, sk: 1, sg: 16, pbase: 64, obase: 300, ostr: 2,
           in16: 1, out16: 1, cache: 0, lut: 0, pmax: 1, scroll: 0, mult: -41, shift: 9, zp: 7,
           cmin: -32768, cmax: 32767, pool: 2};
    program_job(j2);
    checks++;
    if (!busy) begin failures++; $display("FAIL job 1 ended before job 2 was queued"); end
    wr(0, 1);
    checks++;
    if (cfg_rdata[1:0] != 2'b11) begin
      cfg_addr = 0; #1;
      if (cfg_rdata[1:0] != 2'b11) begin failures++; $display("FAIL status %b", cfg_rdata[1:0]); end
    end
    wait_done(2);
    check(j1);
    check(j2);
    // job 1 used the cache: 4 bias words + 3 chunks x 16 words from the bus;
    // job 2 without cache: 4 + 2 groups x 2 chunks x 16
    checks++;
    if (p_reqs - p0 != (4 + 3 * 16) + (4 + 2 * 2 * 16)) begin
      failures++; $display("FAIL parameter bus requests %0d", p_reqs - p0);
    end

    // job 3: byte scrolling, lookup table, 4-pixel min pooling
    j3 = '{npix: 16, nk: 2, ng: 2, dbase: 2000, spix: 2, sk: 1, sg: 40, pbase: 128, obase: 500, ostr: 1,
           in16: 0, out16: 0, cache: 1, lut: 1, pmax: 0, scroll: 9, mult: 55, shift: 13, zp: 0,
           cmin: -128, cmax: 127, pool: 4};
    program_job(j3);
    wr(0, 1);
    wait_done(3);
    check(j3);

    // job 4: rate without stalls: 32 pixels x 8 chunks x 4 groups = 1024 operations
    stall_r = 0;
    force dmem.req_ready = 1'b1;
    force pmem.req_ready = 1'b1;
    j4 = '{npix: 32, nk: 8, ng: 4, dbase: 4000, spix: 8, sk: 1, sg: 256, pbase: 256, obase: 700, ostr: 1,
           in16: 0, out16: 0, cache: 1, lut: 0, pmax: 0, scroll: 0, mult: 1, shift: 10, zp: 0,
           cmin: -128, cmax: 127, pool: 1};
    program_job(j4);
    t0 = $time; st_data = 0; st_w = 0; st_cr = 0;
    wr(0, 1);
    wait_done(4);
    check(j4);
    checks++;
    if (($time - t0) / 10 > 1024 + 60) begin
      failures++; $display("FAIL rate: %0d cycles for 1024 operations", ($time - t0) / 10);
    end
    $display("job 4: %0d cycles for 1024 operations (stalls: data %0d weights %0d credits %0d)", ($time - t0) / 10, st_data, st_w, st_cr);

    // job 5: weights (40 chunks x 16 words) exceed the 512-word cache: the
    // first 32 chunks are cached, the remaining 8 are streamed per group
    release dmem.req_ready;
    release pmem.req_ready;
    stall_r = 1;
    j5 = '{npix: 4, nk: 40, ng: 2, dbase: 5200, spix: 40, sk: 1, sg: 160, pbase: 2000, obase: 900, ostr: 1,
           in16: 0, out16: 0, cache: 1, lut: 0, pmax: 0, scroll: 0, mult: 3, shift: 12, zp: 1,
           cmin: -128, cmax: 127, pool: 1};
    program_job(j5);
    p0 = p_reqs;
    wr(0, 1);
    wait_done(5);
    check(j5);
    checks++;
    if (p_reqs - p0 != 4 + 40 * 16 + 8 * 16) begin
      failures++; $display("FAIL job 5 parameter bus requests %0d, expected %0d", p_reqs - p0, 4 + 40 * 16 + 8 * 16);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
