// tb_data_engine: runs the prefetcher over its loop nest (with and without
// the split reduction loop) in 8-bit mode, 8-bit mode with byte scrolling and 16-bit mode, against a memory
// with latency and random stalls and a consumer with random back-pressure.
// Every operand vector is compared with one assembled from the memory
// contents; a final run without stalls checks one vector per cycle.
//
// Each emitted vector is compared with the bytes the loop nest should
// address; the throughput check requires one vector per cycle in 8-bit
// mode. Loop structure and register file depth are this design's choices;
// the word-level prefetch with byte scrolling is the architecture's.
module tb_data_engine;
  localparam int N = 16;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // asynchronous reset before the first clock edge
  always #5 clk = ~clk;

  logic start, in16, busy, req_valid, req_ready, rsp_valid, vec_valid, vec_ready, vec_uns, vec_sh8;
  logic [15:0] cnt_pix, cnt_k, cnt_g, base, str_pix, str_k, str_g, req_addr, cnt_kin, str_k2, cnt_kmid, str_k3;
  logic [3:0] scroll;
  logic [127:0] rsp_data;
  logic [N-1:0][7:0] vec_data;
  int checks = 0, failures = 0;
  bit stall_consumer;

  data_engine #(.N(N), .ADDR_W(16), .RF_ROWS(8)) dut (.*, .vec_unsigned(vec_uns), .vec_shift8(vec_sh8));
  rd_mem_model #(.LAT(4), .WORDS(4096), .STALL(1)) mem (
    .clk, .req_valid, .req_ready, .req_addr, .rsp_valid, .rsp_data);

  initial begin
    #4000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) vec_ready = stall_consumer ? ($urandom_range(0, 2) != 0) : 1'b1;

  function automatic logic [7:0] byte_at(int waddr, int b);
    return mem.mem[waddr + b / 16][8 * (b % 16) +: 8];
  endfunction

  task automatic run(int np, int nk, int ng, int b0, int sp, int sk, int sg, bit m16, int scr,
                     output int cycles, input int kin = 0, input int sk2 = 0,
                     input int kmid = 0, input int sk3 = 0);
    int t0, nvec;
    @(negedge clk);
    cnt_pix = 16'(np); cnt_k = 16'(nk); cnt_g = 16'(ng); base = 16'(b0);
    str_pix = 16'(sp); str_k = 16'(sk); str_g = 16'(sg); in16 = m16; scroll = 4'(scr);
    cnt_kin = 16'(kin); str_k2 = 16'(sk2); cnt_kmid = 16'(kmid); str_k3 = 16'(sk3);
    start = 1;
    @(negedge clk) start = 0;
    t0 = $time;
    nvec = 0;
    for (int g = 0; g < ng; g++) for (int k = 0; k < nk; k++) for (int p = 0; p < np; p++)
      for (int h = 0; h < (m16 ? 2 : 1); h++) begin
        int a;
        logic [N-1:0][7:0] e;
        a = b0 + g * sg + p * sp;
        if (kin == 0) a += k * sk;
        else if (kmid == 0) a += (k / kin) * sk2 + (k % kin) * sk;
        else a += (k / (kin * kmid)) * sk3 + ((k / kin) % kmid) * sk2 + (k % kin) * sk;
        for (int i = 0; i < N; i++)
          e[i] = m16 ? byte_at(a, 2 * i + h) : byte_at(a, scr + i);
        do @(posedge clk); while (!(vec_valid && vec_ready));
        checks++;
        if (vec_data !== e || vec_uns !== (m16 && h == 0) || vec_sh8 !== (m16 && h == 1)) begin
          failures++;
          $display("FAIL g%0d k%0d p%0d h%0d", g, k, p, h);
        end
        nvec++;
      end
    cycles = ($time - t0) / 10;
    @(negedge clk);
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
  endtask

  initial begin
    int cyc;
    start = 0; {cnt_pix, cnt_k, cnt_g, base, str_pix, str_k, str_g} = '0; in16 = 0; scroll = 0; cnt_kin = 0; str_k2 = 0; cnt_kmid = 0; str_k3 = 0;
    stall_consumer = 1;
    for (int i = 0; i < 4096; i++) mem.mem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5, 3, 2, 100, 7, 1, 40, 0, 0, cyc);
    run(4, 2, 3, 300, 3, 1, 20, 0, 5, cyc);
    run(6, 2, 2, 500, 2, 13, 50, 1, 0, cyc);
    run(1, 1, 1, 900, 0, 0, 0, 0, 15, cyc);
    // 3x3 window over 2 channel words: 6 inner chunks, 3 filter rows 40 words apart
    run(8, 18, 2, 1200, 2, 1, 40, 0, 0, cyc, 6, 40);
    run(4, 12, 1, 1500, 2, 1, 0, 0, 3, cyc, 4, 24);
    // channel fragments 512 words apart: rotate among them, then step a pixel, then a line
    run(6, 36, 2, 100, 1, 512, 10, 0, 0, cyc, 4, 1, 3, 10);
    // full rate: memory without stalls, consumer always ready
    stall_consumer = 0;
    force mem.req_ready = 1'b1;
    run(32, 4, 1, 1000, 1, 32, 0, 0, 0, cyc);
    release mem.req_ready;
    checks++;
    if (cyc > 128 + 12) begin failures++; $display("FAIL rate: %0d cycles for 128 vectors", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
