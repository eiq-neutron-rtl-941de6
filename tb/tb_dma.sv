// tb_dma: three-dimensional strided transfers in all directions (system
// memory to TCM, TCM to system memory, TCM to TCM with a layout change,
// system memory to system memory) against a DRAM model with latency and
// random stalls. Every destination word is compared with the source word
// its loop indices select, and words outside the destination pattern must
// stay untouched.
//
// Transfers are programmed through the register port and waited for on
// the done pulse; the TCM is a behavioural array with one-cycle reads and
// the system memory a DRAM model. Each destination word is compared with
// the source word its three loop indices select.
module tb_dma;
  import neutron_pkg::mem_req_t, neutron_pkg::mem_rsp_t;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, busy, done;
  logic [3:0] cfg_addr;
  logic [31:0] cfg_wdata, cfg_rdata;
  mem_req_t tcm_rd_req, tcm_wr_req;
  mem_rsp_t tcm_rd_rsp;
  logic ext_req_valid, ext_req_ready, ext_req_we, ext_rsp_valid;
  logic [31:0] ext_req_addr;
  logic [127:0] ext_req_wdata, ext_rsp_data;
  int checks = 0, failures = 0;

  dma #(.DEPTH(8), .ADDR_W(16)) dut (.*);
  dram_model #(.LAT(12), .WORDS(8192), .STALL(1)) ddr (
    .clk, .req_valid(ext_req_valid), .req_ready(ext_req_ready), .req_we(ext_req_we),
    .req_addr(ext_req_addr), .req_wdata(ext_req_wdata), .rsp_valid(ext_rsp_valid),
    .rsp_data(ext_rsp_data));

  // TCM stand-in: one-cycle reads
  logic [127:0] tcm [8192];
  always @(posedge clk) begin
    tcm_rd_rsp.valid <= rst_n && tcm_rd_req.valid;
    tcm_rd_rsp.rdata <= tcm[tcm_rd_req.addr % 8192];
    if (tcm_wr_req.valid) tcm[tcm_wr_req.addr % 8192] <= tcm_wr_req.wdata;
  end

  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr(int a, int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = 4'(a); cfg_wdata = d;
    @(negedge clk) cfg_we = 0;
  endtask

  // run one transfer and check it
  task automatic xfer(bit s_ext, bit d_ext, int sb, int s0, int s1, int s2,
                      int db, int d0, int d1, int d2, int c0, int c1, int c2);
    logic [127:0] src_snap [8192];
    logic [127:0] dst_before [8192];
    bit touched [8192];
    for (int i = 0; i < 8192; i++) begin
      src_snap[i]   = s_ext ? ddr.mem[i] : tcm[i];
      dst_before[i] = d_ext ? ddr.mem[i] : tcm[i];
      touched[i] = 0;
    end
    wr(1, sb); wr(2, s0); wr(3, s1); wr(4, s2);
    wr(5, db); wr(6, d0); wr(7, d1); wr(8, d2);
    wr(9, c0); wr(10, c1); wr(11, c2);
    wr(0, {29'd0, d_ext, s_ext, 1'b1});
    while (!done) @(posedge clk);
    @(negedge clk);
    @(negedge clk);
    for (int i2 = 0; i2 < c2; i2++) for (int i1 = 0; i1 < c1; i1++) for (int i0 = 0; i0 < c0; i0++) begin
      int sa, da;
      logic [127:0] got;
      sa = sb + i2 * s2 + i1 * s1 + i0 * s0;
      da = db + i2 * d2 + i1 * d1 + i0 * d0;
      touched[da] = 1;
      got = d_ext ? ddr.mem[da] : tcm[da];
      checks++;
      if (got !== src_snap[sa]) begin failures++; $display("FAIL word (%0d,%0d,%0d)", i2, i1, i0); end
    end
    checks++;
    for (int i = 0; i < 8192; i++)
      if (!touched[i] && (d_ext ? ddr.mem[i] : tcm[i]) !== dst_before[i]) begin
        failures++; $display("FAIL stray write at %0d", i); break;
      end
    checks++;
    if (busy) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_wdata = 0;
    for (int i = 0; i < 8192; i++) begin
      ddr.mem[i] = {$urandom, $urandom, $urandom, $urandom};
      tcm[i] = {$urandom, $urandom, $urandom, $urandom};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fetch: a 4 x 6 x 3 tile out of a larger tensor in DDR, packed in TCM
    xfer(1, 0, 100, 1, 20, 200, 0, 1, 4, 24, 4, 6, 3);
    // push: TCM tile back to DDR with a different pitch
    xfer(0, 1, 0, 1, 4, 24, 3000, 1, 10, 100, 4, 6, 3);
    // TCM-to-TCM rearrangement: transpose 8 x 5 words
    xfer(0, 0, 0, 1, 8, 0, 5000, 5, 1, 0, 8, 5, 1);
    // DDR to DDR copy
    xfer(1, 1, 6000, 1, 0, 0, 7000, 1, 0, 0, 33, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
