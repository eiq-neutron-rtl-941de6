// tb_tcm: banked memory with V2P remapping. Random conflict-free traffic on
// all ports is checked against a model of the virtual address space (data
// must be returned one cycle after the request); then a bank remap moves a
// virtual bank onto another physical bank, a remap attempted while busy is
// refused, and deliberate bank conflicts are detected and counted.
//
// Requests are driven on the falling edge and read data is checked on the
// next one; conflicts are made on purpose and the conflict counter and
// pulse are compared with the number made. Banking, non-arbitration and
// idle-only remapping follow the architecture; bank count and port
// priority are this design's.
module tb_tcm;
  import neutron_pkg::mem_req_t, neutron_pkg::mem_rsp_t;
  localparam int NB = 4, BW = 64, NR = 3, NW = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t [NR-1:0] rd_req;
  mem_rsp_t [NR-1:0] rd_rsp;
  mem_req_t [NW-1:0] wr_req;
  logic idle, v2p_we, v2p_err, conflict;
  logic [1:0] v2p_vbank, v2p_pbank;
  logic [1:0] v2p_rdata [NB];
  logic [31:0] conflict_cnt;
  int checks = 0, failures = 0;

  tcm #(.NB(NB), .BANK_WORDS(BW), .NR(NR), .NW(NW)) dut (.*);

  logic [127:0] phys [NB * BW];   // model of physical storage
  int map [NB];

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int paddr(int va);
    return map[va / BW] * BW + va % BW;
  endfunction

  // one cycle of random conflict-free traffic; checks reads one cycle later
  task automatic traffic(int cycles);
    for (int c = 0; c < cycles; c++) begin
      bit used [NB];
      int exp_rd [NR];
      logic [127:0] expd [NR];
      @(negedge clk);
      for (int b = 0; b < NB; b++) used[b] = 0;
      for (int p = 0; p < NW + NR; p++) begin
        int va, vb, tries;
        mem_req_t r;
        r = '0;
        tries = 0;
        do begin va = $urandom_range(0, NB * BW - 1); vb = map[va / BW]; tries++; end
        while (used[vb] && tries < 20);
        if (!used[vb] && $urandom_range(0, 3) != 0) begin
          used[vb] = 1;
          r.valid = 1; r.addr = 16'(va); r.wdata = {$urandom, $urandom, $urandom, $urandom};
        end
        if (p < NW) begin
          r.we = 1; wr_req[p] = r;
        end else begin
          rd_req[p - NW] = r;
          exp_rd[p - NW] = r.valid ? paddr(va) : -1;
        end
      end
      for (int r = 0; r < NR; r++) if (exp_rd[r] >= 0) expd[r] = phys[exp_rd[r]];
      for (int w = 0; w < NW; w++) if (wr_req[w].valid) phys[paddr(int'(wr_req[w].addr))] = wr_req[w].wdata;
      @(negedge clk);
      wr_req = '0; rd_req = '0;
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (rd_rsp[r].valid !== (exp_rd[r] >= 0) || (exp_rd[r] >= 0 && rd_rsp[r].rdata !== expd[r])) begin
          failures++; $display("FAIL read port %0d", r);
        end
      end
    end
  endtask

  initial begin
    rd_req = '0; wr_req = '0; idle = 1; v2p_we = 0; v2p_vbank = 0; v2p_pbank = 0;
    for (int b = 0; b < NB; b++) map[b] = b;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // fill every word through write port 0
    for (int a = 0; a < NB * BW; a++) begin
      @(negedge clk);
      wr_req[0] = '{valid: 1'b1, we: 1'b1, addr: 16'(a), wdata: {$urandom, $urandom, $urandom, $urandom}};
      phys[a] = wr_req[0].wdata;
    end
    @(negedge clk) wr_req = '0;
    traffic(300);
    // swap virtual banks 0 and 3 while idle
    @(negedge clk) v2p_we = 1; v2p_vbank = 0; v2p_pbank = 3;
    @(negedge clk) v2p_vbank = 3; v2p_pbank = 0;
    @(negedge clk) v2p_we = 0;
    map[0] = 3; map[3] = 0;
    checks++;
    if (v2p_rdata[0] != 3 || v2p_rdata[3] != 0 || v2p_err) begin failures++; $display("FAIL remap"); end
    traffic(300);
    // a remap while busy is refused
    @(negedge clk) idle = 0; v2p_we = 1; v2p_vbank = 1; v2p_pbank = 2;
    @(negedge clk) v2p_we = 0; idle = 1;
    checks++;
    if (!v2p_err || v2p_rdata[1] != 1) begin failures++; $display("FAIL busy remap not refused"); end
    // two reads of the same physical bank: the lower port wins, conflict counted
    @(negedge clk);
    rd_req[0] = '{valid: 1'b1, we: 1'b0, addr: 16'(5), wdata: '0};
    rd_req[2] = '{valid: 1'b1, we: 1'b0, addr: 16'(9), wdata: '0};
    @(negedge clk);
    rd_req = '0;
    checks++;
    if (!conflict || conflict_cnt != 1 || !rd_rsp[0].valid || rd_rsp[2].valid ||
        rd_rsp[0].rdata != phys[paddr(5)]) begin
      failures++; $display("FAIL conflict handling");
    end
    // a write and a read to one bank: the write wins
    @(negedge clk);
    wr_req[1] = '{valid: 1'b1, we: 1'b1, addr: 16'(BW + 1), wdata: 128'h1234};
    rd_req[1] = '{valid: 1'b1, we: 1'b0, addr: 16'(BW + 2), wdata: '0};
    phys[paddr(BW + 1)] = 128'h1234;
    @(negedge clk);
    wr_req = '0; rd_req = '0;
    checks++;
    if (conflict_cnt != 2 || rd_rsp[1].valid) begin failures++; $display("FAIL write/read conflict"); end
    traffic(100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
