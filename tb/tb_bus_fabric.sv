// tb_bus_fabric: checks the per-engine routing of the three buses with PIPE
// register stages each way, and the sharing mode in which engine 0's data
// or parameter stream is broadcast to all engines while the other engines'
// requests never reach the memory; a lockstep violation must be flagged.
//
// Random requests on all engine buses each cycle; a TCM stand-in answers
// one cycle later and the routed responses are compared with what each
// engine should see after 2*PIPE+1 cycles. Broadcast sharing mode is the
// architecture's; the pipeline depth and the lockstep flag are this
// design's.
module tb_bus_fabric;
  import neutron_pkg::mem_req_t, neutron_pkg::mem_rsp_t;
  localparam int E = 4, PIPE = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic share_d, share_p, lockstep_err;
  logic [E-1:0] d_req_valid, d_rsp_valid, p_req_valid, p_rsp_valid, r_req_valid;
  logic [E-1:0][15:0] d_req_addr, p_req_addr, r_req_addr;
  logic [E-1:0][127:0] d_rsp_data, p_rsp_data, r_req_wdata;
  mem_req_t [2*E-1:0] tcm_rd_req;
  mem_rsp_t [2*E-1:0] tcm_rd_rsp;
  mem_req_t [E-1:0] tcm_wr_req;
  int checks = 0, failures = 0;

  bus_fabric #(.E(E), .ADDR_W(16), .PIPE(PIPE)) dut (.*);

  // memory stand-in: data = f(port, address), one cycle after the request
  function automatic logic [127:0] f(int port, logic [15:0] a);
    return {16'(port), 96'd0, a} ^ 128'hA5A5_0000;
  endfunction
  always @(posedge clk)
    for (int i = 0; i < 2 * E; i++) begin
      tcm_rd_rsp[i].valid <= rst_n && tcm_rd_req[i].valid;
      tcm_rd_rsp[i].rdata <= f(i, tcm_rd_req[i].addr);
    end

  // observed at the TCM side and at the engines, with cycle numbers
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic clear_req();
    d_req_valid = '0; p_req_valid = '0; r_req_valid = '0;
  endtask

  initial begin
    share_d = 0; share_p = 0; clear_req();
    d_req_addr = '0; p_req_addr = '0; r_req_addr = '0; r_req_wdata = '0;
    for (int i = 0; i < 2 * E; i++) tcm_rd_rsp[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // independent mode: every engine reaches its own ports
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      for (int e = 0; e < E; e++) begin
        d_req_valid[e] = 1; d_req_addr[e] = 16'($urandom);
        p_req_valid[e] = 1; p_req_addr[e] = 16'($urandom);
        r_req_valid[e] = 1; r_req_addr[e] = 16'($urandom); r_req_wdata[e] = {4{$urandom}};
      end
      begin
        logic [E-1:0][15:0] da, pa, ra;
        logic [E-1:0][127:0] rw;
        da = d_req_addr; pa = p_req_addr; ra = r_req_addr; rw = r_req_wdata;
        @(negedge clk);
        clear_req();
        repeat (PIPE - 1) @(negedge clk);
        for (int e = 0; e < E; e++) begin
          checks++;
          if (!tcm_rd_req[e].valid || tcm_rd_req[e].addr != da[e] || !tcm_rd_req[E + e].valid ||
              tcm_rd_req[E + e].addr != pa[e] || !tcm_wr_req[e].valid || tcm_wr_req[e].addr != ra[e] ||
              tcm_wr_req[e].wdata != rw[e]) begin
            failures++; $display("FAIL request path engine %0d", e);
          end
        end
        @(negedge clk);          // memory answers
        repeat (PIPE) @(negedge clk);
        for (int e = 0; e < E; e++) begin
          checks++;
          if (!d_rsp_valid[e] || d_rsp_data[e] != f(e, da[e]) ||
              !p_rsp_valid[e] || p_rsp_data[e] != f(E + e, pa[e])) begin
            failures++; $display("FAIL response path engine %0d", e);
          end
        end
      end
    end
    // sharing mode on the data bus: lockstep requests, engine 0's stream to all
    share_d = 1;
    for (int t = 0; t < 20; t++) begin
      logic [15:0] a0;
      @(negedge clk);
      a0 = 16'($urandom);
      for (int e = 0; e < E; e++) begin d_req_valid[e] = 1; d_req_addr[e] = a0 + 16'(e); end
      #1;
      checks++;
      if (lockstep_err) begin failures++; $display("FAIL lockstep flagged"); end
      @(negedge clk);
      clear_req();
      repeat (PIPE - 1) @(negedge clk);
      checks++;
      if (!tcm_rd_req[0].valid || tcm_rd_req[0].addr != a0 || tcm_rd_req[1].valid ||
          tcm_rd_req[2].valid || tcm_rd_req[3].valid) begin
        failures++; $display("FAIL shared request");
      end
      @(negedge clk);
      repeat (PIPE) @(negedge clk);
      for (int e = 0; e < E; e++) begin
        checks++;
        if (!d_rsp_valid[e] || d_rsp_data[e] != f(0, a0)) begin
          failures++; $display("FAIL broadcast to engine %0d", e);
        end
      end
    end
    // parameter bus shared too, and an engine out of lockstep
    share_p = 1;
    @(negedge clk);
    p_req_valid = 4'b1011;
    #1;
    checks++;
    if (!lockstep_err) begin failures++; $display("FAIL lockstep violation not flagged"); end
    @(negedge clk) clear_req();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
