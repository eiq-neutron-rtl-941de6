// bus_fabric: multi-layer bus between the compute engines and the TCM.
//
// Every engine has three buses: data (read), parameters (read) and results
// (write). The fabric gives each of them its own TCM port, so all engines
// can stream at full rate at once (a multi-layer bus, not a shared one). It
// adds PIPE (at least 1) register stages on the request path and PIPE on
// the response path to model long, deeply pipelined wires; engines tolerate the latency
// through their outstanding-request buffers.
//
// Sharing mode: with share_d (share_p) set, the data (parameter) stream of
// engine 0 is broadcast to all engines. Only engine 0's requests reach the
// TCM; every engine receives engine 0's responses. The other engines must
// run in lockstep on equally sized partitions, i.e. issue their requests in
// the same cycles; lockstep_err flags a cycle in which they do not. The
// TCM ports of engines 1..E-1 on a shared bus stay idle, leaving their
// banks free for the DMA.
//
// Ports: eng_* are per-engine arrays; tcm_rd_req[0..E-1] are the data
// ports, tcm_rd_req[E..2E-1] the parameter ports and tcm_wr_req[0..E-1] the
// result ports. All requests are accepted (ready is always 1), as the TCM
// banks never stall. Broadcast sharing follows the architecture; the
// register-stage model of bus latency and the lockstep monitor are this
// design's choices.
module bus_fabric
  import neutron_pkg::mem_req_t, neutron_pkg::mem_rsp_t;
#(
  parameter int unsigned E      = 4,
  parameter int unsigned ADDR_W = 16,
  parameter int unsigned PIPE   = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       share_d,
  input  logic                       share_p,
  // engine side
  input  logic [E-1:0]               d_req_valid,
  input  logic [E-1:0][ADDR_W-1:0]   d_req_addr,
  output logic [E-1:0]               d_rsp_valid,
  output logic [E-1:0][127:0]        d_rsp_data,
  input  logic [E-1:0]               p_req_valid,
  input  logic [E-1:0][ADDR_W-1:0]   p_req_addr,
  output logic [E-1:0]               p_rsp_valid,
  output logic [E-1:0][127:0]        p_rsp_data,
  input  logic [E-1:0]               r_req_valid,
  input  logic [E-1:0][ADDR_W-1:0]   r_req_addr,
  input  logic [E-1:0][127:0]        r_req_wdata,
  // TCM side
  output mem_req_t [2*E-1:0]         tcm_rd_req,
  input  mem_rsp_t [2*E-1:0]         tcm_rd_rsp,
  output mem_req_t [E-1:0]           tcm_wr_req,
  output logic                       lockstep_err
);
  // requests as seen at the fabric input
  mem_req_t [2*E-1:0] rd_in;
  mem_req_t [E-1:0]   wr_in;
  always_comb begin
    for (int e = 0; e < int'(E); e++) begin
      rd_in[e]     = '{valid: d_req_valid[e] && (e == 0 || !share_d), we: 1'b0,
                       addr: d_req_addr[e], wdata: '0};
      rd_in[E + e] = '{valid: p_req_valid[e] && (e == 0 || !share_p), we: 1'b0,
                       addr: p_req_addr[e], wdata: '0};
      wr_in[e]     = '{valid: r_req_valid[e], we: 1'b1, addr: r_req_addr[e],
                       wdata: r_req_wdata[e]};
    end
  end

  // response selection before the return pipeline
  mem_rsp_t [2*E-1:0] rsp_in;
  always_comb begin
    for (int e = 0; e < int'(E); e++) begin
      rsp_in[e]     = share_d ? tcm_rd_rsp[0] : tcm_rd_rsp[e];
      rsp_in[E + e] = share_p ? tcm_rd_rsp[E] : tcm_rd_rsp[E + e];
    end
  end

  // pipeline stages (PIPE >= 1)
  mem_req_t [2*E-1:0] rd_s [PIPE];
  mem_req_t [E-1:0]   wr_s [PIPE];
  mem_rsp_t [2*E-1:0] rs_s [PIPE];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(PIPE); s++) begin
        rd_s[s] <= '0;
        wr_s[s] <= '0;
        rs_s[s] <= '0;
      end
    end else begin
      rd_s[0] <= rd_in;
      wr_s[0] <= wr_in;
      rs_s[0] <= rsp_in;
      for (int s = 1; s < int'(PIPE); s++) begin
        rd_s[s] <= rd_s[s-1];
        wr_s[s] <= wr_s[s-1];
        rs_s[s] <= rs_s[s-1];
      end
    end
  end

  assign tcm_rd_req = rd_s[PIPE-1];
  assign tcm_wr_req = wr_s[PIPE-1];
  always_comb begin
    for (int e = 0; e < int'(E); e++) begin
      d_rsp_valid[e] = rs_s[PIPE-1][e].valid;
      d_rsp_data[e]  = rs_s[PIPE-1][e].rdata;
      p_rsp_valid[e] = rs_s[PIPE-1][E + e].valid;
      p_rsp_data[e]  = rs_s[PIPE-1][E + e].rdata;
    end
  end

  // lockstep monitor for the shared buses
  always_comb begin
    lockstep_err = 1'b0;
    for (int e = 1; e < int'(E); e++) begin
      if (share_d && d_req_valid[e] != d_req_valid[0]) lockstep_err = 1'b1;
      if (share_p && p_req_valid[e] != p_req_valid[0]) lockstep_err = 1'b1;
    end
  end
endmodule
