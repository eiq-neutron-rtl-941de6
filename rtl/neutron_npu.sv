// neutron_npu: the NPU subsystem (four compute engines, bus fabric, banked
// TCM and DMA) as one memory-mapped accelerator.
//
// Structure: each compute engine's data, parameter and result buses go
// through the multi-layer bus fabric to ports of their own on the TCM. The
// DMA has one TCM read and one TCM write port and the system-memory port
// (ext_*), through which it fetches and pushes tiles. The controller core
// (a RISC-V processor outside this RTL) programs everything through the cfg
// port and may also read and write the TCM directly through the host port.
// With E = 4 engines of 2*16*16 operations per cycle the subsystem peaks at
// 2048 operations per cycle (2 TOPS at 1 GHz).
//
// Configuration address map (32-bit word addresses, cfg_addr[15:12] selects):
//   0..3  engine e: registers 0..255, lookup table 256..511 (see
//         compute_engine and neutron_pkg::eng_reg_e)
//   4     all engines at once (write only): global programming, e.g. one
//         start that launches all engines in the same cycle for lockstep
//   5     DMA registers 0..11
//   6     V2P table: entry v (virtual bank) = physical bank; writes are
//         accepted only while the engines and the DMA are idle
//   7     system: 0 = {share_p, share_d} sharing-mode bits,
//         1 = status {v2p_err_seen, lockstep_err_seen, dma busy, engines busy[3:0]},
//         2 = TCM bank-conflict count
// Reads are combinational. irq_eng / irq_dma pulse when a job ends.
//
// The four engines, shared TCM, DMA, controller access and sharing mode
// follow the architecture; the address map and port protocols are this
// design's choices.
module neutron_npu
  import neutron_pkg::*;
#(
  parameter int unsigned E          = N_ENGINES,
  parameter int unsigned NB         = N_BANKS,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned PIPE       = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration port from the controller core
  input  logic               cfg_we,
  input  logic [15:0]        cfg_addr,
  input  logic [31:0]        cfg_wdata,
  output logic [31:0]        cfg_rdata,
  output logic [E-1:0]       irq_eng,
  output logic               irq_dma,
  // controller core access to the TCM
  input  mem_req_t           host_req,
  output mem_rsp_t           host_rsp,
  // system memory (DDR) port of the DMA
  output logic               ext_req_valid,
  input  logic               ext_req_ready,
  output logic               ext_req_we,
  output logic [31:0]        ext_req_addr,
  output logic [127:0]       ext_req_wdata,
  input  logic               ext_rsp_valid,
  input  logic [127:0]       ext_rsp_data
);
  localparam int unsigned NR = 2 * E + 2;   // engine data, engine params, DMA, host
  localparam int unsigned NW = E + 2;       // engine results, DMA, host
  localparam int unsigned BW = $clog2(NB);

  logic [3:0] sel;
  assign sel = cfg_addr[15:12];

  // ------------------------------------------------------------ system regs
  logic share_d, share_p, lock_seen, v2p_seen;
  logic lockstep_err, v2p_err, idle;
  logic [31:0] conflict_cnt;
  logic        conflict;
  logic [E-1:0] eng_busy;
  logic dma_busy;
  logic [BW-1:0] v2p_rdata [NB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {share_p, share_d} <= 2'b00;
      lock_seen <= 1'b0; v2p_seen <= 1'b0;
    end else begin
      if (cfg_we && sel == 4'd7 && cfg_addr[1:0] == 2'd0) {share_p, share_d} <= cfg_wdata[1:0];
      if (cfg_we && sel == 4'd7 && cfg_addr[1:0] == 2'd1) begin
        lock_seen <= 1'b0; v2p_seen <= 1'b0;
      end else begin
        if (lockstep_err) lock_seen <= 1'b1;
        if (v2p_err)      v2p_seen  <= 1'b1;
      end
    end
  end
  assign idle = (eng_busy == '0) && !dma_busy;

  // ------------------------------------------------------------ engines
  logic [E-1:0]              d_req_valid, p_req_valid, r_req_valid;
  logic [E-1:0][ADDR_W-1:0]  d_req_addr, p_req_addr, r_req_addr;
  logic [E-1:0]              d_rsp_valid, p_rsp_valid;
  logic [E-1:0][127:0]       d_rsp_data, p_rsp_data, r_req_wdata;
  logic [31:0]               eng_rdata [E];

  for (genvar e = 0; e < E; e++) begin : g_eng
    compute_engine #(.N(N_LANES), .M(M_UNITS), .A(A_ACC), .WC_BYTES(WC_BYTES),
                     .ADDR_W(ADDR_W)) u_eng (
      .clk, .rst_n,
      .cfg_we     (cfg_we && (sel == 4'(e) || sel == 4'd4)),
      .cfg_addr   (cfg_addr[8:0]),
      .cfg_wdata  (cfg_wdata),
      .cfg_rdata  (eng_rdata[e]),
      .busy       (eng_busy[e]),
      .done       (irq_eng[e]),
      .d_req_valid(d_req_valid[e]),
      .d_req_ready(1'b1),
      .d_req_addr (d_req_addr[e]),
      .d_rsp_valid(d_rsp_valid[e]),
      .d_rsp_data (d_rsp_data[e]),
      .p_req_valid(p_req_valid[e]),
      .p_req_ready(1'b1),
      .p_req_addr (p_req_addr[e]),
      .p_rsp_valid(p_rsp_valid[e]),
      .p_rsp_data (p_rsp_data[e]),
      .r_req_valid(r_req_valid[e]),
      .r_req_ready(1'b1),
      .r_req_addr (r_req_addr[e]),
      .r_req_wdata(r_req_wdata[e])
    );
  end

  // ------------------------------------------------------------ fabric and TCM
  mem_req_t [NR-1:0]  tcm_rd_req;
  mem_rsp_t [NR-1:0]  tcm_rd_rsp;
  mem_req_t [NW-1:0]  tcm_wr_req;

  bus_fabric #(.E(E), .ADDR_W(ADDR_W), .PIPE(PIPE)) u_fabric (
    .clk, .rst_n,
    .share_d, .share_p,
    .d_req_valid, .d_req_addr, .d_rsp_valid, .d_rsp_data,
    .p_req_valid, .p_req_addr, .p_rsp_valid, .p_rsp_data,
    .r_req_valid, .r_req_addr, .r_req_wdata,
    .tcm_rd_req (tcm_rd_req[2*E-1:0]),
    .tcm_rd_rsp (tcm_rd_rsp[2*E-1:0]),
    .tcm_wr_req (tcm_wr_req[E-1:0]),
    .lockstep_err
  );

  assign tcm_rd_req[2*E+1] = host_req.we ? '0 : host_req;
  assign tcm_wr_req[E+1]   = host_req.we ? host_req : '0;
  assign host_rsp          = tcm_rd_rsp[2*E+1];

  tcm #(.NB(NB), .BANK_WORDS(BANK_WORDS), .NR(NR), .NW(NW)) u_tcm (
    .clk, .rst_n,
    .rd_req      (tcm_rd_req),
    .rd_rsp      (tcm_rd_rsp),
    .wr_req      (tcm_wr_req),
    .idle,
    .v2p_we      (cfg_we && sel == 4'd6),
    .v2p_vbank   (cfg_addr[BW-1:0]),
    .v2p_pbank   (cfg_wdata[BW-1:0]),
    .v2p_err,
    .v2p_rdata,
    .conflict,
    .conflict_cnt
  );

  // ------------------------------------------------------------ DMA
  logic [31:0] dma_rdata;
  dma #(.DEPTH(8), .ADDR_W(ADDR_W)) u_dma (
    .clk, .rst_n,
    .cfg_we    (cfg_we && sel == 4'd5),
    .cfg_addr  (cfg_addr[3:0]),
    .cfg_wdata,
    .cfg_rdata (dma_rdata),
    .busy      (dma_busy),
    .done      (irq_dma),
    .tcm_rd_req(tcm_rd_req[2*E]),
    .tcm_rd_rsp(tcm_rd_rsp[2*E]),
    .tcm_wr_req(tcm_wr_req[E]),
    .ext_req_valid, .ext_req_ready, .ext_req_we, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_data
  );

  // ------------------------------------------------------------ read mux
  always_comb begin
    cfg_rdata = '0;
    if (sel < 4'(E)) cfg_rdata = eng_rdata[sel[$clog2(E)-1:0]];
    else unique case (sel)
      4'd5: cfg_rdata = dma_rdata;
      4'd6: cfg_rdata = 32'(v2p_rdata[cfg_addr[BW-1:0]]);
      4'd7: unique case (cfg_addr[1:0])
              2'd0: cfg_rdata = {30'd0, share_p, share_d};
              2'd1: cfg_rdata = 32'({v2p_seen, lock_seen, dma_busy, eng_busy});
              2'd2: cfg_rdata = conflict_cnt;
              default: cfg_rdata = '0;
            endcase
      default: cfg_rdata = '0;
    endcase
  end
endmodule
