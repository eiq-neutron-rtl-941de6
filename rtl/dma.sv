// dma: multi-dimensional strided data mover for the NPU subsystem.
//
// Moves cnt0*cnt1*cnt2 words of 128 bits. The source and destination each
// walk their own three-level loop (cnt0 innermost):
//   addr = base + i2*str2 + i1*str1 + i0*str0
// with separate strides for source and destination, so one transfer can
// fetch a tile from system memory (DDR), push it back, copy it inside the
// TCM (e.g. to duplicate the overlapping input lines needed by
// line-parallel compute) or rearrange its layout on the way.
// Either side is the TCM or the system-memory port (ext_*), chosen by the
// CTRL bits.
//
// The read side issues requests as long as the FIFO has room for their
// data (DEPTH words), so many reads are in flight and memory latency is
// hidden; the write side drains the FIFO. On the system-memory port a write
// has priority over a read. TCM requests are always accepted; TCM read
// data returns one cycle later, system-memory read data in request order
// whenever the memory delivers it.
//
// Registers (cfg word address): 0 CTRL (write: bit0 start, bit1 source is
// system memory, bit2 destination is system memory; read: bit0 busy),
// 1 SRC_BASE, 2-4 SRC_STR0..2, 5 DST_BASE, 6-8 DST_STR0..2, 9-11 CNT0..2.
// done pulses when the last word is written. Multi-dimensional strided and
// TCM-to-TCM transfers follow the architecture; the register map, three
// loop levels, FIFO depth and the memory port protocol are this design's.
module dma
  import neutron_pkg::mem_req_t, neutron_pkg::mem_rsp_t;
#(
  parameter int unsigned DEPTH  = 8,
  parameter int unsigned ADDR_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [3:0]       cfg_addr,
  input  logic [31:0]      cfg_wdata,
  output logic [31:0]      cfg_rdata,
  output logic             busy,
  output logic             done,
  // TCM
  output mem_req_t         tcm_rd_req,
  input  mem_rsp_t         tcm_rd_rsp,
  output mem_req_t         tcm_wr_req,
  // system memory
  output logic             ext_req_valid,
  input  logic             ext_req_ready,
  output logic             ext_req_we,
  output logic [31:0]      ext_req_addr,
  output logic [127:0]     ext_req_wdata,
  input  logic             ext_rsp_valid,
  input  logic [127:0]     ext_rsp_data
);
  localparam int unsigned DW = $clog2(DEPTH + 1);

  logic [31:0] src_base, dst_base;
  logic [2:0][31:0] src_str, dst_str;
  logic [2:0][15:0] cnt;
  logic        src_ext, dst_ext;

  logic start;
  assign start = cfg_we && cfg_addr == 4'd0 && cfg_wdata[0] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_base <= '0; dst_base <= '0; src_ext <= 1'b0; dst_ext <= 1'b0;
      for (int i = 0; i < 3; i++) begin
        src_str[i] <= '0; dst_str[i] <= '0; cnt[i] <= 16'd1;
      end
    end else if (cfg_we && !busy) begin
      unique case (cfg_addr)
        4'd0:  {dst_ext, src_ext} <= cfg_wdata[2:1];
        4'd1:  src_base   <= cfg_wdata;
        4'd2:  src_str[0] <= cfg_wdata;
        4'd3:  src_str[1] <= cfg_wdata;
        4'd4:  src_str[2] <= cfg_wdata;
        4'd5:  dst_base   <= cfg_wdata;
        4'd6:  dst_str[0] <= cfg_wdata;
        4'd7:  dst_str[1] <= cfg_wdata;
        4'd8:  dst_str[2] <= cfg_wdata;
        4'd9:  cnt[0]     <= cfg_wdata[15:0];
        4'd10: cnt[1]     <= cfg_wdata[15:0];
        4'd11: cnt[2]     <= cfg_wdata[15:0];
        default: ;
      endcase
    end
  end
  assign cfg_rdata = {31'd0, busy};

  // ------------------------------------------------------------ read side
  logic        rd_active;
  logic [2:0][15:0] ri;
  logic [2:0][31:0] ra;       // running address per level
  logic [DW-1:0] room;        // FIFO words neither filled nor reserved
  logic        rd_fire, rd_last, rd_issue;
  logic        wr_ext_req;    // destination side wants the system port

  assign rd_last  = (ri[0] == cnt[0] - 1) && (ri[1] == cnt[1] - 1) && (ri[2] == cnt[2] - 1);
  assign rd_issue = rd_active && room != '0;
  assign rd_fire  = rd_issue && (!src_ext || (ext_req_ready && !wr_ext_req));

  // ------------------------------------------------------------ FIFO
  logic [127:0] fifo [DEPTH];
  logic [$clog2(DEPTH)-1:0] f_wp, f_rp;
  logic [DW-1:0] f_cnt;
  logic          f_push, f_pop;
  logic [127:0]  f_in;
  assign f_push = src_ext ? ext_rsp_valid : tcm_rd_rsp.valid;
  assign f_in   = src_ext ? ext_rsp_data  : tcm_rd_rsp.rdata;

  // ------------------------------------------------------------ write side
  logic        wr_active;
  logic [2:0][15:0] wi;
  logic [2:0][31:0] wa;
  logic        wr_last;
  assign wr_last    = (wi[0] == cnt[0] - 1) && (wi[1] == cnt[1] - 1) && (wi[2] == cnt[2] - 1);
  assign wr_ext_req = wr_active && dst_ext && f_cnt != '0;
  assign f_pop      = wr_active && f_cnt != '0 && (!dst_ext || ext_req_ready);

  // ------------------------------------------------------------ ports
  always_comb begin
    tcm_rd_req = '{valid: rd_issue && !src_ext, we: 1'b0, addr: ra[0][ADDR_W-1:0], wdata: '0};
    tcm_wr_req = '{valid: f_pop && !dst_ext, we: 1'b1, addr: wa[0][ADDR_W-1:0], wdata: fifo[f_rp]};
    ext_req_valid = wr_ext_req || (rd_issue && src_ext);
    ext_req_we    = wr_ext_req;
    ext_req_addr  = wr_ext_req ? wa[0] : ra[0];
    ext_req_wdata = fifo[f_rp];
  end

  // loop stepping shared by both sides
  typedef struct packed {
    logic [2:0][15:0] i;
    logic [2:0][31:0] a;
  } loop_t;

  function automatic loop_t step(logic [2:0][15:0] c, logic [2:0][31:0] st,
                                 logic [2:0][15:0] i, logic [2:0][31:0] a);
    loop_t r;
    r.i = i; r.a = a;
    if (i[0] != c[0] - 1) begin
      r.i[0] = i[0] + 1; r.a[0] = a[0] + st[0];
    end else if (i[1] != c[1] - 1) begin
      r.i[0] = '0; r.i[1] = i[1] + 1;
      r.a[1] = a[1] + st[1]; r.a[0] = a[1] + st[1];
    end else begin
      r.i[0] = '0; r.i[1] = '0; r.i[2] = i[2] + 1;
      r.a[2] = a[2] + st[2]; r.a[1] = a[2] + st[2]; r.a[0] = a[2] + st[2];
    end
    return r;
  endfunction

  loop_t rd_nx, wr_nx;
  assign rd_nx = step(cnt, src_str, ri, ra);
  assign wr_nx = step(cnt, dst_str, wi, wa);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; rd_active <= 1'b0; wr_active <= 1'b0;
      room <= DW'(DEPTH); f_wp <= '0; f_rp <= '0; f_cnt <= '0;
      for (int l = 0; l < 3; l++) begin
        ri[l] <= '0; wi[l] <= '0; ra[l] <= '0; wa[l] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1; rd_active <= 1'b1; wr_active <= 1'b1;
        for (int l = 0; l < 3; l++) begin
          ri[l] <= '0; wi[l] <= '0; ra[l] <= src_base; wa[l] <= dst_base;
        end
      end else begin
        if (rd_fire) begin
          ri <= rd_nx.i; ra <= rd_nx.a;
          if (rd_last) rd_active <= 1'b0;
        end
        if (f_pop) begin
          wi <= wr_nx.i; wa <= wr_nx.a;
          if (wr_last) begin
            wr_active <= 1'b0; busy <= 1'b0; done <= 1'b1;
          end
        end
      end
      room  <= room - DW'(rd_fire) + DW'(f_pop);
      f_cnt <= f_cnt + DW'(f_push) - DW'(f_pop);
      if (f_push) f_wp <= f_wp + 1'b1;
      if (f_pop)  f_rp <= f_rp + 1'b1;
    end
  end

  always_ff @(posedge clk)
    if (f_push) fifo[f_wp] <= f_in;
endmodule
