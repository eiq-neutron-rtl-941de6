// tcm: tightly coupled memory, banked and software managed.
//
// NB banks of BANK_WORDS words each (default 16 x 4096 x 128 bit = 1 MiB).
// Every port presents a virtual word address; its upper bits name a virtual
// bank, which the V2P table translates to a physical bank, and the lower
// bits the word inside that bank. Each bank is a single-ported SRAM that
// serves one access per cycle. Banks are not arbitrated: the compiler must
// place tensors so that no two ports touch the same physical bank in one
// cycle. If it happens anyway, the lowest-numbered port wins (write ports
// before read ports), the others are dropped, `conflict` pulses and
// conflict_cnt counts the event, so such a schedule error is visible.
//
// Timing: requests are always accepted; read data returns on rd_rsp exactly
// one cycle after the request. V2P entries (virtual bank v2p_vbank -> physical
// bank v2p_pbank) can only be changed while the subsystem is idle; a write
// attempted while not idle is ignored and flagged on v2p_err. After reset the
// table is the identity.
//
// Banking without arbitration and the V2P remapping in idle mode are the
// architecture's; the bank count, the priority order on conflicts and the
// conflict counter are this design's choices.
module tcm
  import neutron_pkg::mem_req_t, neutron_pkg::mem_rsp_t;
#(
  parameter int unsigned NB         = 16,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned NR         = 10,
  parameter int unsigned NW         = 6
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  mem_req_t [NR-1:0]        rd_req,
  output mem_rsp_t [NR-1:0]        rd_rsp,
  input  mem_req_t [NW-1:0]        wr_req,
  // V2P table
  input  logic                     idle,
  input  logic                     v2p_we,
  input  logic [$clog2(NB)-1:0]    v2p_vbank,
  input  logic [$clog2(NB)-1:0]    v2p_pbank,
  output logic                     v2p_err,
  output logic [$clog2(NB)-1:0]    v2p_rdata [NB],
  // conflict monitor
  output logic                     conflict,
  output logic [31:0]              conflict_cnt
);
  localparam int unsigned BW  = $clog2(NB);
  localparam int unsigned OW  = $clog2(BANK_WORDS);
  localparam int unsigned NP  = NW + NR;

  logic [BW-1:0] v2p [NB];
  assign v2p_rdata = v2p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < int'(NB); b++) v2p[b] <= BW'(b);
      v2p_err <= 1'b0;
    end else begin
      v2p_err <= v2p_we && !idle;
      if (v2p_we && idle) v2p[v2p_vbank] <= v2p_pbank;
    end
  end

  // all ports in priority order: writes first, then reads
  logic [NP-1:0]        p_valid;
  logic [NP-1:0]        p_we;
  logic [BW-1:0]        p_bank [NP];
  logic [OW-1:0]        p_off  [NP];
  logic [127:0]         p_wdata[NP];

  always_comb begin
    for (int p = 0; p < int'(NP); p++) begin
      mem_req_t r;
      r = (p < int'(NW)) ? wr_req[p] : rd_req[p - int'(NW)];
      p_valid[p] = r.valid;
      p_we[p]    = (p < int'(NW));
      p_bank[p]  = v2p[r.addr[OW +: BW]];
      p_off[p]   = r.addr[OW-1:0];
      p_wdata[p] = r.wdata;
    end
  end

  // per-bank port selection
  logic [NB-1:0]          b_en, b_we, b_clash;
  logic [OW-1:0]          b_off  [NB];
  logic [127:0]           b_wdata[NB];
  logic [NP-1:0]          granted;

  always_comb begin
    granted = '0;
    for (int b = 0; b < int'(NB); b++) begin
      b_en[b] = 1'b0; b_we[b] = 1'b0; b_clash[b] = 1'b0;
      b_off[b] = '0; b_wdata[b] = '0;
      for (int p = 0; p < int'(NP); p++) begin
        if (p_valid[p] && p_bank[p] == BW'(b)) begin
          if (!b_en[b]) begin
            b_en[b]    = 1'b1;
            b_we[b]    = p_we[p];
            b_off[b]   = p_off[p];
            b_wdata[b] = p_wdata[p];
            granted[p] = 1'b1;
          end else begin
            b_clash[b] = 1'b1;
          end
        end
      end
    end
  end

  // banks
  logic [127:0] b_q [NB];
  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [127:0] mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (b_en[b] && b_we[b])       mem[b_off[b]] <= b_wdata[b];
      else if (b_en[b] && !b_we[b]) b_q[b] <= mem[b_off[b]];
    end
  end

  // read return path
  logic [NR-1:0]  rd_q;
  logic [BW-1:0]  rd_bank_q [NR];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0;
      conflict <= 1'b0;
      conflict_cnt <= '0;
    end else begin
      for (int r = 0; r < int'(NR); r++) rd_q[r] <= granted[int'(NW) + r];
      conflict <= |b_clash;
      if (|b_clash) conflict_cnt <= conflict_cnt + 1;
    end
  end
  always_ff @(posedge clk)
    for (int r = 0; r < int'(NR); r++) rd_bank_q[r] <= p_bank[int'(NW) + r];

  always_comb
    for (int r = 0; r < int'(NR); r++) begin
      rd_rsp[r].valid = rd_q[r];
      rd_rsp[r].rdata = b_q[rd_bank_q[r]];
    end
endmodule
