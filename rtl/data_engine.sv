// data_engine: programmable word-level prefetcher for the shared operand.
//
// A five-level address loop walks the data tensor in the order the
// dot-product engine consumes it: groups (outer), reduction chunks, pixels
// (inner), with the reduction split in up to three levels
// (k = (k3*cnt_kmid + kmid)*cnt_kin + kin):
//   word address = base + g*str_g + k3*str_k3 + kmid*str_k2 + kin*str_k
//                  + p*str_pix.
// A 3x3 convolution thus needs one job: on a contiguous HWC tensor the inner
// reduction loop runs over the channel words of one filter row (three pixels
// side by side) and the next level steps a line down. On a tensor whose
// channels are split into fragments in separate banks (as written by
// depth-parallel engines), the inner loop rotates among the fragments, the
// middle one steps a pixel and the outer one a line. cnt_kin = 0 turns the
// split off; cnt_kmid = 0 leaves two levels. For every
// loop point it reads one 128-bit word, or two consecutive words when the
// point needs bytes from both (a byte scroll offset, or 16-bit data), and
// stores them as one row of a two-dimensional register file (RF_ROWS rows of
// two words). The output stage turns each row into N-byte operand vectors:
//   8-bit data, scroll s : bytes s .. s+15 of the two-word row
//                          (s = 0 needs a single word);
//   16-bit data          : first the 16 low bytes (unsigned), then the 16
//                          high bytes (signed, weight 2^8) of the 16
//                          little-endian elements in the row.
// Reads are pipelined: up to RF_ROWS rows may be outstanding or buffered, so
// bus latency is hidden as long as the register file is deep enough.
//
// Interface: start (one cycle) latches the job fields; req_* is a
// valid/ready read-request bus, rsp_* returns the data in order some cycles
// later (no back-pressure: space is reserved before a request is sent);
// vec_* is a valid/ready stream. busy stays high until the last vector is
// taken. The loop order, the row format and the 16-bit byte layout are this
// design's choices; the prefetcher with multi-dimensional address loops, 2D
// register file and byte-level scrolling is the architecture's.
module data_engine #(
  parameter int unsigned N       = 16,
  parameter int unsigned ADDR_W  = 16,
  parameter int unsigned RF_ROWS = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [15:0]          cnt_pix,
  input  logic [15:0]          cnt_k,
  input  logic [15:0]          cnt_g,
  input  logic [ADDR_W-1:0]    base,
  input  logic [ADDR_W-1:0]    str_pix,
  input  logic [ADDR_W-1:0]    str_k,
  input  logic [ADDR_W-1:0]    str_g,
  input  logic [15:0]          cnt_kin,   // chunks per inner reduction loop, 0 = all
  input  logic [ADDR_W-1:0]    str_k2,    // stride of the middle reduction loop
  input  logic [15:0]          cnt_kmid,  // middle loop count, 0 = no outer loop
  input  logic [ADDR_W-1:0]    str_k3,    // stride of the outer reduction loop
  input  logic                 in16,
  input  logic [3:0]           scroll,
  output logic                 busy,
  // read bus
  output logic                 req_valid,
  input  logic                 req_ready,
  output logic [ADDR_W-1:0]    req_addr,
  input  logic                 rsp_valid,
  input  logic [N*8-1:0]       rsp_data,
  // operand stream
  output logic                 vec_valid,
  input  logic                 vec_ready,
  output logic [N-1:0][7:0]    vec_data,
  output logic                 vec_unsigned,
  output logic                 vec_shift8
);
  localparam int unsigned RW = $clog2(RF_ROWS);

  // latched job
  logic [15:0]       n_pix, n_k, n_g, n_kin, n_kmid;
  logic [ADDR_W-1:0] s_pix, s_k, s_g, s_k2, s_k3;
  logic              m16;
  logic [3:0]        m_scr;
  logic              two_words;
  assign two_words = m16 | (m_scr != 4'd0);

  // address loops
  logic              issuing;
  logic [15:0]       i_pix, i_k, i_g, i_kin, i_kmid;
  logic [ADDR_W-1:0] a_pix, a_k, a_k2, a_k3, a_g;   // running addresses of each loop level
  logic              k2_wrap, k3_wrap;              // inner / middle reduction loop wraps
  assign k2_wrap = (n_kin != 16'd0) && (i_kin == n_kin - 1);
  assign k3_wrap = k2_wrap && (n_kmid != 16'd0) && (i_kmid == n_kmid - 1);
  logic              second;            // sending the second word of a row
  logic [RW:0]       reserved;          // rows requested and not yet consumed

  // register file
  logic [N*8-1:0]    rf [RF_ROWS][2];
  logic [RW-1:0]     wr_row, rd_row;
  logic              wr_half;
  logic [RW:0]       filled;            // complete rows waiting for the output stage
  logic              phase;             // 16-bit: 0 = low bytes, 1 = high bytes

  logic req_fire, row_done_w, row_pop, last_point;
  assign req_valid  = issuing && (second || reserved < (RW+1)'(RF_ROWS));
  assign req_addr   = a_pix + ADDR_W'(second);
  assign req_fire   = req_valid && req_ready;
  assign last_point = (i_pix == n_pix - 1) && (i_k == n_k - 1) && (i_g == n_g - 1);
  // a row's last response arrives
  assign row_done_w = rsp_valid && (!two_words || wr_half);
  // a row fully consumed by the output stage
  assign row_pop    = vec_valid && vec_ready && (!m16 || phase);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing  <= 1'b0;
      second   <= 1'b0;
      reserved <= '0;
      filled   <= '0;
      wr_row   <= '0;
      rd_row   <= '0;
      wr_half  <= 1'b0;
      phase    <= 1'b0;
      busy     <= 1'b0;
      {i_pix, i_k, i_g, i_kin, i_kmid} <= '0;
      {a_pix, a_k, a_k2, a_k3, a_g} <= '0;
      {n_pix, n_k, n_g, n_kin, n_kmid, s_pix, s_k, s_g, s_k2, s_k3, m16, m_scr} <= '0;
    end else begin
      if (start && !busy) begin
        n_pix <= cnt_pix; n_k <= cnt_k; n_g <= cnt_g;
        s_pix <= str_pix; s_k <= str_k; s_g <= str_g;
        n_kin <= cnt_kin; s_k2 <= str_k2; n_kmid <= cnt_kmid; s_k3 <= str_k3;
        m16 <= in16; m_scr <= scroll;
        {a_pix, a_k, a_k2, a_k3, a_g} <= {base, base, base, base, base};
        {i_pix, i_k, i_g, i_kin, i_kmid} <= '0;
        issuing <= 1'b1;
        busy    <= 1'b1;
        second  <= 1'b0;
        phase   <= 1'b0;
      end else begin
        if (req_fire) begin
          if (two_words && !second) begin
            second <= 1'b1;
          end else begin
            second <= 1'b0;
            if (last_point) issuing <= 1'b0;
            if (i_pix != n_pix - 1) begin
              i_pix <= i_pix + 1;
              a_pix <= a_pix + s_pix;
            end else if (i_k != n_k - 1) begin
              i_pix <= '0; i_k <= i_k + 1;
              if (k3_wrap) begin
                i_kin <= '0; i_kmid <= '0;
                a_pix <= a_k3 + s_k3; a_k <= a_k3 + s_k3; a_k2 <= a_k3 + s_k3;
                a_k3 <= a_k3 + s_k3;
              end else if (k2_wrap) begin
                i_kin <= '0; i_kmid <= i_kmid + 1;
                a_pix <= a_k2 + s_k2; a_k <= a_k2 + s_k2; a_k2 <= a_k2 + s_k2;
              end else begin
                i_kin <= i_kin + 1;
                a_pix <= a_k + s_k; a_k <= a_k + s_k;
              end
            end else begin
              i_pix <= '0; i_k <= '0; i_kin <= '0; i_kmid <= '0; i_g <= i_g + 1;
              a_pix <= a_g + s_g; a_k <= a_g + s_g; a_k2 <= a_g + s_g; a_k3 <= a_g + s_g;
              a_g <= a_g + s_g;
            end
          end
        end
        if (busy && !issuing && reserved == '0) busy <= 1'b0;
      end

      // row bookkeeping
      reserved <= reserved + (RW+1)'(req_fire && !second) - (RW+1)'(row_pop);
      filled   <= filled + (RW+1)'(row_done_w) - (RW+1)'(row_pop);
      if (rsp_valid) begin
        if (two_words && !wr_half) wr_half <= 1'b1;
        else begin
          wr_half <= 1'b0;
          wr_row  <= wr_row + 1'b1;
        end
      end
      if (vec_valid && vec_ready) begin
        if (m16 && !phase) phase <= 1'b1;
        else begin
          phase  <= 1'b0;
          rd_row <= rd_row + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk)
    if (rsp_valid) rf[wr_row][wr_half] <= rsp_data;

  // output stage
  logic [2*N*8-1:0] row;
  assign row       = {rf[rd_row][1], rf[rd_row][0]};
  assign vec_valid = (filled != '0);
  always_comb begin
    vec_data     = '0;
    vec_unsigned = 1'b0;
    vec_shift8   = 1'b0;
    if (m16) begin
      for (int i = 0; i < int'(N); i++) vec_data[i] = row[16*i + 8*phase +: 8];
      vec_unsigned = !phase;
      vec_shift8   = phase;
    end else begin
      vec_data = (N*8)'(row >> (8 * m_scr));
    end
  end
endmodule
