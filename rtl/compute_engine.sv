// compute_engine: one NPU compute core.
//
// A job computes M = 16 output channels for ng groups of npix pixels
// (npix <= A = 32), reducing over nk chunks of N = 16 input bytes:
//   out[g][p][m] = act( sum_k sum_i data[g][p][k][i] * w[k][m][i] + bias[m] )
// which covers convolutions (im2col order of the data engine's address
// loops), fully connected layers and matrix products.
//
// Three 128-bit buses connect it to memory: the data bus (read, shared
// operand, driven by the data engine), the parameter bus (read, biases and
// weights) and the result bus (write). Inside, the flow is:
//   * the parameter loader reads the M/4 bias words, then, chunk by chunk,
//     the M weight words of a chunk (word m = weights of output channel m)
//     into the dot-product engine's shadow weight registers. With use_cache
//     the words of the first group are also written to the 8 kB weight
//     cache and all later groups read them from there, not from the bus.
//     When a layer's weights exceed the cache, the chunks that fit (the
//     first 32 with the default sizes) are cached and the remaining ones
//     are streamed over the bus for every group;
//   * the issuer swaps the shadow weights in and feeds npix operand vectors
//     (2*npix for 16-bit data) from the data engine to the dot-product
//     engine, accumulating pixel p into accumulator row p. The swap for the
//     next chunk happens in the cycle of the current chunk's last operation,
//     so a steady stream of operations has no bubbles;
//   * the last chunk's operations deliver the 32-bit rows to the activation
//     unit; its pooled 8- or 16-bit rows are queued and written to
//     o_base + n*o_str (two consecutive words per row for 16-bit output).
//     A credit counter reserves queue space before a last operation is
//     issued, so the result bus may stall without losing data. The queue
//     (OUT_DEPTH = 16 rows) covers the round trip from issue to queue pop
//     (about 12 cycles), so credits do not throttle a stream of last
//     operations when the result bus keeps up.
//
// Programming: memory-mapped registers (map in neutron_pkg::eng_reg_e) at
// cfg word addresses 0..255, lookup table entries at 256..511. Registers can
// be written while a job runs; writing 1 to CTRL copies them into a pending
// job that starts as soon as the current one ends, so programming the next
// task overlaps execution. done pulses when a job's last result is written.
//
// Peak rate: one 16x16 dot product per unit and cycle (2*N*M = 512 ops per
// cycle, 0.5 TOPS at 1 GHz) as long as operands arrive every cycle. The
// job model, register map and memory layout of parameters are this design's
// choices; the parts and their roles follow the architecture.
module compute_engine
  import neutron_pkg::job_t, neutron_pkg::act_cfg_t;
#(
  parameter int unsigned N        = 16,
  parameter int unsigned M        = 16,
  parameter int unsigned A        = 32,
  parameter int unsigned WC_BYTES = 8192,
  parameter int unsigned ADDR_W   = 16,
  parameter int unsigned RF_ROWS  = 8,
  parameter int unsigned OUT_DEPTH= 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // configuration
  input  logic                 cfg_we,
  input  logic [8:0]           cfg_addr,
  input  logic [31:0]          cfg_wdata,
  output logic [31:0]          cfg_rdata,
  output logic                 busy,
  output logic                 done,
  // data bus (read)
  output logic                 d_req_valid,
  input  logic                 d_req_ready,
  output logic [ADDR_W-1:0]    d_req_addr,
  input  logic                 d_rsp_valid,
  input  logic [N*8-1:0]       d_rsp_data,
  // parameter bus (read)
  output logic                 p_req_valid,
  input  logic                 p_req_ready,
  output logic [ADDR_W-1:0]    p_req_addr,
  input  logic                 p_rsp_valid,
  input  logic [N*8-1:0]       p_rsp_data,
  // result bus (write)
  output logic                 r_req_valid,
  input  logic                 r_req_ready,
  output logic [ADDR_W-1:0]    r_req_addr,
  output logic [N*8-1:0]       r_req_wdata
);
  localparam int unsigned WORD_W   = N * 8;
  localparam int unsigned WC_WORDS = WC_BYTES / N;
  localparam int unsigned BIAS_W   = (M * 32) / WORD_W;  // bias words
  localparam int unsigned IW       = $clog2(A);
  localparam int unsigned MW       = $clog2(M);
  localparam int unsigned CW       = $clog2(WC_WORDS);
  localparam int unsigned OCW      = $clog2(OUT_DEPTH + 1);

  // ---------------------------------------------------------------- registers
  job_t shadow, job, next_job;
  logic pending;
  logic launch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      shadow <= '0;
      shadow.npix <= 6'd1; shadow.nk <= 16'd1; shadow.ng <= 16'd1;
      shadow.mult <= 16'sd1; shadow.pool <= 3'd1;
      shadow.cmin <= -16'sd128; shadow.cmax <= 16'sd127;
    end else if (cfg_we && !cfg_addr[8]) begin
      unique case (cfg_addr[7:0])
        8'd1:  shadow.npix      <= cfg_wdata[5:0];
        8'd2:  shadow.nk        <= cfg_wdata[15:0];
        8'd3:  shadow.ng        <= cfg_wdata[15:0];
        8'd4:  shadow.d_base    <= cfg_wdata[ADDR_W-1:0];
        8'd5:  shadow.d_str_pix <= cfg_wdata[ADDR_W-1:0];
        8'd6:  shadow.d_str_k   <= cfg_wdata[ADDR_W-1:0];
        8'd7:  shadow.d_str_g   <= cfg_wdata[ADDR_W-1:0];
        8'd8:  shadow.p_base    <= cfg_wdata[ADDR_W-1:0];
        8'd9:  {shadow.pool_max, shadow.lut_en, shadow.use_cache, shadow.out16, shadow.in16} <= cfg_wdata[4:0];
        8'd10: shadow.scroll    <= cfg_wdata[3:0];
        8'd11: shadow.o_base    <= cfg_wdata[ADDR_W-1:0];
        8'd12: shadow.o_str     <= cfg_wdata[ADDR_W-1:0];
        8'd13: shadow.mult      <= cfg_wdata[15:0];
        8'd14: shadow.shift     <= cfg_wdata[4:0];
        8'd15: shadow.zp        <= cfg_wdata[15:0];
        8'd16: {shadow.cmax, shadow.cmin} <= cfg_wdata;
        8'd17: shadow.pool      <= cfg_wdata[2:0];
        8'd18: shadow.k_in      <= cfg_wdata[15:0];
        8'd19: shadow.d_str_k2  <= cfg_wdata[ADDR_W-1:0];
        8'd20: shadow.k_mid     <= cfg_wdata[15:0];
        8'd21: shadow.d_str_k3  <= cfg_wdata[ADDR_W-1:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    cfg_rdata = '0;
    unique case (cfg_addr[7:0])
      8'd0:  cfg_rdata = {30'd0, pending, busy};
      8'd1:  cfg_rdata = 32'(shadow.npix);
      8'd2:  cfg_rdata = 32'(shadow.nk);
      8'd3:  cfg_rdata = 32'(shadow.ng);
      8'd8:  cfg_rdata = 32'(shadow.p_base);
      8'd11: cfg_rdata = 32'(shadow.o_base);
      default: cfg_rdata = '0;
    endcase
  end

  logic start_wr, job_end;
  assign start_wr = cfg_we && !cfg_addr[8] && (cfg_addr[7:0] == 8'd0) && cfg_wdata[0];
  assign launch   = (!busy && start_wr) || (job_end && pending);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; pending <= 1'b0; job <= '0; next_job <= '0; done <= 1'b0;
    end else begin
      done <= job_end;
      if (launch) begin
        busy <= 1'b1;
        job  <= (job_end && pending) ? next_job : shadow;
      end else if (job_end) begin
        busy <= 1'b0;
      end
      if (start_wr && (busy && !job_end)) begin
        pending  <= 1'b1;
        next_job <= shadow;
      end else if (job_end && pending) begin
        pending <= 1'b0;
      end
    end
  end

  // A job launched by the pending path must see its own descriptor in the
  // launch cycle; job_sel is the descriptor that is about to become active.
  job_t job_sel;
  assign job_sel = (job_end && pending) ? next_job : shadow;

  // ---------------------------------------------------------------- data engine
  logic              vec_valid, vec_ready, vec_uns, vec_sh8, de_busy;
  logic [N-1:0][7:0] vec_data;

  data_engine #(.N(N), .ADDR_W(ADDR_W), .RF_ROWS(RF_ROWS)) u_de (
    .clk, .rst_n,
    .start    (launch),
    .cnt_pix  (16'(job_sel.npix)),
    .cnt_k    (job_sel.nk),
    .cnt_g    (job_sel.ng),
    .base     (job_sel.d_base),
    .str_pix  (job_sel.d_str_pix),
    .str_k    (job_sel.d_str_k),
    .cnt_kin  (job_sel.k_in),
    .str_k2   (job_sel.d_str_k2),
    .cnt_kmid (job_sel.k_mid),
    .str_k3   (job_sel.d_str_k3),
    .str_g    (job_sel.d_str_g),
    .in16     (job_sel.in16),
    .scroll   (job_sel.scroll),
    .busy     (de_busy),
    .req_valid(d_req_valid),
    .req_ready(d_req_ready),
    .req_addr (d_req_addr),
    .rsp_valid(d_rsp_valid),
    .rsp_data (d_rsp_data),
    .vec_valid(vec_valid),
    .vec_ready(vec_ready),
    .vec_data (vec_data),
    .vec_unsigned(vec_uns),
    .vec_shift8  (vec_sh8)
  );

  // ---------------------------------------------------------------- parameter loader
  typedef enum logic [2:0] {L_IDLE, L_BIAS, L_REQ, L_WAIT, L_DONE} lstate_e;
  lstate_e           lst;
  logic [15:0]       lk, lg;            // chunk being loaded
  logic [MW:0]       lreq;              // requests issued in this chunk / bias phase
  logic [MW:0]       lfill;             // words received
  logic              shadow_full;
  logic              eff_cache, from_cache;
  logic [M-1:0][31:0] bias;
  logic              c_rv;              // cache read data valid
  logic              w_swap;
  logic [CW-1:0]     c_base;

  // chunk lk is held in the cache if its M words fit below WC_WORDS; chunks
  // beyond the cache are streamed over the parameter bus for every group
  assign eff_cache  = job.use_cache && (32'(lk) * M + M <= WC_WORDS);
  assign from_cache = eff_cache && (lg != 16'd0);
  assign c_base     = CW'(32'(lk) * M);

  logic lbus_fire;
  always_comb begin
    p_req_valid = 1'b0;
    p_req_addr  = '0;
    if (lst == L_BIAS && lreq < (MW+1)'(BIAS_W)) begin
      p_req_valid = 1'b1;
      p_req_addr  = job.p_base + ADDR_W'(lreq);
    end else if (lst == L_REQ && !from_cache && lreq < (MW+1)'(M)) begin
      p_req_valid = 1'b1;
      p_req_addr  = job.p_base + ADDR_W'(BIAS_W) + ADDR_W'(32'(lk) * M) + ADDR_W'(lreq);
    end
  end
  assign lbus_fire = p_req_valid && p_req_ready;

  logic              c_rd_en, c_wr_en;
  logic [N*8-1:0]    c_rd_data;
  assign c_rd_en = (lst == L_REQ) && from_cache && (lreq < (MW+1)'(M));
  assign c_wr_en = (lst == L_REQ) && eff_cache && !from_cache && p_rsp_valid;

  weight_cache #(.BYTES(WC_BYTES), .WORD_W(WORD_W)) u_wc (
    .clk,
    .wr_en  (c_wr_en),
    .wr_addr(c_base + CW'(lfill)),
    .wr_data(p_rsp_data),
    .rd_en  (c_rd_en),
    .rd_addr(c_base + CW'(lreq)),
    .rd_data(c_rd_data)
  );

  logic              w_load_valid;
  logic [N*8-1:0]    w_load_word;
  assign w_load_valid = (lst == L_REQ) && (from_cache ? c_rv : p_rsp_valid);
  assign w_load_word  = from_cache ? c_rd_data : p_rsp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lst <= L_IDLE; lk <= '0; lg <= '0; lreq <= '0; lfill <= '0;
      shadow_full <= 1'b0; c_rv <= 1'b0; bias <= '0;
    end else begin
      c_rv <= c_rd_en;
      if (w_swap) shadow_full <= 1'b0;
      if (launch) begin
        lst <= L_BIAS; lk <= '0; lg <= '0; lreq <= '0; lfill <= '0;
      end else unique case (lst)
        L_IDLE: ;
        L_BIAS: begin
          if (lbus_fire) lreq <= lreq + 1'b1;
          if (p_rsp_valid) begin
            for (int i = 0; i < int'(WORD_W / 32); i++)
              bias[int'(lfill) * (WORD_W / 32) + i] <= p_rsp_data[32*i +: 32];
            lfill <= lfill + 1'b1;
            if (lfill == (MW+1)'(BIAS_W - 1)) begin
              lst <= L_REQ; lreq <= '0; lfill <= '0;
            end
          end
        end
        L_REQ: begin
          if (lbus_fire || c_rd_en) lreq <= lreq + 1'b1;
          if (w_load_valid) begin
            lfill <= lfill + 1'b1;
            if (lfill == (MW+1)'(M - 1)) begin
              shadow_full <= 1'b1;
              lst <= L_WAIT;
            end
          end
        end
        L_WAIT: if (!shadow_full || w_swap) begin
          lreq <= '0; lfill <= '0;
          if (lk != job.nk - 1) begin
            lk <= lk + 1'b1; lst <= L_REQ;
          end else if (lg != job.ng - 1) begin
            lk <= '0; lg <= lg + 1'b1; lst <= L_REQ;
          end else begin
            lst <= L_DONE;
          end
        end
        L_DONE: if (job_end) lst <= L_IDLE;
        default: lst <= L_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- issuer
  logic        armed, issuing;
  logic [15:0] ck, cg;
  logic [IW-1:0] cp;
  logic        cph;
  logic        op_last, op_clear, op_fire, chunk_end, all_issued;
  logic [OCW-1:0] credits;
  logic        credit_ret;

  assign op_clear  = (ck == 16'd0) && !cph;
  assign op_last   = (ck == job.nk - 1) && (cph || !job.in16);
  assign chunk_end = (cp == IW'(job.npix - 1)) && (cph || !job.in16);
  assign vec_ready = issuing && armed && (!op_last || credits != '0);
  assign op_fire   = vec_valid && vec_ready;
  assign w_swap    = issuing && shadow_full &&
                     (!armed || (op_fire && chunk_end &&
                                 !((ck == job.nk - 1) && (cg == job.ng - 1))));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issuing <= 1'b0; armed <= 1'b0; ck <= '0; cg <= '0; cp <= '0; cph <= 1'b0;
      all_issued <= 1'b0;
    end else begin
      if (launch) begin
        issuing <= 1'b1; armed <= 1'b0; ck <= '0; cg <= '0; cp <= '0; cph <= 1'b0;
        all_issued <= 1'b0;
      end else begin
        if (w_swap && !armed) armed <= 1'b1;
        if (op_fire) begin
          if (job.in16 && !cph) cph <= 1'b1;
          else begin
            cph <= 1'b0;
            if (!chunk_end) cp <= cp + 1'b1;
            else begin
              cp <= '0;
              armed <= w_swap;
              if (ck != job.nk - 1) ck <= ck + 1'b1;
              else begin
                ck <= '0;
                if (cg != job.ng - 1) cg <= cg + 1'b1;
                else begin
                  issuing    <= 1'b0;
                  all_issued <= 1'b1;
                end
              end
            end
          end
        end
      end
    end
  end

  // ---------------------------------------------------------------- dot products
  logic                   res_valid;
  logic [IW-1:0]          res_idx;
  logic [M-1:0][31:0]     res_data;

  dot_product_engine #(.N(N), .M(M), .A(A), .ACC_W(32)) u_dpe (
    .clk, .rst_n,
    .op_valid     (op_fire),
    .op_a         (vec_data),
    .op_a_unsigned(vec_uns),
    .op_a_shift8  (vec_sh8),
    .op_idx       (cp),
    .op_clear     (op_clear),
    .op_last      (op_last),
    .w_load_valid (w_load_valid),
    .w_load_unit  (MW'(lfill)),
    .w_load_data  (w_load_word),
    .w_swap       (w_swap),
    .res_valid    (res_valid),
    .res_idx      (res_idx),
    .res_data     (res_data)
  );

  // ---------------------------------------------------------------- activation
  act_cfg_t          acfg;
  logic              act_valid, act_absorbed;
  logic [M-1:0][15:0] act_data;

  assign acfg = '{mult: job.mult, shift: job.shift, zp: job.zp, cmin: job.cmin,
                  cmax: job.cmax, lut_en: job.lut_en, out16: job.out16,
                  pool_max: job.pool_max, pool: job.pool};

  activation_unit #(.M(M), .ACC_W(32)) u_act (
    .clk, .rst_n,
    .cfg      (acfg),
    .bias     (bias),
    .clear    (launch),
    .lut_we   (cfg_we && cfg_addr[8]),
    .lut_addr (cfg_addr[7:0]),
    .lut_wdata(cfg_wdata[7:0]),
    .in_valid (res_valid),
    .in_data  (res_data),
    .out_valid(act_valid),
    .out_data (act_data),
    .absorbed (act_absorbed)
  );

  // ---------------------------------------------------------------- output queue and writer
  logic [M-1:0][15:0] oq [OUT_DEPTH];
  logic [$clog2(OUT_DEPTH)-1:0] oq_wp, oq_rp;
  logic [OCW-1:0]     oq_cnt;
  logic               oq_pop, wr_half, launch_q;
  logic [15:0]        rows_written, rows_total;
  logic [ADDR_W-1:0]  o_addr;
  logic [M-1:0][7:0]  row8;

  always_comb
    for (int m = 0; m < int'(M); m++) row8[m] = oq[oq_rp][m][7:0];

  assign rows_total  = 16'(32'(job.ng) * 32'(job.npix) / 32'((job.pool == 3'd0) ? 3'd1 : job.pool));
  assign r_req_valid = (oq_cnt != '0);
  assign r_req_addr  = o_addr + ADDR_W'(wr_half);
  assign r_req_wdata = !job.out16 ? WORD_W'(row8)
                     : (wr_half ? WORD_W'(oq[oq_rp][M-1:M/2]) : WORD_W'(oq[oq_rp][M/2-1:0]));
  assign oq_pop      = r_req_valid && r_req_ready && (!job.out16 || wr_half);
  assign credit_ret  = oq_pop || act_absorbed;
  assign job_end     = busy && all_issued && (lst == L_DONE) && !de_busy &&
                       (rows_written == rows_total) && !launch_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) launch_q <= 1'b0;
    else        launch_q <= launch;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oq_wp <= '0; oq_rp <= '0; oq_cnt <= '0; wr_half <= 1'b0;
      rows_written <= '0; o_addr <= '0; credits <= OCW'(OUT_DEPTH);
    end else begin
      if (act_valid) oq_wp <= oq_wp + 1'b1;
      oq_cnt  <= oq_cnt + OCW'(act_valid) - OCW'(oq_pop);
      credits <= credits - OCW'(op_fire && op_last) + OCW'(credit_ret);
      if (r_req_valid && r_req_ready) begin
        if (job.out16 && !wr_half) wr_half <= 1'b1;
        else begin
          wr_half      <= 1'b0;
          oq_rp        <= oq_rp + 1'b1;
          rows_written <= rows_written + 1'b1;
          o_addr       <= o_addr + job.o_str;
        end
      end
      if (launch) begin
        rows_written <= '0;
        o_addr       <= job_sel.o_base;
      end
    end
  end

  always_ff @(posedge clk)
    if (act_valid) oq[oq_wp] <= act_data;

  // ---------------------------------------------------------------- checks
  // The issuer never takes an operation without output space for its row.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (op_fire && op_last) |-> (credits != '0));
  // A 16-bit data job receives low and high halves in order.
  assert property (@(posedge clk) disable iff (!rst_n)
                   op_fire |-> (vec_sh8 == (job.in16 && cph)));
endmodule
