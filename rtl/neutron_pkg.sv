// neutron_pkg: constants and types shared by the NPU subsystem.
//
// The numbers follow the configuration of the NPU described for a flagship
// MPU: N = M = 16 (16-entry dot products, 16 parallel units per engine),
// A = 2M = 32 accumulators per unit, an 8 kB parameter cache per engine,
// four engines and three 128-bit buses per engine. The TCM size (1 MiB) is
// the SRAM of the evaluated product. Bank count, register map and job
// layout are choices of this design and are marked as such below.
package neutron_pkg;

  // Compute core geometry (paper: N = M = 16, A = 2M, W_C = 8 kB)
  localparam int unsigned N_LANES   = 16;            // entries per dot product
  localparam int unsigned M_UNITS   = 16;            // parallel dot-product units
  localparam int unsigned A_ACC     = 2 * M_UNITS;   // accumulators per unit
  localparam int unsigned WC_BYTES  = 8192;          // parameter cache size

  // Buses: 128-bit words (paper: three 128-bit buses per engine)
  localparam int unsigned WORD_W    = 128;
  localparam int unsigned WORD_B    = WORD_W / 8;
  localparam int unsigned ADDR_W    = 16;            // TCM word address (1 MiB / 16 B = 64 Ki words)

  // Subsystem (paper: four engines, 1 MiB SRAM). Banks: own choice.
  localparam int unsigned N_ENGINES = 4;
  localparam int unsigned N_BANKS   = 16;

  // Accumulator and adder-tree widths (paper: 24-bit tree inputs, 27-bit output)
  localparam int unsigned ACC_W     = 32;
  localparam int unsigned TREE_IN_W = 24;
  localparam int unsigned TREE_OUT_W= 27;

  // Configuration bus (own choice)
  localparam int unsigned CFG_AW    = 16;
  localparam int unsigned CFG_DW    = 32;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [ADDR_W-1:0] waddr_t;

  // One request on a TCM-side bus (word granularity)
  typedef struct packed {
    logic   valid;
    logic   we;
    waddr_t addr;
    word_t  wdata;
  } mem_req_t;

  // Read response, in request order
  typedef struct packed {
    logic  valid;
    word_t rdata;
  } mem_rsp_t;

  // Engine register map (word offsets inside an engine's 4 KiB window)
  typedef enum logic [7:0] {
    R_CTRL      = 8'd0,   // write bit0 = start; read: {pending, busy}
    R_NPIX      = 8'd1,   // pixels per group (1..A)
    R_NK        = 8'd2,   // reduction chunks of N entries
    R_NG        = 8'd3,   // pixel groups
    R_D_BASE    = 8'd4,   // data word base
    R_D_STR_PIX = 8'd5,   // data word stride between pixels
    R_D_STR_K   = 8'd6,   // data word stride between chunks
    R_D_STR_G   = 8'd7,   // data word stride between groups
    R_P_BASE    = 8'd8,   // parameter base: M/4 bias words, then NK*M weight words
    R_MODE      = 8'd9,   // [0] in16 [1] out16 [2] use_cache [3] lut_en [4] pool_max
    R_SCROLL    = 8'd10,  // byte offset 0..15 of the data window
    R_O_BASE    = 8'd11,  // output word base
    R_O_STR     = 8'd12,  // output word stride
    R_MULT      = 8'd13,  // rescale multiplier (signed 16 bit)
    R_SHIFT     = 8'd14,  // rescale right shift (0..31)
    R_ZP        = 8'd15,  // output zero point (signed 16 bit)
    R_CLAMP     = 8'd16,  // [15:0] min, [31:16] max (signed)
    R_POOL      = 8'd17,  // pooling window 1..4 (consecutive pixels)
    R_K_IN      = 8'd18,  // chunks per inner reduction loop (0: one loop of NK)
    R_D_STR_K2  = 8'd19,  // data word stride of the middle reduction loop
    R_K_MID     = 8'd20,  // middle reduction loop count (0: no outer loop)
    R_D_STR_K3  = 8'd21   // data word stride of the outer reduction loop
  } eng_reg_e;

  // Engine job descriptor
  typedef struct packed {
    logic [5:0]  npix;
    logic [15:0] nk;
    logic [15:0] ng;
    waddr_t      d_base;
    waddr_t      d_str_pix;
    waddr_t      d_str_k;
    waddr_t      d_str_g;
    logic [15:0] k_in;
    waddr_t      d_str_k2;
    logic [15:0] k_mid;
    waddr_t      d_str_k3;
    waddr_t      p_base;
    logic        in16;
    logic        out16;
    logic        use_cache;
    logic        lut_en;
    logic        pool_max;
    logic [3:0]  scroll;
    waddr_t      o_base;
    waddr_t      o_str;
    logic signed [15:0] mult;
    logic [4:0]  shift;
    logic signed [15:0] zp;
    logic signed [15:0] cmin;
    logic signed [15:0] cmax;
    logic [2:0]  pool;
  } job_t;

  // Activation unit settings (subset of job_t)
  typedef struct packed {
    logic signed [15:0] mult;
    logic [4:0]  shift;
    logic signed [15:0] zp;
    logic signed [15:0] cmin;
    logic signed [15:0] cmax;
    logic        lut_en;
    logic        out16;
    logic        pool_max;
    logic [2:0]  pool;
  } act_cfg_t;

endpackage
