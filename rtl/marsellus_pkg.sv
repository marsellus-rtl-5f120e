// marsellus_pkg: types and constants shared by the cluster blocks.
//
// The numbers follow the published description of the cluster: 16 cores,
// a 128 KiB TCDM in 32 word-interleaved 32-bit banks, an accelerator (RBE)
// with 9 Cores of 9 Blocks of 4 BinConvs, each BinConv 32 channels wide, and
// a 288-bit (9-word) accelerator memory port. The register map of the RBE,
// the job-descriptor fields and the bus handshakes are this design's own
// choices; they are described where they are used.
package marsellus_pkg;

  // ---------------- cluster geometry ----------------
  localparam int unsigned N_CORES      = 16;   // RISC-V cores in the cluster
  localparam int unsigned N_BANKS      = 32;   // TCDM banks
  localparam int unsigned BANK_WORDS   = 1024; // 32-bit words per bank (128 KiB / 32 / 4)
  localparam int unsigned N_DMA_PORTS  = 4;    // DMA ports into the TCDM, 32 bit each
  localparam int unsigned N_LIC_PORTS  = N_CORES + N_DMA_PORTS + 1; // + SoC port

  // ---------------- RBE geometry ----------------
  localparam int unsigned RBE_CORES    = 9;    // one output pixel each (3x3 output tile)
  localparam int unsigned RBE_BLOCKS   = 9;    // Blocks per Core
  localparam int unsigned RBE_BC       = 4;    // BinConvs per Block
  localparam int unsigned RBE_CH       = 32;   // channels per BinConv
  localparam int unsigned RBE_ACC_W    = 32;   // accumulator width
  localparam int unsigned RBE_PORT_W   = 9;    // words of the 288-bit memory port

  // A 32-bit target port of the TCDM (one word per request). Address is a
  // byte address; the interconnect uses bits [log2(N_BANKS)+1:2] as bank
  // index and the bits above as the row inside a bank.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [3:0]  be;
    logic [31:0] addr;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;     // request accepted this cycle
    logic        rvalid;  // read data valid (cycle after grant)
    logic [31:0] rdata;
  } tcdm_rsp_t;

  // Simple 32-bit register-access bus used for the peripheral interconnect.
  typedef struct packed {
    logic        req;
    logic        we;
    logic [7:0]  addr;    // byte offset inside the target
    logic [31:0] wdata;
  } periph_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } periph_rsp_t;

  // ---------------- Xpulpnn ----------------
  // Element size of a packed-SIMD operation (mnemonic suffixes h, b, n, c).
  typedef enum logic [1:0] {
    SIMD_H = 2'd0,  // 2 x 16 bit
    SIMD_B = 2'd1,  // 4 x 8 bit
    SIMD_N = 2'd2,  // 8 x 4 bit  (nibble)
    SIMD_C = 2'd3   // 16 x 2 bit (crumb)
  } simd_fmt_e;

  // Signedness of the two vector operands: u (both unsigned), us (first
  // unsigned, second signed), s (both signed).
  typedef enum logic [1:0] {
    SGN_U  = 2'd0,
    SGN_US = 2'd1,
    SGN_S  = 2'd2
  } simd_sign_e;

  // ---------------- RBE ----------------
  typedef enum logic {
    RBE_MODE_3X3 = 1'b0,
    RBE_MODE_1X1 = 1'b1
  } rbe_mode_e;

  // One job as held by the dual-context register file. Addresses are byte
  // addresses in the TCDM, strides are in bytes.
  typedef struct packed {
    rbe_mode_e   mode;
    logic [3:0]  wbits;        // W, 2..8
    logic [3:0]  ibits;        // I, 2..8
    logic [3:0]  obits;        // O, 2..8
    logic [4:0]  shift;        // S of Eq. 2
    logic        relu;         // clamp negative results to zero
    logic [7:0]  n_kout;       // number of 32-channel output tiles
    logic [7:0]  n_kin;        // number of 32-channel input tiles
    logic [7:0]  n_h;          // number of 3-row output tiles
    logic [7:0]  n_w;          // number of 3-column output tiles
    logic [31:0] x_base;
    logic [31:0] x_row_stride; // bytes between two input rows
    logic [31:0] x_pix_stride; // bytes between two input pixels
    logic [31:0] w_base;
    logic [31:0] nq_base;      // scale/bias pairs, one pair of words per output channel
    logic [31:0] y_base;
    logic [31:0] y_row_stride;
    logic [31:0] y_pix_stride;
  } rbe_job_t;

  // Register offsets of the RBE peripheral unit (byte addresses).
  localparam logic [7:0] RBE_REG_TRIGGER  = 8'h00; // write: enqueue the staged job
  localparam logic [7:0] RBE_REG_STATUS   = 8'h04; // read: {busy, queued count}
  localparam logic [7:0] RBE_REG_CFG      = 8'h08; // mode, W, I, O, S, relu
  localparam logic [7:0] RBE_REG_TILES    = 8'h0C; // n_kout, n_kin, n_h, n_w
  localparam logic [7:0] RBE_REG_XBASE    = 8'h10;
  localparam logic [7:0] RBE_REG_XROW     = 8'h14;
  localparam logic [7:0] RBE_REG_XPIX     = 8'h18;
  localparam logic [7:0] RBE_REG_WBASE    = 8'h1C;
  localparam logic [7:0] RBE_REG_NQBASE   = 8'h20;
  localparam logic [7:0] RBE_REG_YBASE    = 8'h24;
  localparam logic [7:0] RBE_REG_YROW     = 8'h28;
  localparam logic [7:0] RBE_REG_YPIX     = 8'h2C;

  // RBE_REG_CFG bit fields
  //   [0]     mode (0 = 3x3, 1 = 1x1)
  //   [7:4]   W     [11:8] I     [15:12] O
  //   [20:16] S     [24]   relu
  function automatic rbe_job_t rbe_cfg_apply(rbe_job_t j, logic [31:0] v);
    rbe_job_t r = j;
    r.mode  = rbe_mode_e'(v[0]);
    r.wbits = v[7:4];
    r.ibits = v[11:8];
    r.obits = v[15:12];
    r.shift = v[20:16];
    r.relu  = v[24];
    return r;
  endfunction

endpackage
