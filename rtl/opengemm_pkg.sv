// opengemm_pkg: shared constants and configuration types of the OpenGeMM
// accelerator cluster.
//
// The numeric defaults are the case-study instance: an 8x8x8 GeMM array with
// int8 operands and int32 results, 3-deep streamer buffers, and a 32-bank
// scratchpad of 1056 x 64-bit words per bank. The register layout of the
// configuration structs (base address, three loop bounds, three temporal
// strides, one spatial stride per streamer) is this design's own choice.
package opengemm_pkg;

  // GeMM core (spatial unrolling and precisions)
  localparam int unsigned OG_MU = 8;
  localparam int unsigned OG_NU = 8;
  localparam int unsigned OG_KU = 8;
  localparam int unsigned OG_PA = 8;
  localparam int unsigned OG_PB = 8;
  localparam int unsigned OG_PC = 32;

  // Memory system
  localparam int unsigned OG_DSTREAM = 3;     // pre-fetch / output buffer depth
  localparam int unsigned OG_RMEM    = 16;    // read ports (8 for A, 8 for B)
  localparam int unsigned OG_WMEM    = 32;    // write ports (C)
  localparam int unsigned OG_PWORD   = 64;    // bits per memory port
  localparam int unsigned OG_NBANK   = 32;
  localparam int unsigned OG_DMEM    = 1056;  // words per bank
  localparam int unsigned OG_DMA_WORDS = 8;   // 512-bit DMA port

  // Loop and address widths
  localparam int unsigned OG_CNT_W  = 16;
  localparam int unsigned OG_AW     = 32;     // byte address width of the streamers
  localparam int unsigned OG_NLOOPS = 3;      // temporal loops per streamer

  // Configuration of one data streamer
  typedef struct packed {
    logic [OG_AW-1:0]                 base;     // byte address of the first tile
    logic [OG_NLOOPS-1:0][OG_CNT_W-1:0]  bound;    // iterations per loop, [0] innermost
    logic [OG_NLOOPS-1:0][OG_AW-1:0]     tstride;  // byte stride per temporal loop
    logic [OG_AW-1:0]                 sstride;  // byte stride between parallel ports
  } stream_cfg_t;

  // Configuration of the GeMM core: temporal loop bounds (in tiles)
  typedef struct packed {
    logic [OG_CNT_W-1:0] m1;   // M / MU
    logic [OG_CNT_W-1:0] n1;   // N / NU
    logic [OG_CNT_W-1:0] k1;   // K / KU
  } gemm_cfg_t;

  // CSR register map (32-bit registers, word index)
  localparam int unsigned OG_CSR_K1      = 0;
  localparam int unsigned OG_CSR_N1      = 1;
  localparam int unsigned OG_CSR_M1      = 2;
  localparam int unsigned OG_CSR_STREAM0 = 3;   // streamer s starts at 3 + 8*s
  localparam int unsigned OG_CSR_PER_STREAM = 8; // base, bound0..2, tstride0..2, sstride
  localparam int unsigned OG_CSR_LAUNCH  = 27;  // write: launch; read: {pending, busy}
  localparam int unsigned OG_CSR_BUSYCNT = 28;  // cycles with the accelerator busy
  localparam int unsigned OG_CSR_COMPCNT = 29;  // cycles in which the array computed
  localparam int unsigned OG_CSR_BOUNDS  = 30;  // K1, N1, M1 packed into one register
  localparam int unsigned OG_CSR_PACK_W  = 10;  // width of each packed bound
  localparam int unsigned OG_CSR_NREGS   = 32;
  localparam int unsigned OG_CSR_AW      = 5;

endpackage
