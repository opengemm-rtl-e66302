// opengemm_top: the OpenGeMM accelerator cluster (everything except the host
// core, its instruction cache, the DMA engine and the system bus).
//
// Dataflow: the host programs the accelerator through the CSR port of the
// CSR manager. A launch starts streamer A and streamer B, which fetch MU x KU
// and KU x NU int8 operand tiles through 8 scratchpad read ports each and
// pre-fetch them into their buffers; the GeMM core multiplies one A' and one
// B' tile per cycle into its MU x NU accumulators (output stationary, K loop
// innermost); every K1 steps a finished MU x NU tile of int32 results goes to
// streamer C, which buffers it and writes it back through 32 write ports.
// The scratchpad has NBANK word-interleaved banks behind a crossbar; its
// 512-bit DMA port is brought out for the (external) DMA engine.
//
// Memory layout expected by the core: an A' tile is 8 words, word m = row m
// of the tile (KU bytes); a B' tile is 8 words, word n = column n of the tile;
// a C' tile is 32 words, word p = elements 2p (bits 31:0) and 2p+1 of the
// tile in row-major order. Where the tiles lie is set by the streamer base
// addresses and strides.
//
// Interface: CSR port (see csr_manager), DMA port (see mem_xbar), busy_o.
// Fixed by the case-study instance: A and B tiles must match 8 x 64-bit
// ports and the C tile 32 x 64-bit ports, i.e. MU*KU*PA = NU*KU*PB = 512 and
// MU*NU*PC = 2048.
module opengemm_top
  import opengemm_pkg::*;
#(
  parameter int unsigned MU      = OG_MU,
  parameter int unsigned NU      = OG_NU,
  parameter int unsigned KU      = OG_KU,
  parameter int unsigned DSTREAM = OG_DSTREAM,
  parameter int unsigned NBANK   = OG_NBANK,
  parameter int unsigned DMEM    = OG_DMEM,
  localparam int unsigned PWORD  = OG_PWORD,
  localparam int unsigned NRD    = MU*KU*OG_PA / PWORD,   // read ports per input streamer
  localparam int unsigned NWR    = MU*NU*OG_PC / PWORD,   // write ports of streamer C
  localparam int unsigned NMST   = 2*NRD + NWR,
  localparam int unsigned MAW    = OG_AW - 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // host CSR port
  input  logic                          csr_req_valid_i,
  output logic                          csr_req_ready_o,
  input  logic [OG_CSR_AW-1:0]          csr_req_addr_i,
  input  logic                          csr_req_write_i,
  input  logic [31:0]                   csr_req_wdata_i,
  output logic                          csr_rsp_valid_o,
  output logic [31:0]                   csr_rsp_rdata_o,
  // DMA port into the scratchpad (word address, aligned to 8 words)
  input  logic                          dma_req_i,
  input  logic                          dma_we_i,
  input  logic [MAW-1:0]                dma_addr_i,
  input  logic [OG_DMA_WORDS*PWORD-1:0] dma_wdata_i,
  output logic                          dma_rvalid_o,
  output logic [OG_DMA_WORDS*PWORD-1:0] dma_rdata_o,
  output logic                          busy_o
);

  gemm_cfg_t   gemm_cfg;
  stream_cfg_t a_cfg, b_cfg, c_cfg;
  logic        start, compute;
  logic        core_busy, a_busy, b_busy, c_busy;

  logic                      a_valid, a_ready, b_valid, b_ready, c_valid, c_ready;
  logic [NRD*PWORD-1:0]      a_tile, b_tile;
  logic [NWR*PWORD-1:0]      c_tile;

  logic [NMST-1:0]             m_req, m_we, m_gnt, m_rvalid;
  logic [NMST-1:0][MAW-1:0]    m_addr;
  logic [NMST-1:0][PWORD-1:0]  m_wdata, m_rdata;

  assign busy_o = core_busy || a_busy || b_busy || c_busy;

  csr_manager u_csr (
    .clk_i, .rst_ni,
    .csr_req_valid_i, .csr_req_ready_o, .csr_req_addr_i, .csr_req_write_i, .csr_req_wdata_i,
    .csr_rsp_valid_o, .csr_rsp_rdata_o,
    .gemm_cfg_o (gemm_cfg), .a_cfg_o (a_cfg), .b_cfg_o (b_cfg), .c_cfg_o (c_cfg),
    .start_o (start), .busy_i (busy_o), .compute_i (compute)
  );

  // streamer A: masters 0 .. NRD-1
  streamer_reader #(.NPORTS(NRD), .PWORD(PWORD), .DEPTH(DSTREAM), .MAW(MAW)) u_stream_a (
    .clk_i, .rst_ni, .cfg_i (a_cfg), .start_i (start), .busy_o (a_busy),
    .mem_req_o (m_req[0 +: NRD]), .mem_addr_o (m_addr[0 +: NRD]),
    .mem_gnt_i (m_gnt[0 +: NRD]), .mem_rvalid_i (m_rvalid[0 +: NRD]), .mem_rdata_i (m_rdata[0 +: NRD]),
    .tile_valid_o (a_valid), .tile_ready_i (a_ready), .tile_data_o (a_tile)
  );

  // streamer B: masters NRD .. 2*NRD-1
  streamer_reader #(.NPORTS(NRD), .PWORD(PWORD), .DEPTH(DSTREAM), .MAW(MAW)) u_stream_b (
    .clk_i, .rst_ni, .cfg_i (b_cfg), .start_i (start), .busy_o (b_busy),
    .mem_req_o (m_req[NRD +: NRD]), .mem_addr_o (m_addr[NRD +: NRD]),
    .mem_gnt_i (m_gnt[NRD +: NRD]), .mem_rvalid_i (m_rvalid[NRD +: NRD]), .mem_rdata_i (m_rdata[NRD +: NRD]),
    .tile_valid_o (b_valid), .tile_ready_i (b_ready), .tile_data_o (b_tile)
  );

  assign m_we[0 +: 2*NRD]    = '0;
  assign m_wdata[0 +: 2*NRD] = '0;

  gemm_core #(.MU(MU), .NU(NU), .KU(KU), .PA(OG_PA), .PB(OG_PB), .PC(OG_PC)) u_core (
    .clk_i, .rst_ni, .cfg_i (gemm_cfg), .start_i (start),
    .a_valid_i (a_valid), .a_ready_o (a_ready), .a_data_i (a_tile),
    .b_valid_i (b_valid), .b_ready_o (b_ready), .b_data_i (b_tile),
    .c_valid_o (c_valid), .c_ready_i (c_ready), .c_data_o (c_tile),
    .busy_o (core_busy), .compute_o (compute)
  );

  // streamer C: masters 2*NRD .. 2*NRD+NWR-1
  streamer_writer #(.NPORTS(NWR), .PWORD(PWORD), .DEPTH(DSTREAM), .MAW(MAW)) u_stream_c (
    .clk_i, .rst_ni, .cfg_i (c_cfg), .start_i (start), .busy_o (c_busy),
    .tile_valid_i (c_valid), .tile_ready_o (c_ready), .tile_data_i (c_tile),
    .mem_req_o (m_req[2*NRD +: NWR]), .mem_addr_o (m_addr[2*NRD +: NWR]),
    .mem_wdata_o (m_wdata[2*NRD +: NWR]), .mem_gnt_i (m_gnt[2*NRD +: NWR])
  );
  assign m_we[2*NRD +: NWR] = '1;

  spm #(.NMASTER(NMST), .NHIGH(2*NRD), .NBANK(NBANK), .DEPTH(DMEM), .WIDTH(PWORD),
        .DMA_WORDS(OG_DMA_WORDS), .MAW(MAW)) u_spm (
    .clk_i, .rst_ni,
    .m_req_i (m_req), .m_we_i (m_we), .m_addr_i (m_addr), .m_wdata_i (m_wdata),
    .m_gnt_o (m_gnt), .m_rvalid_o (m_rvalid), .m_rdata_o (m_rdata),
    .dma_req_i, .dma_we_i, .dma_addr_i, .dma_wdata_i, .dma_rvalid_o, .dma_rdata_o
  );

endmodule
