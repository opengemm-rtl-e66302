// spm: the tightly coupled multi-banked scratchpad memory.
//
// NBANK single-port banks of DEPTH x WIDTH bits behind the crossbar
// (mem_xbar), which interleaves words over the banks and arbitrates bank
// conflicts between the streamer ports (the first NHIGH ports, the operand
// reads, before the others), with the wide DMA port on top.
// With the defaults: 32 banks x 1056 words x 8 bytes = 270,336 bytes.
//
// Interface and timing are those of mem_xbar: grant in the request cycle,
// read data one cycle later. Word addresses; rows beyond DEPTH are not
// stored and read back stale data.
module spm #(
  parameter int unsigned NMASTER   = 48,
  parameter int unsigned NHIGH     = 16,
  parameter int unsigned NBANK     = 32,
  parameter int unsigned DEPTH     = 1056,
  parameter int unsigned WIDTH     = 64,
  parameter int unsigned DMA_WORDS = 8,
  parameter int unsigned MAW       = 29
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic [NMASTER-1:0]              m_req_i,
  input  logic [NMASTER-1:0]              m_we_i,
  input  logic [NMASTER-1:0][MAW-1:0]     m_addr_i,
  input  logic [NMASTER-1:0][WIDTH-1:0]   m_wdata_i,
  output logic [NMASTER-1:0]              m_gnt_o,
  output logic [NMASTER-1:0]              m_rvalid_o,
  output logic [NMASTER-1:0][WIDTH-1:0]   m_rdata_o,
  input  logic                            dma_req_i,
  input  logic                            dma_we_i,
  input  logic [MAW-1:0]                  dma_addr_i,
  input  logic [DMA_WORDS*WIDTH-1:0]      dma_wdata_i,
  output logic                            dma_rvalid_o,
  output logic [DMA_WORDS*WIDTH-1:0]      dma_rdata_o
);

  localparam int unsigned RAW = $clog2(DEPTH);

  logic [NBANK-1:0]              bank_req, bank_we;
  logic [NBANK-1:0][RAW-1:0]     bank_addr;
  logic [NBANK-1:0][WIDTH-1:0]   bank_wdata, bank_rdata;

  mem_xbar #(.NMASTER(NMASTER), .NHIGH(NHIGH), .NBANK(NBANK), .DEPTH(DEPTH), .WIDTH(WIDTH),
             .DMA_WORDS(DMA_WORDS), .MAW(MAW)) u_xbar (
    .clk_i, .rst_ni,
    .m_req_i, .m_we_i, .m_addr_i, .m_wdata_i, .m_gnt_o, .m_rvalid_o, .m_rdata_o,
    .dma_req_i, .dma_we_i, .dma_addr_i, .dma_wdata_i, .dma_rvalid_o, .dma_rdata_o,
    .bank_req_o (bank_req), .bank_we_o (bank_we), .bank_addr_o (bank_addr),
    .bank_wdata_o (bank_wdata), .bank_rdata_i (bank_rdata)
  );

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    spm_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) u_bank (
      .clk_i,
      .req_i (bank_req[b]), .we_i (bank_we[b]), .addr_i (bank_addr[b]),
      .wdata_i (bank_wdata[b]), .rdata_o (bank_rdata[b])
    );
  end

endmodule
