// mem_xbar: crossbar between the streamer ports, the DMA port and the banks
// of the scratchpad.
//
// Memory words are interleaved over the banks: a word address w lives in
// bank (w mod NBANK) at row (w div NBANK), so consecutive words fall in
// consecutive banks. Every master port presents a word request; for each bank
// the crossbar grants one request per cycle. The DMA port (DMA_WORDS
// consecutive words, aligned to DMA_WORDS) has fixed priority. Next come the
// first NHIGH master ports (the operand read ports): when any of them targets
// a bank, only they compete for it. The remaining ports (the result write
// ports) get the banks the read ports leave free. Within a class, ports are
// served round-robin. A master that is not granted (bank conflict) keeps its
// request up and retries. Giving the reads priority lets a wide result
// write-back proceed in the banks the operand streams do not use, instead of
// stalling the operand streams.
//
// Timing: mem_gnt_o is combinational in the request cycle; read data is
// returned with m_rvalid_o one cycle after the grant. The DMA port is always
// granted in the request cycle; its read data follows one cycle later.
//
// The crossbar itself is in the paper; the interleaving, the arbitration
// policy (DMA first, then read ports, then write ports) are this design's
// choices.
module mem_xbar #(
  parameter int unsigned NMASTER   = 48,
  parameter int unsigned NHIGH     = 16,
  parameter int unsigned NBANK     = 32,
  parameter int unsigned DEPTH     = 1056,
  parameter int unsigned WIDTH     = 64,
  parameter int unsigned DMA_WORDS = 8,
  parameter int unsigned MAW       = 29,
  localparam int unsigned RAW = $clog2(DEPTH),
  localparam int unsigned BW  = (NBANK > 1) ? $clog2(NBANK) : 1,
  localparam int unsigned MW  = (NMASTER > 1) ? $clog2(NMASTER) : 1
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // streamer ports
  input  logic [NMASTER-1:0]              m_req_i,
  input  logic [NMASTER-1:0]              m_we_i,
  input  logic [NMASTER-1:0][MAW-1:0]     m_addr_i,
  input  logic [NMASTER-1:0][WIDTH-1:0]   m_wdata_i,
  output logic [NMASTER-1:0]              m_gnt_o,
  output logic [NMASTER-1:0]              m_rvalid_o,
  output logic [NMASTER-1:0][WIDTH-1:0]   m_rdata_o,
  // DMA port
  input  logic                            dma_req_i,
  input  logic                            dma_we_i,
  input  logic [MAW-1:0]                  dma_addr_i,
  input  logic [DMA_WORDS*WIDTH-1:0]      dma_wdata_i,
  output logic                            dma_rvalid_o,
  output logic [DMA_WORDS*WIDTH-1:0]      dma_rdata_o,
  // bank side
  output logic [NBANK-1:0]                bank_req_o,
  output logic [NBANK-1:0]                bank_we_o,
  output logic [NBANK-1:0][RAW-1:0]       bank_addr_o,
  output logic [NBANK-1:0][WIDTH-1:0]     bank_wdata_o,
  input  logic [NBANK-1:0][WIDTH-1:0]     bank_rdata_i
);

  // bank and row of each master request
  logic [NMASTER-1:0][BW-1:0]  m_bank;
  logic [NMASTER-1:0][RAW-1:0] m_row;
  for (genvar m = 0; m < NMASTER; m++) begin : g_dec
    assign m_bank[m] = BW'(m_addr_i[m] % MAW'(NBANK));
    assign m_row[m]  = RAW'(m_addr_i[m] / MAW'(NBANK));
  end

  // DMA words per bank
  logic [NBANK-1:0]                dma_sel;
  logic [NBANK-1:0][RAW-1:0]       dma_row;
  logic [NBANK-1:0][WIDTH-1:0]     dma_wd;
  always_comb begin
    logic [MAW-1:0] w;
    logic [BW-1:0]  wb;
    dma_sel = '0;
    dma_row = '0;
    dma_wd  = '0;
    for (int i = 0; i < DMA_WORDS; i++) begin
      w  = dma_addr_i + MAW'(i);
      wb = BW'(w % MAW'(NBANK));
      if (dma_req_i) begin
        dma_sel[wb] = 1'b1;
        dma_row[wb] = RAW'(w / MAW'(NBANK));
        dma_wd[wb]  = dma_wdata_i[i*WIDTH +: WIDTH];
      end
    end
  end

  // per-bank arbitration
  logic [NBANK-1:0][NMASTER-1:0] breq, bsel, bgnt;
  localparam logic [NMASTER-1:0] HIGH_MASK = NMASTER'((NMASTER+1)'(1) << NHIGH) - 1'b1;
  logic [NBANK-1:0][MW-1:0]      bidx;
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    for (genvar m = 0; m < NMASTER; m++) begin : g_req
      assign breq[b][m] = m_req_i[m] && (m_bank[m] == BW'(b));
    end
    // priority class: read ports first, write ports only on banks they leave free
    assign bsel[b] = ((breq[b] & HIGH_MASK) != '0) ? (breq[b] & HIGH_MASK) : breq[b];
    rr_arbiter #(.N(NMASTER)) u_arb (
      .clk_i, .rst_ni, .en_i (!dma_sel[b]), .req_i (bsel[b]), .gnt_o (bgnt[b]), .idx_o (bidx[b])
    );
    always_comb begin
      if (dma_sel[b]) begin
        bank_req_o[b]   = 1'b1;
        bank_we_o[b]    = dma_we_i;
        bank_addr_o[b]  = dma_row[b];
        bank_wdata_o[b] = dma_wd[b];
      end else begin
        bank_req_o[b]   = (breq[b] != '0);
        bank_we_o[b]    = m_we_i[bidx[b]];
        bank_addr_o[b]  = m_row[bidx[b]];
        bank_wdata_o[b] = m_wdata_i[bidx[b]];
      end
    end
  end

  always_comb begin
    m_gnt_o = '0;
    for (int b = 0; b < NBANK; b++) m_gnt_o = m_gnt_o | bgnt[b];
  end

  // read response routing, one cycle after the grant
  logic [NMASTER-1:0]          rvalid_q;
  logic [NMASTER-1:0][BW-1:0]  rbank_q;
  logic                        dma_rvalid_q;
  logic [MAW-1:0]              dma_addr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q     <= '0;
      rbank_q      <= '0;
      dma_rvalid_q <= 1'b0;
      dma_addr_q   <= '0;
    end else begin
      rvalid_q     <= m_gnt_o & ~m_we_i;
      rbank_q      <= m_bank;
      dma_rvalid_q <= dma_req_i && !dma_we_i;
      dma_addr_q   <= dma_addr_i;
    end
  end

  for (genvar m = 0; m < NMASTER; m++) begin : g_rsp
    assign m_rvalid_o[m] = rvalid_q[m];
    assign m_rdata_o[m]  = bank_rdata_i[rbank_q[m]];
  end

  always_comb begin
    logic [MAW-1:0] w;
    for (int i = 0; i < DMA_WORDS; i++) begin
      w = dma_addr_q + MAW'(i);
      dma_rdata_o[i*WIDTH +: WIDTH] = bank_rdata_i[BW'(w % MAW'(NBANK))];
    end
  end
  assign dma_rvalid_o = dma_rvalid_q;

  a_dma_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni)
    dma_req_i |-> (dma_addr_i % MAW'(DMA_WORDS)) == '0);

endmodule
