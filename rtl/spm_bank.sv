// spm_bank: one bank of the multi-banked scratchpad memory.
//
// A single-port synchronous memory of DEPTH words of WIDTH bits: one read or
// one write per cycle. A read returns the word on rdata_o in the cycle after
// the request; a write updates the word at the clock edge. rdata_o holds its
// value until the next read. Written as an array so that synthesis can map it
// to an SRAM macro; the contents are not reset. Word size and depth are the
// paper's; the one-cycle read latency is this design's choice.
module spm_bank #(
  parameter int unsigned DEPTH = 1056,
  parameter int unsigned WIDTH = 64,
  localparam int unsigned RAW  = $clog2(DEPTH)
) (
  input  logic             clk_i,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [RAW-1:0]   addr_i,
  input  logic [WIDTH-1:0] wdata_i,
  output logic [WIDTH-1:0] rdata_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (req_i && (addr_i < RAW'(DEPTH))) begin
      if (we_i) mem[addr_i] <= wdata_i;
      else      rdata_o     <= mem[addr_i];
    end
  end

endmodule
