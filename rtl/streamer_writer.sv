// streamer_writer: output data streamer (streamer-out for matrix C).
//
// Finished C' tiles from the GeMM core are taken into a DEPTH-entry output
// buffer. The oldest buffered tile is written to the scratchpad through
// NPORTS 64-bit write ports at the addresses of the streamer's AGU; each port
// is granted on its own and a tile leaves the buffer once all its words are
// written. Because the buffer takes a new tile while older ones are written,
// the core keeps computing during write-back and only stalls when all DEPTH
// buffers are occupied.
//
// Interface: cfg_i is sampled on start_i; tile stream from the core
// (tile_valid_i/tile_ready_o/tile_data_i, word p in bits [p*PWORD +: PWORD]);
// write ports mem_req_o/mem_addr_o (word address)/mem_wdata_o/mem_gnt_i.
// busy_o is high while tiles are buffered or addresses remain.
// Output buffering follows the paper; per-port grants and the word order are
// this design's choices.
module streamer_writer
  import opengemm_pkg::*;
#(
  parameter int unsigned NPORTS = 32,
  parameter int unsigned PWORD  = 64,
  parameter int unsigned DEPTH  = 3,
  parameter int unsigned MAW    = OG_AW - 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  stream_cfg_t                   cfg_i,
  input  logic                          start_i,
  output logic                          busy_o,
  // tile stream from the GeMM core
  input  logic                          tile_valid_i,
  output logic                          tile_ready_o,
  input  logic [NPORTS*PWORD-1:0]       tile_data_i,
  // scratchpad write ports
  output logic [NPORTS-1:0]             mem_req_o,
  output logic [NPORTS-1:0][MAW-1:0]    mem_addr_o,
  output logic [NPORTS-1:0][PWORD-1:0]  mem_wdata_o,
  input  logic [NPORTS-1:0]             mem_gnt_i
);

  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic                           agu_valid;
  logic [NPORTS-1:0][OG_AW-1:0]   agu_addr;
  logic [NPORTS-1:0]              gdone_q;
  logic [NPORTS*PWORD-1:0]        head;
  logic                           fifo_empty, fifo_full, active, written;
  logic [CW-1:0]                  fifo_cnt;   // occupancy, observed by the testbenches

  stream_fifo #(.DEPTH(DEPTH), .WIDTH(NPORTS*PWORD)) u_buf (
    .clk_i, .rst_ni,
    .push_i (tile_valid_i && tile_ready_o), .wdata_i (tile_data_i),
    .pop_i (written), .rdata_o (head),
    .full_o (fifo_full), .empty_o (fifo_empty), .count_o (fifo_cnt)
  );

  // a tile is taken when a buffer is free or one is written back in this cycle
  assign tile_ready_o = !fifo_full || written;

  agu #(.NPORTS(NPORTS)) u_agu (
    .clk_i, .rst_ni, .cfg_i, .start_i,
    .next_i (written), .valid_o (agu_valid), .addr_o (agu_addr)
  );

  assign active = agu_valid && !fifo_empty;

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    assign mem_req_o[p]   = active && !gdone_q[p];
    assign mem_addr_o[p]  = MAW'(agu_addr[p] >> 3);
    assign mem_wdata_o[p] = head[p*PWORD +: PWORD];
  end

  assign written = active && ((gdone_q | (mem_req_o & mem_gnt_i)) == '1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) gdone_q <= '0;
    else if (written) gdone_q <= '0;
    else gdone_q <= gdone_q | (mem_req_o & mem_gnt_i);
  end

  assign busy_o = agu_valid || !fifo_empty;

endmodule
