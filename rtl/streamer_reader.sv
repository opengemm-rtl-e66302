// streamer_reader: input data streamer (streamer-in for operand A or B).
//
// Its AGU yields, for every tile of the operand, one byte address for each of
// the NPORTS 64-bit read ports. The streamer requests all words of a tile on
// its ports at once; each port is granted by the scratchpad crossbar on its
// own (a port that loses a bank conflict keeps requesting), and the read data
// comes back one cycle after the grant. When all words of a tile are back the
// tile is written into the DEPTH-entry pre-fetch buffer, whose head is
// offered to the GeMM core on the tile stream.
//
// Pre-fetching: a new tile is requested whenever buffered tiles plus tiles in
// flight leave room in the buffer, so fetching starts right after launch and
// runs ahead of the core by up to DEPTH tiles.
//
// Interface: cfg_i is sampled on start_i. mem_req_o[p] / mem_addr_o[p] (word
// address = byte address / 8) / mem_gnt_i[p], mem_rvalid_i[p] / mem_rdata_i[p].
// Tile word p occupies bits [p*PWORD +: PWORD]. busy_o is high while any tile
// is still to be fetched or delivered. At full rate one tile per cycle.
// The pre-fetch behaviour follows the paper; per-port grants, the credit
// rule and the one-cycle read latency are this design's choices.
module streamer_reader
  import opengemm_pkg::*;
#(
  parameter int unsigned NPORTS = 8,
  parameter int unsigned PWORD  = 64,
  parameter int unsigned DEPTH  = 3,
  parameter int unsigned MAW    = OG_AW - 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  stream_cfg_t                   cfg_i,
  input  logic                          start_i,
  output logic                          busy_o,
  // scratchpad read ports
  output logic [NPORTS-1:0]             mem_req_o,
  output logic [NPORTS-1:0][MAW-1:0]    mem_addr_o,
  input  logic [NPORTS-1:0]             mem_gnt_i,
  input  logic [NPORTS-1:0]             mem_rvalid_i,
  input  logic [NPORTS-1:0][PWORD-1:0]  mem_rdata_i,
  // tile stream towards the GeMM core
  output logic                          tile_valid_o,
  input  logic                          tile_ready_i,
  output logic [NPORTS*PWORD-1:0]       tile_data_o
);

  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic                           agu_valid, agu_next;
  logic [NPORTS-1:0][OG_AW-1:0]   agu_addr;
  logic [NPORTS-1:0]              gdone_q;     // ports granted for the current tile
  logic [NPORTS-1:0]              rcv_q;       // words received for the tile in flight
  logic [NPORTS-1:0][PWORD-1:0]   stage_q;
  logic [NPORTS-1:0][PWORD-1:0]   tile_word;
  logic [CW-1:0]                  inflight_q;  // tiles fully requested, not yet buffered
  logic [CW-1:0]                  fifo_cnt;
  logic                           fifo_empty, fifo_full;
  logic                           credit, active, issued, push;

  agu #(.NPORTS(NPORTS)) u_agu (
    .clk_i, .rst_ni, .cfg_i, .start_i,
    .next_i (agu_next), .valid_o (agu_valid), .addr_o (agu_addr)
  );

  assign credit = (CW'(fifo_cnt + inflight_q) < CW'(DEPTH));
  assign active = agu_valid && ((gdone_q != '0) || credit);

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    assign mem_req_o[p]  = active && !gdone_q[p];
    assign mem_addr_o[p] = MAW'(agu_addr[p] >> 3);
    assign tile_word[p]  = mem_rvalid_i[p] ? mem_rdata_i[p] : stage_q[p];
  end

  assign issued   = active && ((gdone_q | (mem_req_o & mem_gnt_i)) == '1);
  assign agu_next = issued;
  assign push     = ((rcv_q | mem_rvalid_i) == '1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      gdone_q    <= '0;
      rcv_q      <= '0;
      inflight_q <= '0;
    end else begin
      if (issued) gdone_q <= '0;
      else        gdone_q <= gdone_q | (mem_req_o & mem_gnt_i);
      if (push)   rcv_q <= '0;
      else        rcv_q <= rcv_q | mem_rvalid_i;
      if (issued && !push)      inflight_q <= inflight_q + 1'b1;
      else if (push && !issued) inflight_q <= inflight_q - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    for (int p = 0; p < NPORTS; p++) if (mem_rvalid_i[p]) stage_q[p] <= mem_rdata_i[p];
  end

  stream_fifo #(.DEPTH(DEPTH), .WIDTH(NPORTS*PWORD)) u_buf (
    .clk_i, .rst_ni,
    .push_i (push), .wdata_i (tile_word),
    .pop_i (tile_ready_i), .rdata_o (tile_data_o),
    .full_o (fifo_full), .empty_o (fifo_empty), .count_o (fifo_cnt)
  );

  assign tile_valid_o = !fifo_empty;
  assign busy_o = agu_valid || (inflight_q != '0) || (rcv_q != '0) || !fifo_empty;

  a_push_room: assert property (@(posedge clk_i) disable iff (!rst_ni) push |-> !fifo_full || tile_ready_i);

endmodule
