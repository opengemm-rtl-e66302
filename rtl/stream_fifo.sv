// stream_fifo: circular buffer used as the pre-fetch buffer of the input
// streamers and as the output buffer of the output streamer.
//
// DEPTH entries of WIDTH bits are filled and drained in round-robin order
// (write and read pointers wrap around), so a producer can keep filling
// entries while a consumer empties older ones. The head entry is visible on
// rdata_o whenever empty_o is low (first-word fall-through), and a push and a
// pop may happen in the same cycle, also when the buffer is full.
//
// Interface: push_i/wdata_i (ignored when full and not popping), pop_i
// (ignored when empty), count_o = number of valid entries.
// The depth is the paper's design-time buffer depth; the fall-through read
// and the push-while-full rule are this design's choices.
module stream_fifo #(
  parameter int unsigned DEPTH = 3,
  parameter int unsigned WIDTH = 512,
  localparam int unsigned CW = $clog2(DEPTH + 1),
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             push_i,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             pop_i,
  output logic [WIDTH-1:0] rdata_o,
  output logic             full_o,
  output logic             empty_o,
  output logic [CW-1:0]    count_o
);

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PW-1:0]    wptr_q, rptr_q;
  logic [CW-1:0]    cnt_q;
  logic             do_push, do_pop;

  assign empty_o = (cnt_q == '0);
  assign full_o  = (cnt_q == CW'(DEPTH));
  assign count_o = cnt_q;
  assign rdata_o = mem_q[rptr_q];

  assign do_pop  = pop_i && !empty_o;
  assign do_push = push_i && (!full_o || do_pop);

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (do_push) wptr_q <= inc(wptr_q);
      if (do_pop)  rptr_q <= inc(rptr_q);
      if (do_push && !do_pop)      cnt_q <= cnt_q + 1'b1;
      else if (do_pop && !do_push) cnt_q <= cnt_q - 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem_q[wptr_q] <= wdata_i;
  end

  a_no_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= CW'(DEPTH));

endmodule
