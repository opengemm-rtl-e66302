// tb_stream_fifo: self-checking test of the circular pre-fetch/output buffer.
//
// 3000 cycles of random pushes and pops (with phases that mostly push and
// mostly pop, so that the buffer runs full and empty) against a queue model:
// checks the head data, the occupancy count and the full/empty flags every
// cycle, and that a push on a full buffer is refused unless a pop frees room
// in the same cycle.
module tb_stream_fifo;
  localparam int DEPTH = 3, WIDTH = 16;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, full, empty;
  logic [WIDTH-1:0] wd, rd;
  logic [1:0] cnt;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q [$];

  stream_fifo #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .wdata_i(wd),
    .pop_i(pop), .rdata_o(rd), .full_o(full), .empty_o(empty), .count_o(cnt));

  always #5 clk = ~clk;
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    wd = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int bias;
      bias = ((i / 50) % 2 == 0) ? 3 : 1;
      @(negedge clk);
      push = ($urandom_range(0, 3) < bias);
      pop  = ($urandom_range(0, 3) >= bias);
      wd = WIDTH'($urandom);
      #1;
      chk(int'(cnt) == q.size(), "count");
      chk(full == (q.size() == DEPTH), "full flag");
      chk(empty == (q.size() == 0), "empty flag");
      if (q.size() > 0) chk(rd == q[0], "head data");
      @(posedge clk);
      begin
        bit did_pop;
        did_pop = pop && q.size() > 0;
        if (did_pop) void'(q.pop_front());
        if (push && (q.size() < DEPTH)) q.push_back(wd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
