// tb_gemm_ctrl: self-checking test of the GeMM loop controller.
//
// For 30 random bound sets (K1, N1, M1 in 1..5) it runs the controller twice:
// once with inputs always valid and the output always ready, where it checks
// the rate (exactly K1*N1*M1 busy cycles with one step each, one C' tile
// every K1 steps), and once with random input valids and random output
// ready, where it checks that every step has both inputs valid, that the
// accumulator reset (first) and the last-step marker follow the k1 loop, that
// no finished tile is overwritten and that exactly N1*M1 tiles come out.
module tb_gemm_ctrl;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [15:0] k1, n1, m1;
  logic av = 0, bv = 0, cr = 0;
  logic ar, br, cv, en, first, last, busy;
  int checks = 0, failures = 0;

  gemm_ctrl #(.CNT_W(16)) dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .k1_i(k1), .n1_i(n1), .m1_i(m1),
    .a_valid_i(av), .a_ready_o(ar), .b_valid_i(bv), .b_ready_o(br), .c_valid_o(cv), .c_ready_i(cr),
    .en_o(en), .first_o(first), .last_o(last), .busy_o(busy));

  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic run(input bit full_rate);
    int steps, tiles, kpos, cycles;
    steps = 0; tiles = 0; kpos = 0; cycles = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (busy) begin
      av = full_rate ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      bv = full_rate ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      cr = full_rate ? 1'b1 : 1'($urandom_range(0, 3) == 0);
      #1;
      if (en) begin
        chk(av && bv && ar && br, "step without valid inputs");
        chk(first == (kpos == 0), "accumulator reset on k1 == 0");
        chk(last == (kpos == k1 - 1), "last marker on k1 == K1-1");
        if (last) chk(!cv || cr, "finished tile overwritten");
        steps++;
        kpos = (kpos == k1 - 1) ? 0 : kpos + 1;
      end else chk(!ar && !br, "ready without step");
      if (cv && cr) tiles++;
      cycles++;
      @(negedge clk);
    end
    chk(steps == k1 * n1 * m1, $sformatf("step count %0d", steps));
    chk(tiles == n1 * m1, $sformatf("tile count %0d", tiles));
    // at full rate the last tile is handed over in the cycle after the last step
    if (full_rate) chk(cycles == k1 * n1 * m1 + 1, $sformatf("full-rate cycles %0d for %0d steps", cycles, steps));
  endtask

  initial begin
    k1 = 1; n1 = 1; m1 = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      k1 = 16'($urandom_range(1, 5)); n1 = 16'($urandom_range(1, 5)); m1 = 16'($urandom_range(1, 5));
      run(1'b1);
      run(1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
