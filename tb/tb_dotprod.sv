// tb_dotprod: self-checking test of one DotProd unit.
//
// Runs 200 random accumulation sequences of 1..6 steps with random signed
// 8-bit operands (including the extreme values -128 and 127) and compares the
// result register with a sum computed here. It also checks that the result
// register keeps its value during the steps of the next sequence, that a
// cycle without en_i changes nothing, and that the result appears exactly one
// cycle after the last step.
module tb_dotprod;
  localparam int KU = 8, PA = 8, PB = 8, PC = 32;
  logic clk = 0, rst_n = 0;
  logic [KU*PA-1:0] a; logic [KU*PB-1:0] b;
  logic en = 0, first = 0, last = 0;
  logic [PC-1:0] c;
  int checks = 0, failures = 0;

  dotprod #(.KU(KU), .PA(PA), .PB(PB), .PC(PC)) dut (.clk_i(clk), .rst_ni(rst_n), .a_i(a), .b_i(b),
    .en_i(en), .first_i(first), .last_i(last), .c_o(c));

  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [7:0] rnd8();
    int r = $urandom_range(0, 9);
    if (r == 0) return 8'h80;
    if (r == 1) return 8'h7f;
    return 8'($urandom);
  endfunction

  task automatic check(input logic [PC-1:0] exp, input string what);
    checks++;
    if (c !== exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, $signed(c), $signed(exp)); end
  endtask

  initial begin
    logic [PC-1:0] prev;
    prev = 0;
    a = 0; b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 200; s++) begin
      int n;
      logic signed [PC-1:0] ref_sum;
      n = $urandom_range(1, 6);
      ref_sum = 0;
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        // an idle cycle in between must not disturb anything
        if ($urandom_range(0, 3) == 0) begin en = 0; @(negedge clk); end
        for (int k = 0; k < KU; k++) begin
          a[k*PA +: PA] = rnd8(); b[k*PB +: PB] = rnd8();
          ref_sum += PC'($signed(a[k*PA +: PA])) * PC'($signed(b[k*PB +: PB]));
        end
        en = 1; first = (t == 0); last = (t == n - 1);
        @(negedge clk);
        en = 0;
        if (t != n - 1) check(prev, "result held during accumulation");
      end
      check(ref_sum, "dot product sum");
      prev = ref_sum;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
