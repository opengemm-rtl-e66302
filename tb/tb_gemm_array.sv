// tb_gemm_array: self-checking test of the 8 x 8 x 8 DotProd array.
//
// Feeds 40 random output tiles, each accumulated over 1..4 steps of random
// A' (8x8) and B' (8x8, column-packed) int8 tiles, and compares all 64 int32
// results with a matrix product computed here, one cycle after the last step.
module tb_gemm_array;
  localparam int MU = 8, NU = 8, KU = 8, PA = 8, PB = 8, PC = 32;
  logic clk = 0, rst_n = 0;
  logic [MU*KU*PA-1:0] a; logic [NU*KU*PB-1:0] b;
  logic en = 0, first = 0, last = 0;
  logic [MU*NU*PC-1:0] c;
  int checks = 0, failures = 0;
  int signed ref_c [MU][NU];

  gemm_array #(.MU(MU), .NU(NU), .KU(KU), .PA(PA), .PB(PB), .PC(PC)) dut (.clk_i(clk), .rst_ni(rst_n),
    .a_i(a), .b_i(b), .en_i(en), .first_i(first), .last_i(last), .c_o(c));

  always #5 clk = ~clk;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      int n;
      n = $urandom_range(1, 4);
      foreach (ref_c[m, j]) ref_c[m][j] = 0;
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        for (int i = 0; i < MU*KU*PA/32; i++) a[i*32 +: 32] = $urandom;
        for (int i = 0; i < NU*KU*PB/32; i++) b[i*32 +: 32] = $urandom;
        for (int m = 0; m < MU; m++) for (int j = 0; j < NU; j++) for (int k = 0; k < KU; k++)
          ref_c[m][j] += $signed(a[(m*KU+k)*PA +: PA]) * $signed(b[(j*KU+k)*PB +: PB]);
        en = 1; first = (t == 0); last = (t == n - 1);
      end
      @(negedge clk); en = 0;
      for (int m = 0; m < MU; m++) for (int j = 0; j < NU; j++) begin
        checks++;
        if ($signed(c[(m*NU+j)*PC +: PC]) != ref_c[m][j]) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d C(%0d,%0d) got %0d exp %0d", s, m, j, $signed(c[(m*NU+j)*PC +: PC]), ref_c[m][j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
