// tb_gemm_core: self-checking test of the GeMM core (controller + array).
//
// Builds random int8 matrices A (M x K) and B (K x N) with M, N in {8,16,24}
// and K in {8,...,40}, streams the A' and B' tiles in the order the core
// consumes them (m1, n1, k1 with k1 innermost), collects the C' tiles and
// compares them with C = A x B computed here. The first run per size has
// always-valid inputs and an always-ready output and checks the rate: the
// last tile leaves M1*N1*K1 + 1 cycles after start. The second run inserts
// random input bubbles and output back-pressure.
module tb_gemm_core;
  import opengemm_pkg::*;
  localparam int MU = 8, NU = 8, KU = 8;
  logic clk = 0, rst_n = 0;
  gemm_cfg_t cfg;
  logic start = 0;
  logic av = 0, bv = 0, cr = 0;
  logic ar, br, cv, busy, comp;
  logic [MU*KU*8-1:0] ad; logic [NU*KU*8-1:0] bd; logic [MU*NU*32-1:0] cd;
  int checks = 0, failures = 0;
  logic signed [7:0] A [64][64];
  logic signed [7:0] B [64][64];

  gemm_core dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .start_i(start),
    .a_valid_i(av), .a_ready_o(ar), .a_data_i(ad), .b_valid_i(bv), .b_ready_o(br), .b_data_i(bd),
    .c_valid_o(cv), .c_ready_i(cr), .c_data_o(cd), .busy_o(busy), .compute_o(comp));

  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int M1, input int N1, input int K1, input bit full_rate);
    int ia, ib, ic, cycles;
    int step_m [$]; int step_n [$];
    ia = 0; ib = 0; ic = 0; cycles = 0;
    for (int m = 0; m < M1*MU; m++) for (int k = 0; k < K1*KU; k++) A[m][k] = 8'($urandom);
    for (int k = 0; k < K1*KU; k++) for (int n = 0; n < N1*NU; n++) B[k][n] = 8'($urandom);
    cfg.m1 = 16'(M1); cfg.n1 = 16'(N1); cfg.k1 = 16'(K1);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (ic < M1 * N1) begin
      // tile index t = (m1*N1 + n1)*K1 + k1
      int mt, nt, kt;
      mt = ia / (N1*K1); nt = (ia / K1) % N1; kt = ia % K1;
      for (int m = 0; m < MU; m++) for (int k = 0; k < KU; k++) ad[(m*KU+k)*8 +: 8] = A[mt*MU+m][kt*KU+k];
      mt = ib / (N1*K1); nt = (ib / K1) % N1; kt = ib % K1;
      for (int n = 0; n < NU; n++) for (int k = 0; k < KU; k++) bd[(n*KU+k)*8 +: 8] = B[kt*KU+k][nt*NU+n];
      av = (ia < M1*N1*K1) && (full_rate || $urandom_range(0, 3) != 0);
      bv = (ib < M1*N1*K1) && (full_rate || $urandom_range(0, 3) != 0);
      cr = full_rate || ($urandom_range(0, 2) == 0);
      #1;
      if (cv && cr) begin
        int m1i, n1i;
        m1i = ic / N1; n1i = ic % N1;
        for (int m = 0; m < MU; m++) for (int n = 0; n < NU; n++) begin
          int signed r;
          r = 0;
          for (int k = 0; k < K1*KU; k++) r += A[m1i*MU+m][k] * B[k][n1i*NU+n];
          checks++;
          if ($signed(cd[(m*NU+n)*32 +: 32]) != r) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d C(%0d,%0d) got %0d exp %0d", ic, m, n, $signed(cd[(m*NU+n)*32 +: 32]), r);
          end
        end
        ic++;
      end
      if (av && ar) ia++;
      if (bv && br) ib++;
      cycles++;
      @(negedge clk);
    end
    if (full_rate) begin
      checks++;
      if (cycles != M1*N1*K1 + 1) begin failures++; $display("FAIL rate: %0d cycles for %0d steps", cycles, M1*N1*K1); end
    end
    av = 0; bv = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 6; s++) begin
      int M1, N1, K1;
      M1 = $urandom_range(1, 3); N1 = $urandom_range(1, 3); K1 = $urandom_range(1, 5);
      run(M1, N1, K1, 1'b1);
      run(M1, N1, K1, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
