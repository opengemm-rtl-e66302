// tb_workloads: runs the matrix sizes evaluated for the OpenGeMM design on
// the full-size cluster and reports the array utilization of each.
//
// Sizes: the cube sweep (8,8,8) ... (128,128,128) used for the throughput
// comparison (which includes the (32,32,32) power-measurement workload), and
// six random (M,K,N) with each dimension from {8,16,...,256}, as in the
// utilization study, drawn among the sizes whose operands and results fit in
// the scratchpad together. Operands are random int8; A and B tiles are
// interleaved in 128-byte slots so that they never share a bank. For each
// size the test checks every element of C against a product computed here,
// checks that the array computes in exactly M1*N1*K1 cycles, prints compute
// and busy cycles, and requires at least 90 % utilization when the product
// has 64 or more tile steps and K1 >= 4.
module tb_workloads;
  import opengemm_pkg::*;
  localparam int MAW = OG_AW - 3;
  logic clk = 0, rst_n = 0;
  logic cv = 0, cw = 0; logic [4:0] ca = 0; logic [31:0] cd = 0;
  logic crdy, rspv; logic [31:0] rspd;
  logic dreq = 0, dwe = 0; logic [MAW-1:0] dadr = 0; logic [511:0] dwd = 0, drd; logic drv;
  logic busy;

  opengemm_top dut (.clk_i(clk), .rst_ni(rst_n),
    .csr_req_valid_i(cv), .csr_req_ready_o(crdy), .csr_req_addr_i(ca), .csr_req_write_i(cw), .csr_req_wdata_i(cd),
    .csr_rsp_valid_o(rspv), .csr_rsp_rdata_o(rspd),
    .dma_req_i(dreq), .dma_we_i(dwe), .dma_addr_i(dadr), .dma_wdata_i(dwd), .dma_rvalid_o(drv), .dma_rdata_o(drd),
    .busy_o(busy));

  always #5 clk = ~clk;
  initial begin repeat (400000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- host and DMA models ----------------
  task automatic csr_wr(input int a, input logic [31:0] d);
    @(negedge clk); cv = 1; cw = 1; ca = 5'(a); cd = d;
    #1; while (!crdy) begin @(negedge clk); #1; end
    @(negedge clk); cv = 0;
  endtask
  task automatic csr_rd(input int a, output logic [31:0] d);
    @(negedge clk); cv = 1; cw = 0; ca = 5'(a);
    @(negedge clk); cv = 0; d = rspd;
  endtask
  task automatic dma_wr(input int byte_addr, input logic [511:0] d);
    @(negedge clk); dreq = 1; dwe = 1; dadr = MAW'(byte_addr / 8); dwd = d;
    @(negedge clk); dreq = 0;
  endtask
  task automatic dma_rd(input int byte_addr, output logic [511:0] d);
    @(negedge clk); dreq = 1; dwe = 0; dadr = MAW'(byte_addr / 8);
    @(negedge clk); dreq = 0; d = drd;
  endtask

  // ---------------- operations ----------------
  typedef struct { int M, K, N; int abase, bbase, cbase, slot; } op_t;
  op_t ops [1];
  logic signed [7:0] A [1][256][256];
  logic signed [7:0] B [1][256][256];

  function automatic int a_tile_addr(op_t o, int m1, int k1); return o.abase + (m1 * (o.K/8) + k1) * o.slot; endfunction
  function automatic int b_tile_addr(op_t o, int k1, int n1); return o.bbase + (n1 * (o.K/8) + k1) * o.slot; endfunction

  task automatic load(input int i);
    op_t o;
    logic [511:0] t;
    o = ops[i];
    for (int m = 0; m < o.M; m++) for (int k = 0; k < o.K; k++) A[i][m][k] = 8'($urandom);
    for (int k = 0; k < o.K; k++) for (int n = 0; n < o.N; n++) B[i][k][n] = 8'($urandom);
    for (int m1 = 0; m1 < o.M/8; m1++) for (int k1 = 0; k1 < o.K/8; k1++) begin
      for (int m = 0; m < 8; m++) for (int k = 0; k < 8; k++) t[(m*8+k)*8 +: 8] = A[i][m1*8+m][k1*8+k];
      dma_wr(a_tile_addr(o, m1, k1), t);
    end
    for (int k1 = 0; k1 < o.K/8; k1++) for (int n1 = 0; n1 < o.N/8; n1++) begin
      for (int n = 0; n < 8; n++) for (int k = 0; k < 8; k++) t[(n*8+k)*8 +: 8] = B[i][k1*8+k][n1*8+n];
      dma_wr(b_tile_addr(o, k1, n1), t);
    end
  endtask

  task automatic program_and_launch(input int i);
    op_t o;
    int M1, N1, K1;
    o = ops[i]; M1 = o.M/8; N1 = o.N/8; K1 = o.K/8;
    csr_wr(OG_CSR_BOUNDS, {2'b00, 10'(M1), 10'(N1), 10'(K1)});
    // streamer A: loops k1, n1, m1
    csr_wr(3, o.abase); csr_wr(4, K1); csr_wr(5, N1); csr_wr(6, M1);
    csr_wr(7, o.slot); csr_wr(8, 0); csr_wr(9, K1 * o.slot); csr_wr(10, 8);
    // streamer B: loops k1, n1, m1
    csr_wr(11, o.bbase); csr_wr(12, K1); csr_wr(13, N1); csr_wr(14, M1);
    csr_wr(15, o.slot); csr_wr(16, K1 * o.slot); csr_wr(17, 0); csr_wr(18, 8);
    // streamer C: loops n1, m1
    csr_wr(19, o.cbase); csr_wr(20, N1); csr_wr(21, M1); csr_wr(22, 1);
    csr_wr(23, 256); csr_wr(24, N1 * 256); csr_wr(25, 0); csr_wr(26, 8);
    csr_wr(OG_CSR_LAUNCH, 1);
  endtask

  task automatic wait_done();
    logic [31:0] s;
    do csr_rd(OG_CSR_LAUNCH, s); while (s[1:0] != 2'b00);
  endtask

  task automatic check_c(input int i);
    op_t o;
    logic [511:0] beat [4];
    int bad;
    o = ops[i]; bad = 0;
    for (int m1 = 0; m1 < o.M/8; m1++) for (int n1 = 0; n1 < o.N/8; n1++) begin
      int ta;
      ta = o.cbase + (m1 * (o.N/8) + n1) * 256;
      for (int q = 0; q < 4; q++) dma_rd(ta + q * 64, beat[q]);
      for (int m = 0; m < 8; m++) for (int n = 0; n < 8; n++) begin
        int e; int signed r; logic [31:0] got;
        e = m*8 + n;
        got = beat[e / 16][(e % 16)*32 +: 32];
        r = 0;
        for (int k = 0; k < o.K; k++) r += A[i][m1*8+m][k] * B[i][k][n1*8+n];
        checks++;
        if ($signed(got) != r) begin bad++; failures++; if (failures < 20) $display("FAIL C(%0d,%0d) got %0d exp %0d", m1*8+m, n1*8+n, $signed(got), r); end
      end
    end
    if (bad != 0) $display("  %0d wrong results", bad);
  endtask

  task automatic run_size(input int M, input int K, input int N);
    logic [31:0] b0, b1, c0, c1;
    int ab, steps;
    ab = 2 * ((M > N ? M : N) * K);   // interleaved A/B region
    ops[0] = '{M:M, K:K, N:N, abase:0, bbase:64, cbase:((ab + 255) / 256) * 256, slot:128};
    load(0);
    csr_rd(OG_CSR_BUSYCNT, b0); csr_rd(OG_CSR_COMPCNT, c0);
    program_and_launch(0);
    wait_done();
    csr_rd(OG_CSR_BUSYCNT, b1); csr_rd(OG_CSR_COMPCNT, c1);
    steps = (M/8) * (N/8) * (K/8);
    $display("(M,K,N)=(%0d,%0d,%0d): %0d compute cycles, %0d busy cycles, utilization %0d.%02d%%", M, K, N,
             c1 - c0, b1 - b0, (c1 - c0) * 100 / (b1 - b0), ((c1 - c0) * 10000 / (b1 - b0)) % 100);
    checks++;
    if (c1 - c0 != steps) begin failures++; $display("FAIL compute cycles %0d, expected %0d", c1 - c0, steps); end
    if (steps >= 64 && K >= 32) begin
      checks++;
      if ((c1 - c0) * 100 < (b1 - b0) * 90) begin failures++; $display("FAIL utilization below 90%%"); end
    end
    check_c(0);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int s = 8; s <= 128; s *= 2) run_size(s, s, s);
    for (int r = 0; r < 6; r++) begin
      int M, K, N;
      do begin
        M = 8 * $urandom_range(1, 32); K = 8 * $urandom_range(1, 32); N = 8 * $urandom_range(1, 32);
      end while (2 * (M > N ? M : N) * K + 256 + 4 * M * N > 270336 || (M/8) * (N/8) * (K/8) > 6000);
      run_size(M, K, N);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
