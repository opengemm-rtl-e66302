// tb_buffer_depths: runs the same matrix products on three copies of the
// full-size cluster that differ only in the depth of the streamer buffers
// (DSTREAM = 2, 3 and 4; 3 is the default) and reports the utilization of
// each.
//
// The host and DMA models drive all three copies with the same requests, so
// every copy gets the same data and configuration; each copy's responses are
// read separately. Products: (64,64,64) with contiguous tiles (A and B
// tiles share banks, so the input streams meet bank conflicts), (64,64,64)
// with A and B tiles interleaved in 128-byte slots, and (64,8,64), where a
// result tile leaves the array every cycle and the output buffers fill.
// Checks: every result element of every copy, compute cycles equal to
// M1*N1*K1, and a utilization that does not fall as the depth grows.
module tb_buffer_depths;
  import opengemm_pkg::*;
  localparam int MAW = OG_AW - 3;
  localparam int ND = 3;
  logic clk = 0, rst_n = 0;
  logic cv = 0, cw = 0; logic [4:0] ca = 0; logic [31:0] cd = 0;
  logic dreq = 0, dwe = 0; logic [MAW-1:0] dadr = 0; logic [511:0] dwd = 0;
  logic [ND-1:0] crdy, rspv, drv, busy;
  logic [31:0]  rspd [ND];
  logic [511:0] drd [ND];
  logic [31:0]  st [ND];

  for (genvar g = 0; g < ND; g++) begin : g_dut
    opengemm_top #(.DSTREAM(g + 2)) dut (.clk_i(clk), .rst_ni(rst_n),
      .csr_req_valid_i(cv), .csr_req_ready_o(crdy[g]), .csr_req_addr_i(ca), .csr_req_write_i(cw), .csr_req_wdata_i(cd),
      .csr_rsp_valid_o(rspv[g]), .csr_rsp_rdata_o(rspd[g]),
      .dma_req_i(dreq), .dma_we_i(dwe), .dma_addr_i(dadr), .dma_wdata_i(dwd), .dma_rvalid_o(drv[g]), .dma_rdata_o(drd[g]),
      .busy_o(busy[g]));
  end

  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---------------- host and DMA models (broadcast to all copies) ----------------
  // Requests are only issued while no launch is pending, so all copies accept
  // every request in the same cycle.
  task automatic csr_wr(input int a, input logic [31:0] d);
    @(negedge clk); cv = 1; cw = 1; ca = 5'(a); cd = d;
    #1; chk(&crdy, "all copies accept the CSR write");
    @(negedge clk); cv = 0;
  endtask
  task automatic csr_rd(input int a, output logic [31:0] d);
    @(negedge clk); cv = 1; cw = 0; ca = 5'(a);
    @(negedge clk); cv = 0; d = rspd[2]; st[0] = rspd[0]; st[1] = rspd[1];
  endtask
  task automatic dma_wr(input int byte_addr, input logic [511:0] d);
    @(negedge clk); dreq = 1; dwe = 1; dadr = MAW'(byte_addr / 8); dwd = d;
    @(negedge clk); dreq = 0;
  endtask

  // ---------------- operations ----------------
  typedef struct { int M, K, N; int abase, bbase, cbase, slot; } op_t;
  op_t ops [1];
  logic signed [7:0] A [1][64][64];
  logic signed [7:0] B [1][64][64];

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
    csr_wr(OG_CSR_K1, K1); csr_wr(OG_CSR_N1, N1); csr_wr(OG_CSR_M1, M1);
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
    do csr_rd(OG_CSR_LAUNCH, s); while (s[1:0] != 2'b00 || st[0][1:0] != 2'b00 || st[1][1:0] != 2'b00);
  endtask

  task automatic check_c(input int i);
    op_t o;
    int bad;
    o = ops[i]; bad = 0;
    for (int m1 = 0; m1 < o.M/8; m1++) for (int n1 = 0; n1 < o.N/8; n1++)
      for (int q = 0; q < 4; q++) begin
        logic [511:0] beat [ND];
        @(negedge clk); dreq = 1; dwe = 0; dadr = MAW'((o.cbase + (m1 * (o.N/8) + n1) * 256 + q * 64) / 8);
        @(negedge clk); dreq = 0; beat = drd;
        for (int e = q*16; e < q*16 + 16; e++) begin
          int m, n; int signed r;
          m = e / 8; n = e % 8;
          r = 0;
          for (int k = 0; k < o.K; k++) r += A[i][m1*8+m][k] * B[i][k][n1*8+n];
          for (int g = 0; g < ND; g++) begin
            checks++;
            if ($signed(beat[g][(e % 16)*32 +: 32]) != r) begin bad++; failures++; end
          end
        end
      end
    if (bad != 0) $display("FAIL %0d wrong results", bad);
  endtask

  task automatic run(input int M, input int K, input int N, input bit interleaved);
    logic [31:0] b0 [ND], b1 [ND], c0 [ND], c1 [ND];
    int steps; int util [ND];
    string lay;
    if (interleaved) ops[0] = '{M:M, K:K, N:N, abase:0, bbase:64, cbase:2 * M * K, slot:128};
    else             ops[0] = '{M:M, K:K, N:N, abase:0, bbase:M * K, cbase:M * K + K * N, slot:64};
    lay = interleaved ? "interleaved" : "contiguous";
    load(0);
    csr_rd(OG_CSR_BUSYCNT, b0[2]); b0[0] = st[0]; b0[1] = st[1];
    csr_rd(OG_CSR_COMPCNT, c0[2]); c0[0] = st[0]; c0[1] = st[1];
    program_and_launch(0);
    wait_done();
    csr_rd(OG_CSR_BUSYCNT, b1[2]); b1[0] = st[0]; b1[1] = st[1];
    csr_rd(OG_CSR_COMPCNT, c1[2]); c1[0] = st[0]; c1[1] = st[1];
    steps = (M/8) * (N/8) * (K/8);
    for (int g = 0; g < ND; g++) begin
      util[g] = (c1[g] - c0[g]) * 10000 / (b1[g] - b0[g]);
      $display("(M,K,N)=(%0d,%0d,%0d) %s, DSTREAM=%0d: %0d compute cycles, %0d busy cycles, utilization %0d.%02d%%",
               M, K, N, lay, g + 2, c1[g] - c0[g], b1[g] - b0[g], util[g] / 100, util[g] % 100);
      chk(c1[g] - c0[g] == steps, "compute cycles = M1*N1*K1");
    end
    chk(util[1] >= util[0] && util[2] >= util[1], "utilization does not fall with deeper buffers");
    check_c(0);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    run(64, 64, 64, 1'b0);
    run(64, 64, 64, 1'b1);
    run(64, 8, 64, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
