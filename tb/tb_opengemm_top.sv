// tb_opengemm_top: end-to-end test of the OpenGeMM cluster at its default
// (case-study) parameters: 8x8x8 array, 3-deep streamer buffers, 32 banks of
// 1056 x 64 bits.
//
// A small host model programs the accelerator through the CSR port and a DMA
// model moves data through the 512-bit DMA port. Three matrix products
// C = A x B with random int8 data are run:
//   op 1 (32,32,32)  tiles stored contiguously (A and B tiles share banks,
//                    so the streamers meet bank conflicts);
//   op 2 (64,8,40)   programmed and launched while op 1 is still running
//                    (configuration pre-loading), its three loop bounds
//                    set with one write of the packed BOUNDS register;
//                    with K = 8 a result tile
//                    leaves every cycle, faster than it can be written, so
//                    the output buffers fill and the array must stall;
//   op 3 (64,64,64)  A and B tiles interleaved so that they never share a
//                    bank (strided layout), run alone to measure utilization.
// All C matrices are read back through the DMA port and compared with
// products computed here. The test counts how often each mechanism was
// exercised -- pre-loaded launches, pre-fetch buffer holding 2+ tiles, array
// computing while a result waits in the output buffer or is written back,
// bank conflicts, strided layout, input stall, output-full stall, packed
// bounds write -- and fails if one never occurred. For
// op 3 it checks the cycle count: the array must compute in exactly
// M1*N1*K1 cycles and be busy for at most 5% more cycles than that.
module tb_opengemm_top;
  import opengemm_pkg::*;
  localparam int MAW = OG_AW - 3;
  logic clk = 0, rst_n = 0;
  logic cv = 0, cw = 0; logic [4:0] ca = 0; logic [31:0] cd = 0;
  logic crdy, rspv; logic [31:0] rspd;
  logic dreq = 0, dwe = 0; logic [MAW-1:0] dadr = 0; logic [511:0] dwd = 0, drd; logic drv;
  logic busy;
  int checks = 0, failures = 0;

  opengemm_top dut (.clk_i(clk), .rst_ni(rst_n),
    .csr_req_valid_i(cv), .csr_req_ready_o(crdy), .csr_req_addr_i(ca), .csr_req_write_i(cw), .csr_req_wdata_i(cd),
    .csr_rsp_valid_o(rspv), .csr_rsp_rdata_o(rspd),
    .dma_req_i(dreq), .dma_we_i(dwe), .dma_addr_i(dadr), .dma_wdata_i(dwd), .dma_rvalid_o(drv), .dma_rdata_o(drd),
    .busy_o(busy));

  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- mechanism counters ----------------
  int n_preload = 0, n_prefetch = 0, n_outbuf = 0, n_overlap = 0, n_conflict = 0, n_strided = 0, n_install = 0, n_outfull = 0, n_packed = 0;
  always @(negedge clk) if (rst_n) begin
    if (dut.u_stream_a.u_buf.count_o >= 2 || dut.u_stream_b.u_buf.count_o >= 2) n_prefetch++;
    if (dut.u_stream_c.u_buf.count_o >= 1 && dut.compute) n_outbuf++;
    if (dut.compute && (dut.m_req[2*8 +: 32] != '0)) n_overlap++;
    if (dut.c_valid && !dut.c_ready) n_outfull++;
    if ((dut.m_req & ~dut.m_gnt) != '0) n_conflict++;
    if (dut.core_busy && !(dut.a_valid && dut.b_valid) && !dut.compute && dut.u_core.u_ctrl.run_q) n_install++;
  end

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
  op_t ops [3];
  logic signed [7:0] A [3][64][64];
  logic signed [7:0] B [3][64][64];

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
    if (i == 1) begin
      csr_wr(OG_CSR_BOUNDS, {2'b00, 10'(M1), 10'(N1), 10'(K1)});
      n_packed++;
    end else begin
      csr_wr(OG_CSR_K1, K1); csr_wr(OG_CSR_N1, N1); csr_wr(OG_CSR_M1, M1);
    end
    // streamer A: loops k1, n1, m1
    csr_wr(3, o.abase); csr_wr(4, K1); csr_wr(5, N1); csr_wr(6, M1);
    csr_wr(7, o.slot); csr_wr(8, 0); csr_wr(9, K1 * o.slot); csr_wr(10, 8);
    // streamer B: loops k1, n1, m1
    csr_wr(11, o.bbase); csr_wr(12, K1); csr_wr(13, N1); csr_wr(14, M1);
    csr_wr(15, o.slot); csr_wr(16, K1 * o.slot); csr_wr(17, 0); csr_wr(18, 8);
    // streamer C: loops n1, m1
    csr_wr(19, o.cbase); csr_wr(20, N1); csr_wr(21, M1); csr_wr(22, 1);
    csr_wr(23, 256); csr_wr(24, N1 * 256); csr_wr(25, 0); csr_wr(26, 8);
    if (o.slot != 64) n_strided++;
    if (busy || dut.u_csr.pending_q) n_preload++;
    csr_wr(OG_CSR_LAUNCH, 1);
  endtask

  task automatic wait_done();
    logic [31:0] s;
    do csr_rd(OG_CSR_LAUNCH, s); while (s[1:0] != 2'b00);
  endtask

  task automatic check_c(input int i);
    op_t o;
    logic [511:0] lo, hi;
    int bad;
    o = ops[i]; bad = 0;
    for (int m1 = 0; m1 < o.M/8; m1++) for (int n1 = 0; n1 < o.N/8; n1++) begin
      int ta;
      ta = o.cbase + (m1 * (o.N/8) + n1) * 256;
      dma_rd(ta, lo); dma_rd(ta + 64, hi);
      for (int m = 0; m < 8; m++) for (int n = 0; n < 8; n++) begin
        int e; int signed r; logic [31:0] got;
        e = m*8 + n;
        got = (e < 16) ? lo[e*32 +: 32] : 32'h0;
        if (e >= 16) begin
          // the tile is 4 DMA beats; fetch the other beats as needed
          logic [511:0] beat;
          dma_rd(ta + (e / 16) * 64, beat);
          got = beat[(e % 16)*32 +: 32];
        end
        r = 0;
        for (int k = 0; k < o.K; k++) r += A[i][m1*8+m][k] * B[i][k][n1*8+n];
        checks++;
        if ($signed(got) != r) begin bad++; failures++; if (failures < 20) $display("FAIL op %0d C(%0d,%0d) got %0d exp %0d", i, m1*8+m, n1*8+n, $signed(got), r); end
      end
    end
    $display("op %0d (M,K,N)=(%0d,%0d,%0d): %0d wrong results", i + 1, o.M, o.K, o.N, bad);
  endtask

  initial begin
    logic [31:0] b0, b1, c0, c1;
    int steps;
    // op 1: contiguous layout; op 2: contiguous; op 3: A/B interleaved in 128-byte slots
    ops[0] = '{M:32, K:32, N:32, abase:'h0000, bbase:'h0400, cbase:'h8000, slot:64};
    ops[1] = '{M:64, K:8, N:40, abase:'h0800, bbase:'h1400, cbase:'hA000, slot:64};
    ops[2] = '{M:64, K:64, N:64, abase:'h2000, bbase:'h2040, cbase:'h10000, slot:128};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3; i++) load(i);
    program_and_launch(0);
    // pre-load op 2 while op 1 runs
    chk(busy || dut.u_csr.pending_q, "op 1 running while op 2 is programmed");
    program_and_launch(1);
    wait_done();
    // op 3 alone, measured
    csr_rd(OG_CSR_BUSYCNT, b0); csr_rd(OG_CSR_COMPCNT, c0);
    program_and_launch(2);
    wait_done();
    csr_rd(OG_CSR_BUSYCNT, b1); csr_rd(OG_CSR_COMPCNT, c1);
    steps = 8 * 8 * 8;
    $display("op 3: %0d compute cycles, %0d busy cycles, utilization %0d.%02d%%", c1 - c0, b1 - b0,
             (c1 - c0) * 100 / (b1 - b0), ((c1 - c0) * 10000 / (b1 - b0)) % 100);
    chk(c1 - c0 == steps, "op 3 computes in M1*N1*K1 cycles");
    chk((b1 - b0) * 100 <= steps * 105, "op 3 busy at most 5% longer than its compute cycles");
    for (int i = 0; i < 3; i++) check_c(i);
    $display("mechanisms: preload=%0d prefetch=%0d outbuf=%0d compute_during_writeback=%0d bank_conflict=%0d strided=%0d input_stall=%0d output_full_stall=%0d packed_bounds=%0d",
             n_preload, n_prefetch, n_outbuf, n_overlap, n_conflict, n_strided, n_install, n_outfull, n_packed);
    chk(n_preload > 0, "configuration pre-loading exercised");
    chk(n_prefetch > 0, "input pre-fetch exercised");
    chk(n_outbuf > 0, "output buffering exercised");
    chk(n_overlap > 0, "compute during write-back exercised");
    chk(n_conflict > 0, "bank conflicts exercised");
    chk(n_strided > 0, "strided layout exercised");
    chk(n_install > 0, "input stall exercised");
    chk(n_outfull > 0, "output-buffer-full stall exercised");
    chk(n_packed > 0, "packed bounds register exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
