// tb_spm: self-checking test of the full-size multi-banked scratchpad
// (48 streamer ports, 32 banks x 1056 x 64 bits, 512-bit DMA port).
//
// Fills the whole memory through the DMA port, then runs 2000 cycles of
// random reads and writes from all 48 ports (held until granted) with random
// DMA accesses in between, comparing every read (one cycle after its grant)
// with a reference memory, and finally reads the whole memory back through
// the DMA port. Also checks that the 32 banks serve up to 32 grants per
// cycle.
module tb_spm;
  localparam int NM = 48, NB = 32, DEPTH = 1056, W = 64, DW = 8, MAW = 29;
  localparam int NWORDS = NB * DEPTH;
  logic clk = 0, rst_n = 0;
  logic [NM-1:0] req = '0, we = '0, gnt, rvalid;
  logic [NM-1:0][MAW-1:0] addr = '0;
  logic [NM-1:0][W-1:0] wdata = '0, rdata;
  logic dreq = 0, dwe = 0; logic [MAW-1:0] daddr = 0; logic [DW*W-1:0] dwd = 0, drd; logic drv;
  logic [W-1:0] refm [NWORDS];
  int checks = 0, failures = 0, max_gnt = 0;

  spm #(.NMASTER(NM), .NBANK(NB), .DEPTH(DEPTH), .WIDTH(W), .DMA_WORDS(DW), .MAW(MAW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(req), .m_we_i(we), .m_addr_i(addr), .m_wdata_i(wdata),
    .m_gnt_o(gnt), .m_rvalid_o(rvalid), .m_rdata_o(rdata),
    .dma_req_i(dreq), .dma_we_i(dwe), .dma_addr_i(daddr), .dma_wdata_i(dwd), .dma_rvalid_o(drv), .dma_rdata_o(drd));

  always #5 clk = ~clk;
  initial begin repeat (30000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [W-1:0] exp_rd [NM];
    logic [NM-1:0] exp_rv;
    logic [DW*W-1:0] exp_drd; logic exp_drv;
    exp_rv = '0; exp_drv = 0; exp_drd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // fill through the DMA port
    for (int a = 0; a < NWORDS; a += DW) begin
      @(negedge clk);
      dreq = 1; dwe = 1; daddr = MAW'(a);
      for (int i = 0; i < DW; i++) begin refm[a+i] = {$urandom, $urandom}; dwd[i*W +: W] = refm[a+i]; end
    end
    @(negedge clk); dreq = 0;
    // random traffic
    for (int cyc = 0; cyc < 2000; cyc++) begin
      int ng;
      @(negedge clk);
      for (int m = 0; m < NM; m++) if (!req[m] || gnt[m]) begin
        req[m] = ($urandom_range(0, 3) != 0); we[m] = $urandom_range(0, 1);
        addr[m] = MAW'($urandom_range(0, NWORDS - 1)); wdata[m] = {$urandom, $urandom};
      end
      dreq = ($urandom_range(0, 7) == 0); dwe = $urandom_range(0, 1);
      daddr = MAW'(DW * $urandom_range(0, NWORDS/DW - 1));
      for (int i = 0; i < DW*2; i++) dwd[i*32 +: 32] = $urandom;
      #1;
      ng = $countones(gnt);
      if (ng > max_gnt) max_gnt = ng;
      chk(ng <= NB, "at most one grant per bank");
      for (int m = 0; m < NM; m++) begin
        chk(rvalid[m] == exp_rv[m], "rvalid one cycle after a read grant");
        if (exp_rv[m]) chk(rdata[m] == exp_rd[m], $sformatf("read data of port %0d", m));
      end
      chk(drv == exp_drv, "DMA rvalid");
      if (exp_drv) chk(drd == exp_drd, "DMA read data");
      exp_rv = '0; exp_drv = dreq && !dwe;
      if (dreq) begin
        if (dwe) for (int i = 0; i < DW; i++) refm[daddr + i] = dwd[i*W +: W];
        else     for (int i = 0; i < DW; i++) exp_drd[i*W +: W] = refm[daddr + i];
      end
      for (int m = 0; m < NM; m++) if (gnt[m]) begin
        if (we[m]) refm[addr[m]] = wdata[m];
        else begin exp_rv[m] = 1; exp_rd[m] = refm[addr[m]]; end
      end
    end
    @(negedge clk); req = '0; dreq = 0;
    // read everything back through the DMA port
    for (int a = 0; a < NWORDS; a += DW) begin
      @(negedge clk); dreq = 1; dwe = 0; daddr = MAW'(a);
      @(negedge clk); dreq = 0;
      for (int i = 0; i < DW; i++) chk(drd[i*W +: W] == refm[a+i], $sformatf("DMA read-back word %0d", a+i));
    end
    chk(max_gnt > 16, $sformatf("parallel bank accesses (max %0d grants in a cycle)", max_gnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
