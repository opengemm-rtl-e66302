// tb_mem_xbar: self-checking test of the scratchpad crossbar with 8 masters
// (4 of the read class),
// 4 banks of 16 rows and a 4-word DMA port, with simple bank models here.
//
// Random read/write traffic from all masters (requests held until granted)
// plus random aligned DMA accesses. Every cycle it checks that each bank
// grants at most one master, that a granted master really targets the bank
// that serves it, that a bank used by the DMA grants no master, and that read
// data (one cycle after the grant) equals a reference memory. It also checks
// the priority classes (the first NH ports win a bank against the others; a
// bank no read-class port wants serves a write-class port), round-robin
// fairness within the read class, and it counts bank conflicts (requests left waiting), which must
// occur.
module tb_mem_xbar;
  localparam int NM = 8, NH = 4, NB = 4, DEPTH = 16, W = 64, DW = 4, MAW = 10;
  logic clk = 0, rst_n = 0;
  logic [NM-1:0] req = '0, we = '0, gnt, rvalid;
  logic [NM-1:0][MAW-1:0] addr = '0;
  logic [NM-1:0][W-1:0] wdata = '0, rdata;
  logic dreq = 0, dwe = 0; logic [MAW-1:0] daddr = 0; logic [DW*W-1:0] dwd = 0, drd; logic drv;
  logic [NB-1:0] breq, bwe; logic [NB-1:0][3:0] baddr; logic [NB-1:0][W-1:0] bwd, brd;
  logic [W-1:0] bmem [NB][DEPTH];
  logic [W-1:0] refm [NB*DEPTH];
  int checks = 0, failures = 0, conflicts = 0;
  int waitc [NM];

  mem_xbar #(.NMASTER(NM), .NHIGH(NH), .NBANK(NB), .DEPTH(DEPTH), .WIDTH(W), .DMA_WORDS(DW), .MAW(MAW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .m_req_i(req), .m_we_i(we), .m_addr_i(addr), .m_wdata_i(wdata),
    .m_gnt_o(gnt), .m_rvalid_o(rvalid), .m_rdata_o(rdata),
    .dma_req_i(dreq), .dma_we_i(dwe), .dma_addr_i(daddr), .dma_wdata_i(dwd), .dma_rvalid_o(drv), .dma_rdata_o(drd),
    .bank_req_o(breq), .bank_we_o(bwe), .bank_addr_o(baddr), .bank_wdata_o(bwd), .bank_rdata_i(brd));

  // bank models: one-cycle read latency
  always_ff @(posedge clk) for (int b = 0; b < NB; b++) if (breq[b]) begin
    if (bwe[b]) bmem[b][baddr[b]] <= bwd[b]; else brd[b] <= bmem[b][baddr[b]];
  end

  always #5 clk = ~clk;
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    logic [W-1:0] exp_rd [NM];
    logic [NM-1:0] exp_rv;
    logic [DW*W-1:0] exp_drd; logic exp_drv;
    exp_rv = '0; exp_drv = 0; exp_drd = '0;
    foreach (waitc[i]) waitc[i] = 0;
    for (int i = 0; i < NB*DEPTH; i++) begin refm[i] = {$urandom, $urandom}; bmem[i % NB][i / NB] = refm[i]; end
    brd = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      // new stimulus: a master keeps an ungranted request unchanged
      for (int m = 0; m < NM; m++) if (!req[m] || gnt[m]) begin
        req[m] = ($urandom_range(0, 3) != 0); we[m] = $urandom_range(0, 1);
        addr[m] = MAW'($urandom_range(0, NB*DEPTH - 1)); wdata[m] = {$urandom, $urandom};
      end
      dreq = ($urandom_range(0, 7) == 0); dwe = $urandom_range(0, 1);
      daddr = MAW'(DW * $urandom_range(0, NB*DEPTH/DW - 1));
      for (int i = 0; i < DW*2; i++) dwd[i*32 +: 32] = $urandom;
      #1;
      // responses to the previous cycle's grants, checked while new requests are up
      for (int m = 0; m < NM; m++) begin
        chk(rvalid[m] == exp_rv[m], "rvalid one cycle after a read grant");
        if (exp_rv[m]) chk(rdata[m] == exp_rd[m], $sformatf("read data of master %0d", m));
      end
      chk(drv == exp_drv, "DMA rvalid");
      if (exp_drv) chk(drd == exp_drd, "DMA read data");
      exp_rv = '0; exp_drv = dreq && !dwe;
      for (int b = 0; b < NB; b++) begin
        int ng;
        bit dma_here;
        ng = 0;
        dma_here = dreq && ((daddr % NB) / DW == b / DW || DW >= NB);
        for (int m = 0; m < NM; m++) if (gnt[m] && (addr[m] % NB) == b) ng++;
        chk(ng <= 1, "at most one grant per bank");
        begin
          bit hi_req, lo_req, hi_gnt;
          hi_req = 0; lo_req = 0; hi_gnt = 0;
          for (int m = 0; m < NM; m++) if (req[m] && (addr[m] % NB) == b) begin
            if (m < NH) begin hi_req = 1; if (gnt[m]) hi_gnt = 1; end else lo_req = 1;
          end
          if (!dma_here && hi_req) chk(hi_gnt, "a read-class port wins its bank");
          if (!dma_here && !hi_req && lo_req) chk(ng == 1, "a free bank serves a write-class port");
        end
        if (dma_here) chk(ng == 0, "DMA has priority on its banks");
      end
      for (int m = 0; m < NM; m++) begin
        if (gnt[m]) chk(req[m], "grant without request");
        if (req[m] && !gnt[m]) begin
          conflicts++; waitc[m]++;
          if (m < NH) chk(waitc[m] <= NH + 8, "round-robin starvation within the read class");
        end
        else waitc[m] = 0;
      end
      // update the reference at the clock edge
      if (dreq) begin
        if (dwe) for (int i = 0; i < DW; i++) refm[daddr + i] = dwd[i*W +: W];
        else     for (int i = 0; i < DW; i++) exp_drd[i*W +: W] = refm[daddr + i];
      end
      for (int m = 0; m < NM; m++) if (gnt[m]) begin
        if (we[m]) refm[addr[m]] = wdata[m];
        else begin exp_rv[m] = 1; exp_rd[m] = refm[addr[m]]; end
      end
    end
    chk(conflicts > 0, "bank conflicts occurred");
    $display("bank conflicts: %0d", conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
