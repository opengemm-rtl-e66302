// tb_agu: self-checking test of the strided address generator.
//
// For 40 random configurations (three loop bounds 1..4, random temporal and
// spatial strides, random base) it steps the generator with random next
// strobes and compares every address tuple with the nested-loop formula
// base + i0*t0 + i1*t1 + i2*t2 + p*s, checks that exactly b0*b1*b2 tuples
// are produced and that valid drops after the last one.
module tb_agu;
  import opengemm_pkg::*;
  localparam int NP = 4;
  logic clk = 0, rst_n = 0;
  stream_cfg_t cfg;
  logic start = 0, nxt = 0, valid;
  logic [NP-1:0][OG_AW-1:0] addr;
  int checks = 0, failures = 0;

  agu #(.NPORTS(NP)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_i(cfg), .start_i(start), .next_i(nxt),
    .valid_o(valid), .addr_o(addr));

  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      int n;
      cfg.base = $urandom_range(0, 4095);
      for (int i = 0; i < OG_NLOOPS; i++) begin
        cfg.bound[i] = 16'($urandom_range(1, 4));
        cfg.tstride[i] = $urandom_range(0, 1024);
      end
      cfg.sstride = $urandom_range(0, 64);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      n = 0;
      for (int i2 = 0; i2 < cfg.bound[2]; i2++)
        for (int i1 = 0; i1 < cfg.bound[1]; i1++)
          for (int i0 = 0; i0 < cfg.bound[0]; i0++) begin
            while ($urandom_range(0, 2) == 0) begin
              nxt = 0; @(negedge clk);
            end
            checks++;
            if (!valid) begin failures++; $display("FAIL valid low early"); end
            for (int p = 0; p < NP; p++) begin
              logic [OG_AW-1:0] e;
              e = cfg.base + i0*cfg.tstride[0] + i1*cfg.tstride[1] + i2*cfg.tstride[2] + p*cfg.sstride;
              checks++;
              if (addr[p] != e) begin failures++; if (failures < 10) $display("FAIL addr %0d: %0d exp %0d", p, addr[p], e); end
            end
            nxt = 1; n++;
            @(negedge clk);
          end
      nxt = 0;
      checks++;
      if (valid) begin failures++; $display("FAIL valid after %0d tuples", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
