// tb_streamer_reader: self-checking test of the input streamer.
//
// A memory model answers the streamer's 8 ports: a request is granted at
// random (bank conflicts) or always, and the word returned one cycle after
// the grant is a function of its word address. For random strided
// configurations the delivered tiles are compared with the words at the
// addresses of the nested-loop formula. Checks also that:
//  - with the consumer stalled, the streamer pre-fetches exactly DEPTH tiles
//    and then stops requesting (no overflow);
//  - with all grants and a ready consumer it delivers one tile per cycle.
module tb_streamer_reader;
  import opengemm_pkg::*;
  localparam int NP = 8, DEPTH = 3, MAW = 29;
  logic clk = 0, rst_n = 0;
  stream_cfg_t cfg;
  logic start = 0, busy;
  logic [NP-1:0] req, gnt, rvalid;
  logic [NP-1:0][MAW-1:0] addr;
  logic [NP-1:0][63:0] rdata;
  logic tv, tr = 0; logic [NP*64-1:0] td;
  int checks = 0, failures = 0;
  bit always_grant = 0;

  streamer_reader #(.NPORTS(NP), .PWORD(64), .DEPTH(DEPTH), .MAW(MAW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .cfg_i(cfg), .start_i(start), .busy_o(busy), .mem_req_o(req), .mem_addr_o(addr), .mem_gnt_i(gnt),
    .mem_rvalid_i(rvalid), .mem_rdata_i(rdata), .tile_valid_o(tv), .tile_ready_i(tr), .tile_data_o(td));

  function automatic logic [63:0] word_at(input logic [MAW-1:0] a);
    return {a[31:0] ^ 32'hA5A5_0000, ~a[31:0]};
  endfunction

  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // memory model
  logic [NP-1:0] gmask = '1;
  always @(negedge clk) for (int p = 0; p < NP; p++) gmask[p] <= always_grant || ($urandom_range(0, 2) != 0);
  assign gnt = req & gmask;
  always_ff @(posedge clk) for (int p = 0; p < NP; p++) begin
    rvalid[p] <= gnt[p];
    rdata[p]  <= gnt[p] ? word_at(addr[p]) : {$urandom, $urandom};
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic launch();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  initial begin
    cfg = '0; rvalid = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1) pre-fetch fills the buffer and stops
    cfg.base = 0; cfg.bound[0] = 10; cfg.bound[1] = 1; cfg.bound[2] = 1; cfg.tstride[0] = 64; cfg.sstride = 8;
    always_grant = 1; tr = 0;
    launch();
    repeat (20) @(negedge clk);
    chk(dut.u_buf.count_o == DEPTH, "buffer full after pre-fetch");
    chk(req == '0, "no requests with a full buffer");
    // 2) drain at full rate: one tile per cycle
    begin
      int got, cyc;
      got = 0; cyc = 0; tr = 1;
      while (got < 10 && cyc < 100) begin
        #1; if (tv) begin chk(td[63:0] == word_at(MAW'(got*8)), "tile data in order"); got++; end
        @(negedge clk); cyc++;
      end
      chk(cyc == 10, $sformatf("10 tiles in %0d cycles", cyc));
    end
    tr = 0;
    @(negedge clk);
    chk(!busy, "idle after the last tile");
    // 3) random strided configurations, random grants and consumer stalls
    always_grant = 0;
    for (int s = 0; s < 20; s++) begin
      int n;
      logic [OG_AW-1:0] e [$];
      e.delete();
      cfg.base = 8 * $urandom_range(0, 512);
      for (int i = 0; i < 3; i++) begin cfg.bound[i] = 16'($urandom_range(1, 3)); cfg.tstride[i] = 8 * $urandom_range(0, 64); end
      cfg.sstride = 8 * $urandom_range(1, 40);
      for (int i2 = 0; i2 < cfg.bound[2]; i2++) for (int i1 = 0; i1 < cfg.bound[1]; i1++) for (int i0 = 0; i0 < cfg.bound[0]; i0++)
        e.push_back(cfg.base + i0*cfg.tstride[0] + i1*cfg.tstride[1] + i2*cfg.tstride[2]);
      launch();
      n = 0;
      while (busy || tv) begin
        tr = ($urandom_range(0, 2) != 0);
        #1;
        if (tv && tr) begin
          for (int p = 0; p < NP; p++) begin
            logic [OG_AW-1:0] ba;
            ba = e[n] + p * cfg.sstride;
            chk(td[p*64 +: 64] == word_at(MAW'(ba >> 3)), $sformatf("cfg %0d tile %0d word %0d", s, n, p));
          end
          n++;
        end
        @(negedge clk);
      end
      chk(n == e.size(), $sformatf("tile count %0d of %0d", n, e.size()));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
