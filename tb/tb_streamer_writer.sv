// tb_streamer_writer: self-checking test of the output streamer.
//
// A producer offers random C' tiles (32 words) at random times; a memory
// model grants the 32 write ports at random and records every written word.
// For random strided configurations the recorded memory is compared with the
// tile words at the nested-loop addresses. Checks also that with the memory
// stalled the streamer accepts exactly DEPTH tiles and then holds the
// producer off (output buffers full), and that with all grants it takes one
// tile per cycle.
module tb_streamer_writer;
  import opengemm_pkg::*;
  localparam int NP = 32, DEPTH = 3, MAW = 29;
  logic clk = 0, rst_n = 0;
  stream_cfg_t cfg;
  logic start = 0, busy;
  logic tv = 0, tr; logic [NP*64-1:0] td;
  logic [NP-1:0] req, gnt;
  logic [NP-1:0][MAW-1:0] addr;
  logic [NP-1:0][63:0] wdata;
  logic [NP-1:0] gmask = '0;
  int grant_mode = 0;   // 0 none, 1 all, 2 random
  int checks = 0, failures = 0;
  logic [63:0] mem [logic [MAW-1:0]];

  streamer_writer #(.NPORTS(NP), .PWORD(64), .DEPTH(DEPTH), .MAW(MAW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .cfg_i(cfg), .start_i(start), .busy_o(busy), .tile_valid_i(tv), .tile_ready_o(tr), .tile_data_i(td),
    .mem_req_o(req), .mem_addr_o(addr), .mem_wdata_o(wdata), .mem_gnt_i(gnt));

  always #5 clk = ~clk;
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  always @(negedge clk) for (int p = 0; p < NP; p++)
    gmask[p] <= (grant_mode == 1) || (grant_mode == 2 && $urandom_range(0, 2) != 0);
  assign gnt = req & gmask;
  always @(posedge clk) for (int p = 0; p < NP; p++) if (gnt[p]) mem[addr[p]] = wdata[p];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [NP*64-1:0] rnd_tile();
    logic [NP*64-1:0] t;
    for (int i = 0; i < NP*2; i++) t[i*32 +: 32] = $urandom;
    return t;
  endfunction

  initial begin
    cfg = '0; td = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1) memory stalled: only DEPTH tiles accepted
    cfg.base = 0; cfg.bound[0] = 6; cfg.bound[1] = 1; cfg.bound[2] = 1; cfg.tstride[0] = 256; cfg.sstride = 8;
    grant_mode = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    begin
      int acc, cyc;
      acc = 0; cyc = 0;
      tv = 1;
      for (int i = 0; i < 10; i++) begin td = rnd_tile(); #1; if (tr) acc++; @(negedge clk); end
      chk(acc == DEPTH, $sformatf("accepted %0d tiles with memory stalled", acc));
      // 2) release: with all grants one tile per cycle
      tv = 0;
      grant_mode = 1;
      @(negedge clk);
      acc = 0; tv = 1;
      while (acc < 3) begin td = rnd_tile(); #1; if (tr) acc++; @(negedge clk); cyc++; end
      tv = 0;
      chk(cyc <= 4, $sformatf("3 more tiles in %0d cycles", cyc));
      while (busy) @(negedge clk);
    end
    // 3) random strided configurations, random grants, random producer
    grant_mode = 2;
    for (int s = 0; s < 15; s++) begin
      logic [NP*64-1:0] tiles [$];
      logic [OG_AW-1:0] e [$];
      int n;
      tiles.delete(); e.delete(); mem.delete();
      cfg.base = 8 * $urandom_range(0, 256);
      for (int i = 0; i < 3; i++) begin cfg.bound[i] = 16'($urandom_range(1, 3)); end
      // non-overlapping tiles: temporal strides are multiples of the tile footprint
      cfg.sstride = 8 * $urandom_range(1, 3);
      cfg.tstride[0] = NP * cfg.sstride;
      cfg.tstride[1] = cfg.tstride[0] * cfg.bound[0];
      cfg.tstride[2] = cfg.tstride[1] * cfg.bound[1];
      for (int i2 = 0; i2 < cfg.bound[2]; i2++) for (int i1 = 0; i1 < cfg.bound[1]; i1++) for (int i0 = 0; i0 < cfg.bound[0]; i0++)
        e.push_back(cfg.base + i0*cfg.tstride[0] + i1*cfg.tstride[1] + i2*cfg.tstride[2]);
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      n = 0;
      while (n < e.size()) begin
        tv = ($urandom_range(0, 1) == 1); td = rnd_tile(); #1;
        if (tv && tr) begin tiles.push_back(td); n++; end
        @(negedge clk);
      end
      tv = 0;
      while (busy) @(negedge clk);
      @(negedge clk);
      for (int t = 0; t < e.size(); t++) for (int p = 0; p < NP; p++) begin
        logic [MAW-1:0] wa;
        wa = MAW'((e[t] + p * cfg.sstride) >> 3);
        chk(mem.exists(wa) && mem[wa] == tiles[t][p*64 +: 64], $sformatf("cfg %0d tile %0d word %0d", s, t, p));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
