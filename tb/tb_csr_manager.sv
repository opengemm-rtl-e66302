// tb_csr_manager: self-checking test of the CSR manager and its
// configuration pre-loading.
//
// Writes a full random configuration, launches it and checks the start pulse
// and every field of the active configuration structs. Then, with the
// accelerator held busy, it pre-loads a second configuration: the active set
// must not change and start must not pulse while busy; a further write is
// held off while the launch is pending; as soon as busy drops the new set
// becomes active with one start pulse. It also checks read-back, the status
// register and the busy and compute cycle counters, and that one
// configuration write is accepted per cycle.
module tb_csr_manager;
  import opengemm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic rv = 0, rw = 0; logic [4:0] ra = 0; logic [31:0] wd = 0;
  logic rr, sv; logic [31:0] sd;
  gemm_cfg_t gc; stream_cfg_t ac, bc, cc;
  logic start, busy = 0, comp = 0;
  int checks = 0, failures = 0, starts = 0;
  logic [31:0] cfg_a [27], cfg_b [27];

  csr_manager dut (.clk_i(clk), .rst_ni(rst_n), .csr_req_valid_i(rv), .csr_req_ready_o(rr), .csr_req_addr_i(ra),
    .csr_req_write_i(rw), .csr_req_wdata_i(wd), .csr_rsp_valid_o(sv), .csr_rsp_rdata_o(sd),
    .gemm_cfg_o(gc), .a_cfg_o(ac), .b_cfg_o(bc), .c_cfg_o(cc), .start_o(start), .busy_i(busy), .compute_i(comp));

  always #5 clk = ~clk;
  always @(negedge clk) if (start) starts++;
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // one request; returns the number of cycles until it was accepted
  task automatic req(input bit w, input int a, input logic [31:0] d, output logic [31:0] rdata, output int wait_cycles);
    @(negedge clk); rv = 1; rw = w; ra = 5'(a); wd = d; wait_cycles = 0;
    #1;
    while (!rr) begin @(negedge clk); wait_cycles++; #1; end
    @(negedge clk); rv = 0;
    chk(sv, "response one cycle after acceptance");
    rdata = sd;
  endtask

  function automatic bit cfg_matches(input logic [31:0] r [27]);
    bit ok;
    stream_cfg_t s [3];
    s[0] = ac; s[1] = bc; s[2] = cc;
    ok = (gc.k1 == r[0][15:0]) && (gc.n1 == r[1][15:0]) && (gc.m1 == r[2][15:0]);
    for (int i = 0; i < 3; i++) begin
      int o;
      o = 3 + 8*i;
      ok &= (s[i].base == r[o]) && (s[i].sstride == r[o+7]);
      for (int l = 0; l < 3; l++) ok &= (s[i].bound[l] == r[o+1+l][15:0]) && (s[i].tstride[l] == r[o+4+l]);
    end
    return ok;
  endfunction

  initial begin
    logic [31:0] rd; int wc;
    repeat (2) @(posedge clk); rst_n = 1;
    foreach (cfg_a[i]) begin cfg_a[i] = $urandom; cfg_b[i] = $urandom; end
    // back-to-back writes: one per cycle
    @(negedge clk);
    for (int i = 0; i < 27; i++) begin
      rv = 1; rw = 1; ra = 5'(i); wd = cfg_a[i]; #1;
      chk(rr, "config write accepted in one cycle");
      @(negedge clk);
    end
    rv = 0;
    req(1'b0, 5, 0, rd, wc); chk(rd == cfg_a[5], "read-back of a shadow register");
    req(1'b1, OG_CSR_LAUNCH, 0, rd, wc);
    repeat (3) @(negedge clk);
    chk(starts == 1, "one start pulse after launch while idle");
    chk(cfg_matches(cfg_a), "active configuration = first set");
    // accelerator now busy: pre-load the second configuration
    busy = 1; comp = 1;
    for (int i = 0; i < 27; i++) begin req(1'b1, i, cfg_b[i], rd, wc); chk(wc == 0, "pre-load write not stalled"); end
    chk(cfg_matches(cfg_a), "active set unchanged while pre-loading");
    req(1'b1, OG_CSR_LAUNCH, 0, rd, wc);
    req(1'b0, OG_CSR_LAUNCH, 0, rd, wc); chk(rd[1:0] == 2'b11, "status: pending and busy");
    fork
      begin req(1'b1, 0, 32'h5, rd, wc); end
      begin repeat (6) @(negedge clk); busy = 0; comp = 0; end
    join
    chk(wc >= 5, $sformatf("write to a pending configuration held off (%0d cycles)", wc));
    chk(starts == 2, "second start only after busy dropped");
    chk(cfg_matches(cfg_b), "active configuration = pre-loaded set");
    req(1'b0, OG_CSR_BUSYCNT, 0, rd, wc); chk(rd >= 27 + 6 && rd <= 2*27 + 20, $sformatf("busy counter %0d", rd));
    req(1'b0, OG_CSR_COMPCNT, 0, rd, wc); chk(rd == sd && rd >= 27 + 6, "compute counter");
    req(1'b0, 0, 0, rd, wc); chk(rd == 32'h5, "held-off write landed after the launch");
    // packed loop bounds
    for (int t = 0; t < 4; t++) begin
      logic [9:0] k, n, m;
      k = 10'($urandom); n = 10'($urandom); m = 10'($urandom);
      req(1'b1, OG_CSR_BOUNDS, {2'b11, m, n, k}, rd, wc);
      req(1'b0, OG_CSR_BOUNDS, 0, rd, wc); chk(rd == {2'b00, m, n, k}, "BOUNDS read-back");
      req(1'b0, OG_CSR_K1, 0, rd, wc); chk(rd == 32'(k), "BOUNDS sets K1");
      req(1'b0, OG_CSR_N1, 0, rd, wc); chk(rd == 32'(n), "BOUNDS sets N1");
      req(1'b0, OG_CSR_M1, 0, rd, wc); chk(rd == 32'(m), "BOUNDS sets M1");
      busy = 1;
      req(1'b1, OG_CSR_LAUNCH, 0, rd, wc);
      fork
        begin req(1'b1, OG_CSR_BOUNDS, 0, rd, wc); end
        begin repeat (4) @(negedge clk); busy = 0; end
      join
      chk(wc >= 3, "BOUNDS write held off while a launch is pending");
      chk(gc.k1 == 16'(k) && gc.n1 == 16'(n) && gc.m1 == 16'(m), "packed bounds in the active set");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
