// csr_manager: configuration interface between the host core and the
// accelerator, with configuration pre-loading.
//
// The host writes 32-bit configuration registers (one per cycle) into a
// shadow register set. Writing the LAUNCH register marks the shadow set as
// pending. As soon as the accelerator (core and streamers) is idle, the
// pending set is copied into the active set in one cycle and start_o pulses,
// which launches the GeMM core and the three streamers together. The host can
// therefore program the next operation while the current one runs; only
// when it tries to change a pending (not yet launched) configuration, or to
// launch a second one, is its request held off (csr_req_ready_o low) until
// the pending one has been launched.
//
// Register map (word index): 0..2 K1, N1, M1 (temporal loop bounds of the
// core, in tiles); 3+8*s .. 10+8*s for streamer s (A=0, B=1, C=2): base,
// bound0..2, tstride0..2, sstride; 27 LAUNCH (write: launch; read: bit0 busy,
// bit1 pending); 28 busy-cycle counter; 29 compute-cycle counter (read only,
// free running since reset); 30 BOUNDS, the three core loop bounds packed
// into one register ({2'b0, M1[9:0], N1[9:0], K1[9:0]}), so that the core's
// whole loop nest is set with a single CSR write instead of three. BOUNDS
// writes the same shadow registers as 0..2, and reads back their low 10 bits;
// bounds above 1023 need the separate registers. Reads of configuration
// registers return the shadow value. Every accepted request gets a response
// one cycle later (csr_rsp_valid_o, csr_rsp_rdata_o).
//
// The pre-loading mechanism and the packing of several settings into one
// CSR follow the paper; the register map, which settings are packed, the
// stall rule and the counters are this design's choices.
module csr_manager
  import opengemm_pkg::*;
(
  input  logic               clk_i,
  input  logic               rst_ni,
  // host CSR port
  input  logic               csr_req_valid_i,
  output logic               csr_req_ready_o,
  input  logic [OG_CSR_AW-1:0] csr_req_addr_i,
  input  logic               csr_req_write_i,
  input  logic [31:0]        csr_req_wdata_i,
  output logic               csr_rsp_valid_o,
  output logic [31:0]        csr_rsp_rdata_o,
  // accelerator side
  output gemm_cfg_t          gemm_cfg_o,
  output stream_cfg_t        a_cfg_o,
  output stream_cfg_t        b_cfg_o,
  output stream_cfg_t        c_cfg_o,
  output logic               start_o,
  input  logic               busy_i,
  input  logic               compute_i
);

  localparam int unsigned NCFG = OG_CSR_LAUNCH;   // configuration registers 0..26

  logic [NCFG-1:0][31:0] shadow_q, active_q;
  logic                  pending_q, start_q;
  logic [31:0]           busy_cnt_q, comp_cnt_q;
  logic                  is_cfg, accept;

  assign is_cfg = (32'(csr_req_addr_i) <= OG_CSR_LAUNCH) || (32'(csr_req_addr_i) == OG_CSR_BOUNDS);
  assign csr_req_ready_o = !(pending_q && csr_req_write_i && is_cfg);
  assign accept = csr_req_valid_i && csr_req_ready_o;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      shadow_q        <= '0;
      active_q        <= '0;
      pending_q       <= 1'b0;
      start_q         <= 1'b0;
      busy_cnt_q      <= '0;
      comp_cnt_q      <= '0;
      csr_rsp_valid_o <= 1'b0;
      csr_rsp_rdata_o <= '0;
    end else begin
      start_q <= 1'b0;
      // commit the pre-loaded configuration when the accelerator is idle
      if (pending_q && !busy_i && !start_q) begin
        active_q  <= shadow_q;
        pending_q <= 1'b0;
        start_q   <= 1'b1;
      end
      if (accept && csr_req_write_i) begin
        if (32'(csr_req_addr_i) < NCFG) shadow_q[csr_req_addr_i] <= csr_req_wdata_i;
        else if (32'(csr_req_addr_i) == OG_CSR_LAUNCH) pending_q <= 1'b1;
        else if (32'(csr_req_addr_i) == OG_CSR_BOUNDS) begin
          shadow_q[OG_CSR_K1] <= 32'(csr_req_wdata_i[0*OG_CSR_PACK_W +: OG_CSR_PACK_W]);
          shadow_q[OG_CSR_N1] <= 32'(csr_req_wdata_i[1*OG_CSR_PACK_W +: OG_CSR_PACK_W]);
          shadow_q[OG_CSR_M1] <= 32'(csr_req_wdata_i[2*OG_CSR_PACK_W +: OG_CSR_PACK_W]);
        end
      end
      csr_rsp_valid_o <= accept;
      if (accept) begin
        if (32'(csr_req_addr_i) < NCFG)                 csr_rsp_rdata_o <= shadow_q[csr_req_addr_i];
        else if (32'(csr_req_addr_i) == OG_CSR_LAUNCH)  csr_rsp_rdata_o <= {30'd0, pending_q, busy_i || start_q};
        else if (32'(csr_req_addr_i) == OG_CSR_BUSYCNT) csr_rsp_rdata_o <= busy_cnt_q;
        else if (32'(csr_req_addr_i) == OG_CSR_COMPCNT) csr_rsp_rdata_o <= comp_cnt_q;
        else if (32'(csr_req_addr_i) == OG_CSR_BOUNDS)  csr_rsp_rdata_o <= 32'({shadow_q[OG_CSR_M1][OG_CSR_PACK_W-1:0],
                                                                               shadow_q[OG_CSR_N1][OG_CSR_PACK_W-1:0],
                                                                               shadow_q[OG_CSR_K1][OG_CSR_PACK_W-1:0]});
        else                                            csr_rsp_rdata_o <= '0;
      end
      if (busy_i)    busy_cnt_q <= busy_cnt_q + 1'b1;
      if (compute_i) comp_cnt_q <= comp_cnt_q + 1'b1;
    end
  end

  // unpack the active registers into the configuration structs
  function automatic stream_cfg_t unpack_stream(input logic [NCFG-1:0][31:0] r, input int unsigned s);
    stream_cfg_t c;
    int unsigned o;
    o = OG_CSR_STREAM0 + OG_CSR_PER_STREAM * s;
    c.base = OG_AW'(r[o]);
    for (int i = 0; i < OG_NLOOPS; i++) begin
      c.bound[i]   = OG_CNT_W'(r[o + 1 + i]);
      c.tstride[i] = OG_AW'(r[o + 1 + OG_NLOOPS + i]);
    end
    c.sstride = OG_AW'(r[o + 1 + 2*OG_NLOOPS]);
    return c;
  endfunction

  assign gemm_cfg_o.k1 = OG_CNT_W'(active_q[OG_CSR_K1]);
  assign gemm_cfg_o.n1 = OG_CNT_W'(active_q[OG_CSR_N1]);
  assign gemm_cfg_o.m1 = OG_CNT_W'(active_q[OG_CSR_M1]);
  assign a_cfg_o = unpack_stream(active_q, 0);
  assign b_cfg_o = unpack_stream(active_q, 1);
  assign c_cfg_o = unpack_stream(active_q, 2);
  assign start_o = start_q;

endmodule
