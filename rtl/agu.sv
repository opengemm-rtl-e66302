// agu: strided address generator of a data streamer.
//
// After start_i it walks NLOOPS nested temporal loops (loop 0 innermost) with
// the iteration counts cfg_i.bound[i]. For the current iteration it offers one
// byte address per parallel memory port,
//   addr[p] = base + sum_i idx_i * tstride[i] + p * sstride,
// and advances when next_i is high. The per-loop products are kept as
// running offsets (added on each increment, cleared on wrap), so no
// multiplier is needed for the temporal part.
//
// Timing: valid_o rises the cycle after start_i and stays high until next_i
// has been given for the last iteration. A bound of 0 counts as 1.
// The strided scheme (temporal strides per loop plus a spatial stride between
// ports) follows the paper's description of programmable strided access; the
// exact encoding is this design's choice.
module agu
  import opengemm_pkg::*;
#(
  parameter int unsigned NPORTS = 8
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  stream_cfg_t                 cfg_i,
  input  logic                        start_i,
  input  logic                        next_i,
  output logic                        valid_o,
  output logic [NPORTS-1:0][OG_AW-1:0] addr_o
);

  stream_cfg_t                          cfg_q;
  logic                                 run_q;
  logic [OG_NLOOPS-1:0][OG_CNT_W-1:0]   idx_q;
  logic [OG_NLOOPS-1:0][OG_AW-1:0]      off_q;
  logic [OG_AW-1:0]                     tsum;
  logic [OG_NLOOPS-1:0]                 wrap;

  always_comb begin
    tsum = cfg_q.base;
    for (int i = 0; i < OG_NLOOPS; i++) begin
      tsum = tsum + off_q[i];
      wrap[i] = (cfg_q.bound[i] == '0) || (idx_q[i] == cfg_q.bound[i] - 1'b1);
    end
    for (int p = 0; p < NPORTS; p++) begin
      addr_o[p] = tsum + OG_AW'(p) * cfg_q.sstride;
    end
  end

  assign valid_o = run_q;

  // odometer: increment the innermost loop that does not wrap
  logic [OG_NLOOPS-1:0][OG_CNT_W-1:0] idx_n;
  logic [OG_NLOOPS-1:0][OG_AW-1:0]    off_n;
  logic                               carry;
  always_comb begin
    idx_n = idx_q;
    off_n = off_q;
    carry = 1'b1;
    for (int i = 0; i < OG_NLOOPS; i++) begin
      if (carry) begin
        if (wrap[i]) begin
          idx_n[i] = '0;
          off_n[i] = '0;
        end else begin
          idx_n[i] = idx_q[i] + 1'b1;
          off_n[i] = off_q[i] + cfg_q.tstride[i];
          carry    = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q <= '0;
      run_q <= 1'b0;
      idx_q <= '0;
      off_q <= '0;
    end else if (start_i) begin
      cfg_q <= cfg_i;
      run_q <= 1'b1;
      idx_q <= '0;
      off_q <= '0;
    end else if (run_q && next_i) begin
      idx_q <= idx_n;
      off_q <= off_n;
      if (carry) run_q <= 1'b0;   // all loops wrapped: done
    end
  end

endmodule
