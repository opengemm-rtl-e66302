// gemm_ctrl: hardware loop controller of the GeMM core.
//
// Runs the three temporal loops of the output-stationary dataflow,
//   for m1 < M1: for n1 < N1: for k1 < K1: step
// where each step consumes one A' tile and one B' tile and performs one
// MU x NU x KU array operation. It drives the accumulator reset (first_o on
// k1 == 0), marks the last K step (last_o on k1 == K1-1) after which the
// array's result registers hold a finished C' tile, and offers that tile on
// the C stream (c_valid_o) until it is taken.
//
// A step happens in a cycle where both input tiles are valid and the result
// register is free or being emptied in the same cycle (so a full output
// buffer stalls the array). With valid inputs and a ready output it takes
// one step per cycle and emits one C' tile every K1 cycles.
//
// Interface: valid/ready streams; a_ready_o/b_ready_o equal en_o. start_i is
// taken only while idle. busy_o stays high until the last C' tile has been
// handed over. Loop order follows the paper; the stall rules, the handshakes
// and treating a bound of 0 as 1 are this design's choices.
module gemm_ctrl #(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             start_i,
  input  logic [CNT_W-1:0] k1_i,
  input  logic [CNT_W-1:0] n1_i,
  input  logic [CNT_W-1:0] m1_i,
  input  logic             a_valid_i,
  output logic             a_ready_o,
  input  logic             b_valid_i,
  output logic             b_ready_o,
  output logic             c_valid_o,
  input  logic             c_ready_i,
  output logic             en_o,
  output logic             first_o,
  output logic             last_o,
  output logic             busy_o
);

  logic             run_q;
  logic             cval_q;
  logic [CNT_W-1:0] k_q, n_q, m_q;
  logic [CNT_W-1:0] kb_q, nb_q, mb_q;   // bounds minus one
  logic             step;
  logic             last_k, last_n, last_m;

  assign last_k = (k_q == kb_q);
  assign last_n = (n_q == nb_q);
  assign last_m = (m_q == mb_q);

  assign step = run_q && a_valid_i && b_valid_i && (!last_k || !cval_q || c_ready_i);

  assign en_o      = step;
  assign a_ready_o = step;
  assign b_ready_o = step;
  assign first_o   = (k_q == '0);
  assign last_o    = last_k;
  assign c_valid_o = cval_q;
  assign busy_o    = run_q || cval_q;

  function automatic logic [CNT_W-1:0] bm1(input logic [CNT_W-1:0] b);
    return (b == '0) ? '0 : b - 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      run_q  <= 1'b0;
      cval_q <= 1'b0;
      k_q <= '0; n_q <= '0; m_q <= '0;
      kb_q <= '0; nb_q <= '0; mb_q <= '0;
    end else begin
      if (start_i && !busy_o) begin
        run_q <= 1'b1;
        k_q <= '0; n_q <= '0; m_q <= '0;
        kb_q <= bm1(k1_i); nb_q <= bm1(n1_i); mb_q <= bm1(m1_i);
      end else if (step) begin
        if (!last_k) begin
          k_q <= k_q + 1'b1;
        end else begin
          k_q <= '0;
          if (!last_n) begin
            n_q <= n_q + 1'b1;
          end else begin
            n_q <= '0;
            if (!last_m) m_q <= m_q + 1'b1;
            else begin
              m_q   <= '0;
              run_q <= 1'b0;
            end
          end
        end
      end
      // result register handshake
      if (step && last_k)          cval_q <= 1'b1;
      else if (cval_q && c_ready_i) cval_q <= 1'b0;
    end
  end

  // A finished tile must not be overwritten before it has been taken
  property p_no_overwrite;
    @(posedge clk_i) disable iff (!rst_ni) (step && last_k) |-> (!cval_q || c_ready_i);
  endproperty
  a_no_overwrite: assert property (p_no_overwrite);

endmodule
