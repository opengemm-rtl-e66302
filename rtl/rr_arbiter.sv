// rr_arbiter: round-robin arbiter with a grant enable.
//
// Grants (one-hot) the first requester at or after the priority pointer,
// if en_i is high. After a grant the pointer moves to the requester after the
// winner, so every requester is served within N grants. Combinational grant,
// pointer updated at the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          en_i,
  input  logic [N-1:0]  req_i,
  output logic [N-1:0]  gnt_o,
  output logic [IW-1:0] idx_o
);

  logic [IW-1:0] ptr_q;

  always_comb begin
    logic found;
    int unsigned j;
    gnt_o = '0;
    idx_o = '0;
    found = 1'b0;
    for (int unsigned i = 0; i < N; i++) begin
      j = 32'(ptr_q) + i;
      if (j >= N) j = j - N;
      if (!found && en_i && req_i[j]) begin
        found    = 1'b1;
        gnt_o[j] = 1'b1;
        idx_o    = IW'(j);
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ptr_q <= '0;
    else if (gnt_o != '0) ptr_q <= (32'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
  end

endmodule
