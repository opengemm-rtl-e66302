// dotprod: one DotProd unit of the GeMM array.
//
// Multiplies KU signed PA-bit elements of A with KU signed PB-bit elements of
// B, reduces the products with an adder tree in the same cycle, and adds the
// sum to the accumulation register (output-stationary dataflow). On the
// first step of a K loop (first_i) the accumulator contributes zero, which is
// how the accumulator is reset; on the last step (last_i) the new sum is also
// written to the result register c_o, which holds it while the next tile
// accumulates.
//
// Timing: a step is taken on the rising clock edge when en_i is high; c_o
// changes one cycle after the step that had last_i set.
//
// Follows the paper: the multiplier row, combinational adder tree, Accum Reg
// and Reg C. Own choices: signed operands, wrap-around accumulation, and the
// first/last control encoding.
module dotprod #(
  parameter int unsigned KU = 8,
  parameter int unsigned PA = 8,
  parameter int unsigned PB = 8,
  parameter int unsigned PC = 32
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [KU*PA-1:0]     a_i,
  input  logic [KU*PB-1:0]     b_i,
  input  logic                 en_i,
  input  logic                 first_i,
  input  logic                 last_i,
  output logic [PC-1:0]        c_o
);

  logic signed [PC-1:0] prod [KU];
  logic signed [PC-1:0] dot;
  logic signed [PC-1:0] acc_q;
  logic signed [PC-1:0] sum;
  logic        [PC-1:0] c_q;

  always_comb begin
    for (int k = 0; k < KU; k++) begin
      prod[k] = PC'($signed(a_i[k*PA +: PA])) * PC'($signed(b_i[k*PB +: PB]));
    end
  end

  // Adder tree: pairwise reduction, log2(KU) levels
  always_comb begin
    logic signed [PC-1:0] lvl [KU];
    int n;
    for (int k = 0; k < KU; k++) lvl[k] = prod[k];
    n = KU;
    while (n > 1) begin
      for (int k = 0; k < n / 2; k++) lvl[k] = lvl[2*k] + lvl[2*k+1];
      if (n % 2 == 1) lvl[n/2] = lvl[n-1];
      n = (n + 1) / 2;
    end
    dot = lvl[0];
  end

  assign sum = dot + (first_i ? PC'(0) : acc_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q <= '0;
      c_q   <= '0;
    end else if (en_i) begin
      acc_q <= sum;
      if (last_i) c_q <= sum;
    end
  end

  assign c_o = c_q;

endmodule
