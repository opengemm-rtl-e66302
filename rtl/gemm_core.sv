// gemm_core: the GeMM accelerator, i.e. the loop controller plus the
// MU x NU x KU DotProd array.
//
// Each step takes one A' tile (MU x KU, a_data_i), one B' tile (KU x NU,
// column-wise, b_data_i) and accumulates into the MU x NU result registers.
// After K1 steps the finished C' tile (c_data_o, MU*NU elements of PC bits,
// element (m,n) at index m*NU+n) is offered on the C stream; the array goes on
// with the next output tile in the same cycle if the inputs are there.
//
// Timing: one step per cycle at full throughput; c_valid_o rises the cycle
// after the last K step of a tile. compute_o marks the cycles in which the
// array did useful work (for utilization counting).
//
// The structure follows the paper; stream handshakes are this design's.
module gemm_core
  import opengemm_pkg::*;
#(
  parameter int unsigned MU = opengemm_pkg::OG_MU,
  parameter int unsigned NU = opengemm_pkg::OG_NU,
  parameter int unsigned KU = opengemm_pkg::OG_KU,
  parameter int unsigned PA = opengemm_pkg::OG_PA,
  parameter int unsigned PB = opengemm_pkg::OG_PB,
  parameter int unsigned PC = opengemm_pkg::OG_PC
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  gemm_cfg_t             cfg_i,
  input  logic                  start_i,
  input  logic                  a_valid_i,
  output logic                  a_ready_o,
  input  logic [MU*KU*PA-1:0]   a_data_i,
  input  logic                  b_valid_i,
  output logic                  b_ready_o,
  input  logic [NU*KU*PB-1:0]   b_data_i,
  output logic                  c_valid_o,
  input  logic                  c_ready_i,
  output logic [MU*NU*PC-1:0]   c_data_o,
  output logic                  busy_o,
  output logic                  compute_o
);

  logic en, first, last;

  gemm_ctrl #(.CNT_W(OG_CNT_W)) u_ctrl (
    .clk_i, .rst_ni, .start_i,
    .k1_i (cfg_i.k1), .n1_i (cfg_i.n1), .m1_i (cfg_i.m1),
    .a_valid_i, .a_ready_o, .b_valid_i, .b_ready_o,
    .c_valid_o, .c_ready_i,
    .en_o (en), .first_o (first), .last_o (last), .busy_o
  );

  gemm_array #(.MU(MU), .NU(NU), .KU(KU), .PA(PA), .PB(PB), .PC(PC)) u_array (
    .clk_i, .rst_ni,
    .a_i (a_data_i), .b_i (b_data_i),
    .en_i (en), .first_i (first), .last_i (last),
    .c_o (c_data_o)
  );

  assign compute_o = en;

endmodule
