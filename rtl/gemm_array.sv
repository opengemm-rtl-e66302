// gemm_array: the MU x NU mesh of DotProd units (the "3D MAC array").
//
// Row m of the A' tile (KU elements) is broadcast to all NU units of mesh row
// m; column n of the B' tile (KU elements) is broadcast to all MU units of
// mesh column n. Unit (m,n) therefore computes C'(m,n) += A'(m,:) . B'(:,n),
// so one step performs MU*NU*KU multiply-accumulates.
//
// Interface: a_i holds row m in bits [m*KU*PA +: KU*PA]; b_i holds column n in
// bits [n*KU*PB +: KU*PB] (B' tiles are stored column by column); c_o holds
// element (m,n) in bits [(m*NU+n)*PC +: PC]. en_i/first_i/last_i are shared by
// all units; results appear one cycle after a step with last_i.
//
// The broadcast structure follows the paper; the bit packing is this design's.
module gemm_array #(
  parameter int unsigned MU = 8,
  parameter int unsigned NU = 8,
  parameter int unsigned KU = 8,
  parameter int unsigned PA = 8,
  parameter int unsigned PB = 8,
  parameter int unsigned PC = 32
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic [MU*KU*PA-1:0]    a_i,
  input  logic [NU*KU*PB-1:0]    b_i,
  input  logic                   en_i,
  input  logic                   first_i,
  input  logic                   last_i,
  output logic [MU*NU*PC-1:0]    c_o
);

  for (genvar m = 0; m < MU; m++) begin : g_row
    for (genvar n = 0; n < NU; n++) begin : g_col
      dotprod #(.KU(KU), .PA(PA), .PB(PB), .PC(PC)) u_dotprod (
        .clk_i   (clk_i),
        .rst_ni  (rst_ni),
        .a_i     (a_i[m*KU*PA +: KU*PA]),
        .b_i     (b_i[n*KU*PB +: KU*PB]),
        .en_i    (en_i),
        .first_i (first_i),
        .last_i  (last_i),
        .c_o     (c_o[(m*NU+n)*PC +: PC])
      );
    end
  end

endmodule
