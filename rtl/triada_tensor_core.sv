// triada_tensor_core: the volumetric Tensor Core, P1 x P2 x P3 cells.
//
// Cell (i1,i2,i3) stores one point of every tensor of the computation: the
// input x[n1][n2][n3], then x'[n1][n2][k3], x''[k1][n2][k3] and finally
// x'''[k1][k2][k3], all at the same place (the paper's isomorphic mapping of
// the three 4D iteration spaces onto one 3D processor space). The tensors
// never move; only the streamed coefficient vectors (from the actuators)
// and the multicast operand vectors (from the pivot cells) travel, on the
// H, L and F lines of triada_operand_mesh.
//
// Interface: stage_i and the three actuator channel bundles come from the
// actuators; the host port writes one cell per cycle (x and the initial
// x''') and reads x''' of one cell combinationally; clr_i zeroes all cells.
// act_o reports each cell's ESOP activity of the current time-step.
// Timing: one time-step per clock; N1+N2+N3 steps for a dense transform.
//
// The array and its wiring follow the paper. The host port is this design's
// own: the paper does not say how tensors enter or leave the core.
module triada_tensor_core
  import triada_pkg::*;
#(
  parameter int unsigned P1   = 8,
  parameter int unsigned P2   = 8,
  parameter int unsigned P3   = 8,
  parameter int unsigned FRAC = 14
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr_i,
  input  stage_e                stage_i,
  input  bus_t                  act1_i [P1],
  input  bus_t                  act2_i [P2],
  input  bus_t                  act3_i [P3],
  input  logic                  wr_en_i,
  input  logic [$clog2(P1)-1:0] wr_i1_i,
  input  logic [$clog2(P2)-1:0] wr_i2_i,
  input  logic [$clog2(P3)-1:0] wr_i3_i,
  input  data_t                 wr_x_i,
  input  data_t                 wr_y0_i,
  input  logic [$clog2(P1)-1:0] rd_i1_i,
  input  logic [$clog2(P2)-1:0] rd_i2_i,
  input  logic [$clog2(P3)-1:0] rd_i3_i,
  output data_t                 rd_y_o,
  output cell_act_e             act_o [P1][P2][P3]
);

  bus_t  h_c [P1][P2][P3];
  bus_t  l_c [P1][P2][P3];
  bus_t  f_c [P1][P2][P3];
  bus_t  hx  [P1][P2];
  bus_t  lx  [P2][P3];
  bus_t  hy  [P1][P2];
  bus_t  ly  [P2][P3];
  bus_t  fy  [P1][P3];
  data_t y   [P1][P2][P3];

  triada_operand_mesh #(.P1(P1), .P2(P2), .P3(P3)) u_mesh (
    .clk     (clk),
    .rst_n   (rst_n),
    .stage_i (stage_i),
    .act1_i  (act1_i),
    .act2_i  (act2_i),
    .act3_i  (act3_i),
    .h_c_i   (h_c),
    .l_c_i   (l_c),
    .f_c_i   (f_c),
    .hx_o    (hx),
    .lx_o    (lx),
    .hy_o    (hy),
    .ly_o    (ly),
    .fy_o    (fy)
  );

  for (genvar a = 0; a < P1; a++) begin : g_i1
    for (genvar b = 0; b < P2; b++) begin : g_i2
      for (genvar c = 0; c < P3; c++) begin : g_i3
        logic sel;
        assign sel = wr_en_i && (wr_i1_i == a) && (wr_i2_i == b) && (wr_i3_i == c);
        triada_cell #(.FRAC(FRAC)) u_cell (
          .clk     (clk),
          .rst_n   (rst_n),
          .clr_i   (clr_i),
          .wr_en_i (sel),
          .wr_x_i  (wr_x_i),
          .wr_y0_i (wr_y0_i),
          .stage_i (stage_i),
          .hx_i    (hx[a][b]),
          .lx_i    (lx[b][c]),
          .hy_i    (hy[a][b]),
          .ly_i    (ly[b][c]),
          .fy_i    (fy[a][c]),
          .h_o     (h_c[a][b][c]),
          .l_o     (l_c[a][b][c]),
          .f_o     (f_c[a][b][c]),
          .y_o     (y[a][b][c]),
          .act_o   (act_o[a][b][c])
        );
      end
    end
  end

  assign rd_y_o = y[rd_i1_i][rd_i2_i][rd_i3_i];

endmodule
