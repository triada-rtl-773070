// triada_operand_mesh: the 3D crossover mesh of operand lines.
//
// Three families of multi-drop lines cross the Tensor Core:
//   H[i1][i2] runs along the third axis (n3/k3) and joins cells (i1,i2,*);
//   L[i2][i3] runs along the first axis (n1/k1) and joins cells (*,i2,i3);
//   F[i1][i3] runs along the second axis (n2/k2) and joins cells (i1,*,i3).
// Every cell on a line sees the same value in the same time-step (the
// paper's axon-like multicast). Drivers:
//   H: the pivot cells (Stage I operand x) and, in Stage II, channel i1 of
//      the Horizontal Actuator (x1);
//   L: the pivot cells (Stage II operand x'), in Stage I channel i3 of the
//      Lateral Actuator (x3), in Stage III channel i2 of the actuator x2;
//   F: the pivot cells (Stage III operand x'').
// One actuator channel therefore fans out to a whole plane of lines: the
// vector-to-matrix replication of the paper.
//
// A line is resolved as the OR of its drivers (an idle driver outputs all
// zeros). Each line is presented in two views: the coefficient view (*x_o,
// actuator drivers only) and the operand view (*y_o, cell drivers only). In
// any one stage a line carries only one kind, so the pair is the same wire;
// the split keeps the netlist free of false combinational loops through
// the cells' stage multiplexers.
//
// Bus rule (asserted): at most one driver, of either kind, is valid on a
// line per time-step. The geometry and driver sets follow the paper's
// Figs. 3-5; the OR resolution and the two views are this design's choice.
// Purely combinational; clk and rst_n only clock the assertions.
module triada_operand_mesh
  import triada_pkg::*;
#(
  parameter int unsigned P1 = 8,
  parameter int unsigned P2 = 8,
  parameter int unsigned P3 = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  stage_e stage_i,
  // Actuator channels: x1 has P1 channels, x2 has P2, x3 has P3.
  input  bus_t   act1_i [P1],
  input  bus_t   act2_i [P2],
  input  bus_t   act3_i [P3],
  // Contributions of the cells.
  input  bus_t   h_c_i  [P1][P2][P3],
  input  bus_t   l_c_i  [P1][P2][P3],
  input  bus_t   f_c_i  [P1][P2][P3],
  // Coefficient view of the H and L lines.
  output bus_t   hx_o   [P1][P2],
  output bus_t   lx_o   [P2][P3],
  // Operand view of the H, L and F lines.
  output bus_t   hy_o   [P1][P2],
  output bus_t   ly_o   [P2][P3],
  output bus_t   fy_o   [P1][P3]
);

  localparam int unsigned BW = $bits(bus_t);

  // Number of valid drivers per line, for the bus rule.
  int unsigned h_n [P1][P2];
  int unsigned l_n [P2][P3];
  int unsigned f_n [P1][P3];

  // Coefficient views: the actuator that owns the stage.
  always_comb begin
    for (int a = 0; a < int'(P1); a++)
      for (int b = 0; b < int'(P2); b++)
        hx_o[a][b] = (stage_i == STG_II) ? act1_i[a] : BUS_IDLE;
  end

  always_comb begin
    for (int b = 0; b < int'(P2); b++)
      for (int c = 0; c < int'(P3); c++)
        unique case (stage_i)
          STG_I:   lx_o[b][c] = act3_i[c];
          STG_III: lx_o[b][c] = act2_i[b];
          default: lx_o[b][c] = BUS_IDLE;
        endcase
  end

  // Operand views: OR of the cells on the line.
  always_comb begin
    for (int a = 0; a < int'(P1); a++)
      for (int b = 0; b < int'(P2); b++) begin
        logic [BW-1:0] v;
        v = '0;
        for (int c = 0; c < int'(P3); c++) v = v | BW'(h_c_i[a][b][c]);
        hy_o[a][b] = bus_t'(v);
      end
  end

  always_comb begin
    for (int b = 0; b < int'(P2); b++)
      for (int c = 0; c < int'(P3); c++) begin
        logic [BW-1:0] v;
        v = '0;
        for (int a = 0; a < int'(P1); a++) v = v | BW'(l_c_i[a][b][c]);
        ly_o[b][c] = bus_t'(v);
      end
  end

  always_comb begin
    for (int a = 0; a < int'(P1); a++)
      for (int c = 0; c < int'(P3); c++) begin
        logic [BW-1:0] v;
        v = '0;
        for (int b = 0; b < int'(P2); b++) v = v | BW'(f_c_i[a][b][c]);
        fy_o[a][c] = bus_t'(v);
      end
  end

  // Driver counts, both kinds together.
  always_comb begin
    for (int a = 0; a < int'(P1); a++)
      for (int b = 0; b < int'(P2); b++) begin
        h_n[a][b] = hx_o[a][b].vld ? 1 : 0;
        for (int c = 0; c < int'(P3); c++) h_n[a][b] += h_c_i[a][b][c].vld ? 1 : 0;
      end
    for (int b = 0; b < int'(P2); b++)
      for (int c = 0; c < int'(P3); c++) begin
        l_n[b][c] = lx_o[b][c].vld ? 1 : 0;
        for (int a = 0; a < int'(P1); a++) l_n[b][c] += l_c_i[a][b][c].vld ? 1 : 0;
      end
    for (int a = 0; a < int'(P1); a++)
      for (int c = 0; c < int'(P3); c++) begin
        f_n[a][c] = 0;
        for (int b = 0; b < int'(P2); b++) f_n[a][c] += f_c_i[a][b][c].vld ? 1 : 0;
      end
  end

  // Bus rule: one sender per line and time-step.
  for (genvar a = 0; a < P1; a++) begin : g_ah
    for (genvar b = 0; b < P2; b++) begin : g_bh
      a_h_one: assert property (@(posedge clk) disable iff (!rst_n) h_n[a][b] <= 1)
        else $error("H[%0d][%0d] has %0d drivers", a, b, h_n[a][b]);
    end
  end
  for (genvar b = 0; b < P2; b++) begin : g_bl
    for (genvar c = 0; c < P3; c++) begin : g_cl
      a_l_one: assert property (@(posedge clk) disable iff (!rst_n) l_n[b][c] <= 1)
        else $error("L[%0d][%0d] has %0d drivers", b, c, l_n[b][c]);
    end
  end
  for (genvar a = 0; a < P1; a++) begin : g_af
    for (genvar c = 0; c < P3; c++) begin : g_cf
      a_f_one: assert property (@(posedge clk) disable iff (!rst_n) f_n[a][c] <= 1)
        else $error("F[%0d][%0d] has %0d drivers", a, c, f_n[a][c]);
    end
  end

endmodule
