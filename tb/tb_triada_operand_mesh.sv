// tb_triada_operand_mesh: self-checking test of the H/L/F operand lines.
//
// Uses an unequal 3 x 4 x 5 array so that swapped axes show up. Each cycle
// it picks a stage, random actuator channel words and, for every line that
// the stage lets cells drive, at most one random cell driver. It then
// checks every resolved line against values computed here: the coefficient
// views carry channel i1 of x1 on H[i1][*] in Stage II, channel i3 of x3 on
// L[*][i3] in Stage I and channel i2 of x2 on L[i2][*] in Stage III, and
// nothing otherwise; the operand views carry the one cell driving the line.
module tb_triada_operand_mesh;
  import triada_pkg::*;

  localparam int unsigned P1 = 3, P2 = 4, P3 = 5;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  stage_e stage;
  bus_t   a1 [P1];
  bus_t   a2 [P2];
  bus_t   a3 [P3];
  bus_t   hc [P1][P2][P3];
  bus_t   lc [P1][P2][P3];
  bus_t   fc [P1][P2][P3];
  bus_t   hx [P1][P2];
  bus_t   lx [P2][P3];
  bus_t   hy [P1][P2];
  bus_t   ly [P2][P3];
  bus_t   fy [P1][P3];

  int checks = 0, failures = 0;

  triada_operand_mesh #(.P1(P1), .P2(P2), .P3(P3)) dut (
    .clk(clk), .rst_n(rst_n), .stage_i(stage), .act1_i(a1), .act2_i(a2),
    .act3_i(a3), .h_c_i(hc), .l_c_i(lc), .f_c_i(fc), .hx_o(hx), .lx_o(lx),
    .hy_o(hy), .ly_o(ly), .fy_o(fy)
  );

  always #5 clk = ~clk;

  bus_t e_hy [P1][P2];
  bus_t e_ly [P2][P3];
  bus_t e_fy [P1][P3];

  function automatic bus_t rnd_bus(bit with_tag);
    bus_t b;
    b.vld = 1'b1;
    b.tag = with_tag ? 1'($urandom_range(0, 1)) : 1'b0;
    b.val = data_t'($urandom);
    return b;
  endfunction

  task automatic check_bus(string what, bus_t got, bus_t exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stage = STG_IDLE;
    for (int a = 0; a < int'(P1); a++)
      for (int b = 0; b < int'(P2); b++)
        for (int c = 0; c < int'(P3); c++) begin
          hc[a][b][c] = BUS_IDLE; lc[a][b][c] = BUS_IDLE; fc[a][b][c] = BUS_IDLE;
        end
    foreach (a1[i]) a1[i] = BUS_IDLE;
    foreach (a2[i]) a2[i] = BUS_IDLE;
    foreach (a3[i]) a3[i] = BUS_IDLE;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;

    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      stage = stage_e'($urandom_range(0, 3));
      foreach (a1[i]) a1[i] = ($urandom_range(0, 3) == 0) ? BUS_IDLE : rnd_bus(1);
      foreach (a2[i]) a2[i] = ($urandom_range(0, 3) == 0) ? BUS_IDLE : rnd_bus(1);
      foreach (a3[i]) a3[i] = ($urandom_range(0, 3) == 0) ? BUS_IDLE : rnd_bus(1);
      for (int a = 0; a < int'(P1); a++)
        for (int b = 0; b < int'(P2); b++)
          for (int c = 0; c < int'(P3); c++) begin
            hc[a][b][c] = BUS_IDLE; lc[a][b][c] = BUS_IDLE; fc[a][b][c] = BUS_IDLE;
          end
      // H lines: cells may drive unless x1 owns them (Stage II).
      for (int a = 0; a < int'(P1); a++)
        for (int b = 0; b < int'(P2); b++) begin
          int c;
          e_hy[a][b] = BUS_IDLE;
          c = $urandom_range(0, P3);
          if (stage != STG_II && c < int'(P3)) begin
            hc[a][b][c] = rnd_bus(0);
            e_hy[a][b] = hc[a][b][c];
          end
        end
      // L lines: cells may drive only in Stage II and idle.
      for (int b = 0; b < int'(P2); b++)
        for (int c = 0; c < int'(P3); c++) begin
          int a;
          e_ly[b][c] = BUS_IDLE;
          a = $urandom_range(0, P1);
          if ((stage == STG_II || stage == STG_IDLE) && a < int'(P1)) begin
            lc[a][b][c] = rnd_bus(0);
            e_ly[b][c] = lc[a][b][c];
          end
        end
      // F lines: cells only.
      for (int a = 0; a < int'(P1); a++)
        for (int c = 0; c < int'(P3); c++) begin
          int b;
          e_fy[a][c] = BUS_IDLE;
          b = $urandom_range(0, P2);
          if (b < int'(P2)) begin
            fc[a][b][c] = rnd_bus(0);
            e_fy[a][c] = fc[a][b][c];
          end
        end
      #1;
      for (int a = 0; a < int'(P1); a++)
        for (int b = 0; b < int'(P2); b++) begin
          check_bus("hx", hx[a][b], (stage == STG_II) ? a1[a] : BUS_IDLE);
          check_bus("hy", hy[a][b], e_hy[a][b]);
        end
      for (int b = 0; b < int'(P2); b++)
        for (int c = 0; c < int'(P3); c++) begin
          check_bus("lx", lx[b][c], (stage == STG_I) ? a3[c] : (stage == STG_III) ? a2[b] : BUS_IDLE);
          check_bus("ly", ly[b][c], e_ly[b][c]);
        end
      for (int a = 0; a < int'(P1); a++)
        for (int c = 0; c < int'(P3); c++)
          check_bus("fy", fy[a][c], e_fy[a][c]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
