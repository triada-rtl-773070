// tb_triada_tensor_core: self-checking test of the Tensor Core alone.
//
// A 3 x 4 x 5 core is loaded with a random sparse tensor X and offset Y0.
// The testbench then plays the three actuators itself: Stage I streams the
// rows of C3 on the x3 channels (pivot tag on the diagonal), Stage II the
// rows of C1 on the x1 channels, Stage III the rows of C2 on the x2
// channels, one vector per cycle, zero non-pivot coefficients not sent.
// It then reads every x''' and compares it with triada_ref_pkg. A second
// run uses a 2 x 3 x 4 problem in the same core, showing that cells outside
// the problem stay idle and the result is still exact. The ESOP activities
// of the cells are counted; each must occur.
module tb_triada_tensor_core;
  import triada_pkg::*;
  import triada_ref_pkg::*;

  localparam int unsigned P1 = 3, P2 = 4, P3 = 5;
  localparam int unsigned FRAC = 14;

  logic                  clk = 1'b0;
  logic                  rst_n = 1'b0;
  logic                  clr, wr_en;
  stage_e                stage;
  bus_t                  a1 [P1];
  bus_t                  a2 [P2];
  bus_t                  a3 [P3];
  logic [$clog2(P1)-1:0] wi1, ri1;
  logic [$clog2(P2)-1:0] wi2, ri2;
  logic [$clog2(P3)-1:0] wi3, ri3;
  data_t                 wx, wy0, ry;
  cell_act_e             act [P1][P2][P3];

  int checks = 0, failures = 0;
  int n_act [6];

  triada_tensor_core #(.P1(P1), .P2(P2), .P3(P3), .FRAC(FRAC)) dut (
    .clk(clk), .rst_n(rst_n), .clr_i(clr), .stage_i(stage), .act1_i(a1),
    .act2_i(a2), .act3_i(a3), .wr_en_i(wr_en), .wr_i1_i(wi1), .wr_i2_i(wi2),
    .wr_i3_i(wi3), .wr_x_i(wx), .wr_y0_i(wy0), .rd_i1_i(ri1), .rd_i2_i(ri2),
    .rd_i3_i(ri3), .rd_y_o(ry), .act_o(act)
  );

  always #5 clk = ~clk;

  ten_t x, y0, y;
  mat_t c1, c2, c3;

  always @(posedge clk) begin
    for (int a = 0; a < int'(P1); a++)
      for (int b = 0; b < int'(P2); b++)
        for (int c = 0; c < int'(P3); c++)
          n_act[int'(act[a][b][c])]++;
  end

  function automatic longint rnd_sparse(int zero_pct, int mag);
    if ($urandom_range(0, 99) < zero_pct) return 0;
    return longint'($urandom_range(0, 2 * mag)) - mag;
  endfunction

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle_channels();
    foreach (a1[i]) a1[i] = BUS_IDLE;
    foreach (a2[i]) a2[i] = BUS_IDLE;
    foreach (a3[i]) a3[i] = BUS_IDLE;
  endtask

  function automatic bus_t coef(longint v, bit piv);
    bus_t b;
    b.vld = piv || (v != 0);
    b.tag = piv;
    b.val = b.vld ? data_t'(v) : '0;
    return b;
  endfunction

  task automatic run(int n1, int n2, int n3);
    // Problem data; everything outside the problem is zero.
    for (int a = 0; a < MAXP; a++)
      for (int b = 0; b < MAXP; b++) begin
        c1[a][b] = (a < n1 && b < n1) ? rnd_sparse(30, 1 << 14) : 0;
        c2[a][b] = (a < n2 && b < n2) ? rnd_sparse(30, 1 << 14) : 0;
        c3[a][b] = (a < n3 && b < n3) ? rnd_sparse(30, 1 << 14) : 0;
        for (int c = 0; c < MAXP; c++) begin
          x[a][b][c]  = (a < n1 && b < n2 && c < n3) ? rnd_sparse(40, 3000) : 0;
          y0[a][b][c] = (a < n1 && b < n2 && c < n3) ? rnd_sparse(50, 3000) : 0;
        end
      end
    transform(x, c1, c2, c3, y0, y, n1, n2, n3, FRAC);

    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          wr_en = 1; wi1 = a[$clog2(P1)-1:0]; wi2 = b[$clog2(P2)-1:0]; wi3 = c[$clog2(P3)-1:0];
          wx = data_t'(x[a][b][c]); wy0 = data_t'(y0[a][b][c]);
          @(negedge clk);
        end
    wr_en = 0;

    stage = STG_I;
    for (int s = 0; s < n3; s++) begin
      idle_channels();
      for (int k = 0; k < int'(P3); k++) a3[k] = coef(c3[s][k], k == s);
      @(negedge clk);
    end
    stage = STG_II;
    for (int s = 0; s < n1; s++) begin
      idle_channels();
      for (int k = 0; k < int'(P1); k++) a1[k] = coef(c1[s][k], k == s);
      @(negedge clk);
    end
    stage = STG_III;
    for (int s = 0; s < n2; s++) begin
      idle_channels();
      for (int k = 0; k < int'(P2); k++) a2[k] = coef(c2[s][k], k == s);
      @(negedge clk);
    end
    stage = STG_IDLE;
    idle_channels();

    for (int a = 0; a < int'(P1); a++)
      for (int b = 0; b < int'(P2); b++)
        for (int c = 0; c < int'(P3); c++) begin
          ri1 = a[$clog2(P1)-1:0]; ri2 = b[$clog2(P2)-1:0]; ri3 = c[$clog2(P3)-1:0];
          #1;
          check($sformatf("y[%0d][%0d][%0d]", a, b, c), longint'(ry),
                (a < n1 && b < n2 && c < n3) ? y[a][b][c] : 0);
        end
  endtask

  initial begin
    clr = 0; wr_en = 0; stage = STG_IDLE; wi1 = 0; wi2 = 0; wi3 = 0; wx = 0; wy0 = 0;
    ri1 = 0; ri2 = 0; ri3 = 0;
    foreach (n_act[i]) n_act[i] = 0;
    idle_channels();
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4; it++) run(P1, P2, P3);
    for (int it = 0; it < 2; it++) run(2, 3, 4);
    for (int i = 1; i < 6; i++) begin
      checks++;
      if (n_act[i] == 0) begin
        failures++;
        $display("FAIL cell activity %0d never seen", i);
      end
    end
    $display("activity: send_upd=%0d send=%0d piv_zero=%0d recv_upd=%0d wait=%0d",
             n_act[1], n_act[2], n_act[3], n_act[4], n_act[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
