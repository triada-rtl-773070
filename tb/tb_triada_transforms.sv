// tb_triada_transforms: the orthogonal 3D transforms on the default device.
//
// Runs, on the 8 x 8 x 8 device with 14 fraction bits, forward and inverse
// 3D transforms of random integer tensors:
//   * 3D Walsh-Hadamard (entries +-1, exact): forward then inverse must give
//     N1*N2*N3 times the input, bit for bit;
//   * 3D DCT-II, orthonormal, c(n,k) = s_k cos(pi (2n+1) k / 2N), on an
//     8 x 8 x 8 and on a 7 x 5 x 6 (non-power-of-two, non-cubic) tensor;
//   * 3D Hartley, c(n,k) = (cos + sin)(2 pi n k / N) / sqrt(N), on 8 x 6 x 3.
// Coefficients are computed here with $cos/$sin and rounded to 14 fraction
// bits. Every device result is compared with triada_ref_pkg exactly; the
// inverse transform (with the transposed matrices) must reproduce the input
// to within one integer unit (inputs carry 8 fraction bits; the error comes
// from the 14-bit coefficients and the truncated products).
// The number of time-steps of each run must be N1+N2+N3.
module tb_triada_transforms;
  import triada_pkg::*;
  import triada_ref_pkg::*;

  localparam int FRAC = 14;
  localparam real PI = 3.14159265358979323846;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        clr, cw_en, tw_en, start, busy, done;
  logic [1:0]  cw_sel;
  logic [2:0]  cw_row, cw_col, tw_i1, tw_i2, tw_i3, rd_i1, rd_i2, rd_i3;
  data_t       cw_data, tw_x, tw_y0, rd_y;
  stage_e      stage;

  int checks = 0, failures = 0;

  triada_top dut (
    .clk(clk), .rst_n(rst_n), .clr_i(clr), .cw_en_i(cw_en), .cw_sel_i(cw_sel),
    .cw_row_i(cw_row), .cw_col_i(cw_col), .cw_data_i(cw_data), .tw_en_i(tw_en),
    .tw_i1_i(tw_i1), .tw_i2_i(tw_i2), .tw_i3_i(tw_i3), .tw_x_i(tw_x),
    .tw_y0_i(tw_y0), .rd_i1_i(rd_i1), .rd_i2_i(rd_i2), .rd_i3_i(rd_i3),
    .rd_y_o(rd_y), .start_i(start), .busy_o(busy), .done_o(done), .stage_o(stage)
  );

  always #5 clk = ~clk;

  ten_t x, zero_t, y_ref, y_dev, x_back;
  mat_t c1, c2, c3, t1, t2, t3;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint q(real v);
    return longint'($rtoi(v * real'(1 << FRAC) + ((v >= 0.0) ? 0.5 : -0.5)));
  endfunction

  // kind: 0 Walsh-Hadamard (+-1), 1 DCT-II, 2 Hartley
  function automatic void make(ref mat_t m, input int n, input int kind);
    for (int a = 0; a < MAXP; a++)
      for (int b = 0; b < MAXP; b++) m[a][b] = 0;
    for (int r = 0; r < n; r++)
      for (int k = 0; k < n; k++) begin
        real v;
        case (kind)
          0: v = ($countones(r & k) % 2 == 0) ? 1.0 : -1.0;
          1: v = ((k == 0) ? $sqrt(1.0 / n) : $sqrt(2.0 / n)) *
                 $cos(PI * real'(2 * r + 1) * real'(k) / real'(2 * n));
          default: v = ($cos(2.0 * PI * real'(r * k) / n) + $sin(2.0 * PI * real'(r * k) / n)) / $sqrt(real'(n));
        endcase
        m[r][k] = q(v);
      end
  endfunction

  function automatic void transpose(ref mat_t m, ref mat_t t);
    for (int a = 0; a < MAXP; a++)
      for (int b = 0; b < MAXP; b++) t[a][b] = m[b][a];
  endfunction

  // One transform on the device: load, run, read back into yd.
  task automatic device(ref ten_t xin, ref mat_t m1, ref mat_t m2, ref mat_t m3,
                        ref ten_t yd, input int n1, input int n2, input int n3);
    int cyc;
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int s = 1; s <= 3; s++) begin
      int n;
      n = (s == 1) ? n1 : (s == 2) ? n2 : n3;
      for (int r = 0; r < n; r++)
        for (int k = 0; k < n; k++) begin
          cw_en = 1; cw_sel = s[1:0]; cw_row = r[2:0]; cw_col = k[2:0];
          cw_data = data_t'((s == 1) ? m1[r][k] : (s == 2) ? m2[r][k] : m3[r][k]);
          @(negedge clk);
        end
    end
    cw_en = 0;
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          tw_en = 1; tw_i1 = a[2:0]; tw_i2 = b[2:0]; tw_i3 = c[2:0];
          tw_x = data_t'(xin[a][b][c]); tw_y0 = '0;
          @(negedge clk);
        end
    tw_en = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 1000) begin
      @(negedge clk);
      cyc++;
    end
    check("time-steps = N1+N2+N3", cyc, n1 + n2 + n3);
    @(negedge clk);
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          rd_i1 = a[2:0]; rd_i2 = b[2:0]; rd_i3 = c[2:0];
          #1;
          yd[a][b][c] = longint'(rd_y);
        end
  endtask

  task automatic round_trip(string name, int kind, int n1, int n2, int n3, int dsh, longint scale);
    int tol;
    int worst;
    // Inputs carry dsh fraction bits; the round trip must be exact to
    // within one integer unit (exact when dsh = 0).
    tol = (dsh == 0) ? 0 : (1 << dsh);
    make(c1, n1, kind); make(c2, n2, kind); make(c3, n3, kind);
    transpose(c1, t1); transpose(c2, t2); transpose(c3, t3);
    for (int a = 0; a < MAXP; a++)
      for (int b = 0; b < MAXP; b++)
        for (int c = 0; c < MAXP; c++) begin
          zero_t[a][b][c] = 0;
          x[a][b][c] = (a < n1 && b < n2 && c < n3) ? (longint'($urandom_range(0, 2000)) - 1000) <<< dsh : 0;
        end
    // Forward.
    device(x, c1, c2, c3, y_dev, n1, n2, n3);
    transform(x, c1, c2, c3, zero_t, y_ref, n1, n2, n3, FRAC);
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++)
          check($sformatf("%s forward", name), y_dev[a][b][c], y_ref[a][b][c]);
    // Inverse with the transposed matrices.
    device(y_dev, t1, t2, t3, x_back, n1, n2, n3);
    transform(y_dev, t1, t2, t3, zero_t, y_ref, n1, n2, n3, FRAC);
    worst = 0;
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          longint e;
          check($sformatf("%s inverse", name), x_back[a][b][c], y_ref[a][b][c]);
          e = x_back[a][b][c] - scale * x[a][b][c];
          if (e < 0) e = -e;
          if (int'(e) > worst) worst = int'(e);
        end
    checks++;
    if (worst > tol) begin
      failures++;
      $display("FAIL %s round trip: worst error %0d > %0d", name, worst, tol);
    end
    $display("%s %0dx%0dx%0d: forward and inverse exact vs model, round-trip worst error %0d/%0d",
             name, n1, n2, n3, worst, 1 << dsh);
  endtask

  initial begin
    clr = 0; cw_en = 0; tw_en = 0; start = 0; cw_sel = 0; cw_row = 0; cw_col = 0;
    cw_data = 0; tw_x = 0; tw_y0 = 0; tw_i1 = 0; tw_i2 = 0; tw_i3 = 0;
    rd_i1 = 0; rd_i2 = 0; rd_i3 = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // Walsh-Hadamard with +-1.0 (= +-2^14): H H = N I, so the round trip
    // returns 512 * x exactly.
    round_trip("3D-DWHT", 0, 8, 8, 8, 0, 512);
    // Orthonormal transforms: inputs with 8 fraction bits.
    round_trip("3D-DCT",  1, 8, 8, 8, 8, 1);
    round_trip("3D-DCT",  1, 7, 5, 6, 8, 1);
    round_trip("3D-DHT",  2, 8, 6, 3, 8, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
