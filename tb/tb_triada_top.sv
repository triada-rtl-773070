// tb_triada_top: end-to-end test of the TriADA device at its default size.
//
// Runs complete 3D transforms through the host ports, with no parameter
// overrides (8 x 8 x 8 cells, 14 fraction bits):
//   * dense problems filling the array and smaller ones (5 x 3 x 7, ...),
//   * sparse tensors and coefficient matrices with all-zero rows,
//   * an all-zero C3 (Stage I skipped entirely),
//   * a nonzero initial output (the affine '+=' form),
//   * a start pulse while busy (must be ignored),
//   * 50 % and 90 % of all tensor and coefficient values zero (the range
//     of sparsity that motivates the zero-skipping scheme).
// For every run the number of multiply-adds the cells perform is compared
// with the number of (operand != 0, coefficient != 0) pairs of the problem,
// so no cell may compute with a zero and none may miss a product.
// Each result tensor is read back and compared with triada_ref_pkg. The
// run time is checked: the number of streamed time-steps must equal the
// number of non-zero rows of C3, C1 and C2 (N1+N2+N3 when dense), done_o
// must come exactly that many cycles after start, and the stages must
// follow in the order I, II, III. Mechanisms counted (each must occur):
// stage hand-offs, skipped all-zero vectors, empty stage, pivot with zero
// operand, pivot with zero coefficient, cancelled waits, start-while-busy.
module tb_triada_top;
  import triada_pkg::*;
  import triada_ref_pkg::*;

  localparam int P1 = 8, P2 = 8, P3 = 8;
  localparam int FRAC = 14;
  localparam int IW = 3;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        clr, cw_en, tw_en, start, busy, done;
  logic [1:0]  cw_sel;
  logic [IW-1:0] cw_row, cw_col;
  data_t       cw_data, tw_x, tw_y0, rd_y;
  logic [2:0]  tw_i1, tw_i2, tw_i3, rd_i1, rd_i2, rd_i3;
  stage_e      stage;

  int checks = 0, failures = 0;
  int n_handoff = 0, n_skip = 0, n_empty_stage = 0, n_busy_start = 0;
  int n_act [6];

  triada_top dut (
    .clk(clk), .rst_n(rst_n), .clr_i(clr), .cw_en_i(cw_en), .cw_sel_i(cw_sel),
    .cw_row_i(cw_row), .cw_col_i(cw_col), .cw_data_i(cw_data), .tw_en_i(tw_en),
    .tw_i1_i(tw_i1), .tw_i2_i(tw_i2), .tw_i3_i(tw_i3), .tw_x_i(tw_x),
    .tw_y0_i(tw_y0), .rd_i1_i(rd_i1), .rd_i2_i(rd_i2), .rd_i3_i(rd_i3),
    .rd_y_o(rd_y), .start_i(start), .busy_o(busy), .done_o(done), .stage_o(stage)
  );

  always #5 clk = ~clk;

  ten_t x, y0, y;
  mat_t c1, c2, c3;

  // Cell activity, observed inside the device.
  always @(posedge clk) begin
    if (rst_n)
      for (int a = 0; a < P1; a++)
        for (int b = 0; b < P2; b++)
          for (int c = 0; c < P3; c++)
            n_act[int'(dut.cell_act[a][b][c])]++;
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
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int nz_rows(ref mat_t m, input int n);
    int cnt;
    cnt = 0;
    for (int r = 0; r < n; r++) begin
      bit nz;
      nz = 0;
      for (int k = 0; k < n; k++) if (m[r][k] != 0) nz = 1;
      cnt += nz;
    end
    return cnt;
  endfunction

  task automatic write_coef(int sel, ref mat_t m, input int n);
    for (int r = 0; r < n; r++)
      for (int k = 0; k < n; k++) begin
        cw_en = 1; cw_sel = sel[1:0]; cw_row = r[IW-1:0]; cw_col = k[IW-1:0];
        cw_data = data_t'(m[r][k]);
        @(negedge clk);
      end
    cw_en = 0;
  endtask

  // kind: 0 dense, 1 sparse with zero rows, 2 C3 all zero,
  //       3 half of all values zero, 4 nine tenths of all values zero
  task automatic run(int n1, int n2, int n3, int kind, bit poke_start);
    int zr, zx, exp_steps, steps, cyc, s1, s2, s3, upd0;
    longint exp_upd;
    stage_e prev;
    zr = (kind == 0) ? 0 : (kind == 3) ? 50 : (kind == 4) ? 90 : 25;
    zx = (kind == 0) ? 0 : (kind == 3) ? 50 : (kind == 4) ? 90 : 40;
    for (int a = 0; a < MAXP; a++)
      for (int b = 0; b < MAXP; b++) begin
        c1[a][b] = 0; c2[a][b] = 0; c3[a][b] = 0;
        for (int c = 0; c < MAXP; c++) begin x[a][b][c] = 0; y0[a][b][c] = 0; end
      end
    for (int a = 0; a < n1; a++) begin
      bit zrow;
      zrow = (kind == 1 || kind == 2) && ($urandom_range(0, 3) == 0);
      for (int b = 0; b < n1; b++) c1[a][b] = zrow ? 0 : rnd_sparse(zr, 1 << 14);
    end
    for (int a = 0; a < n2; a++) begin
      bit zrow;
      zrow = (kind == 1 || kind == 2) && ($urandom_range(0, 3) == 0);
      for (int b = 0; b < n2; b++) c2[a][b] = zrow ? 0 : rnd_sparse(zr, 1 << 14);
    end
    for (int a = 0; a < n3; a++) begin
      bit zrow;
      zrow = (kind == 2) || ((kind == 1) && ($urandom_range(0, 3) == 0));
      for (int b = 0; b < n3; b++) c3[a][b] = zrow ? 0 : rnd_sparse(zr, 1 << 14);
    end
    if (kind == 0)  // dense: no zero anywhere
      for (int a = 0; a < n1; a++) begin
        for (int b = 0; b < n1; b++) if (c1[a][b] == 0) c1[a][b] = 1;
      end
    if (kind == 0) begin
      for (int a = 0; a < n2; a++) for (int b = 0; b < n2; b++) if (c2[a][b] == 0) c2[a][b] = 1;
      for (int a = 0; a < n3; a++) for (int b = 0; b < n3; b++) if (c3[a][b] == 0) c3[a][b] = 1;
    end
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          x[a][b][c]  = rnd_sparse(zx, 3000);
          if (kind == 0 && x[a][b][c] == 0) x[a][b][c] = 1;
          y0[a][b][c] = rnd_sparse(50, 3000);
        end
    transform(x, c1, c2, c3, y0, y, n1, n2, n3, FRAC);
    exp_upd = mac_count(x, c1, c2, c3, n1, n2, n3, FRAC);
    exp_steps = nz_rows(c3, n3) + nz_rows(c1, n1) + nz_rows(c2, n2);
    n_skip += (n3 - nz_rows(c3, n3)) + (n1 - nz_rows(c1, n1)) + (n2 - nz_rows(c2, n2));
    if (nz_rows(c3, n3) == 0) n_empty_stage++;

    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    write_coef(1, c1, n1);
    write_coef(2, c2, n2);
    write_coef(3, c3, n3);
    for (int a = 0; a < n1; a++)
      for (int b = 0; b < n2; b++)
        for (int c = 0; c < n3; c++) begin
          tw_en = 1; tw_i1 = a[2:0]; tw_i2 = b[2:0]; tw_i3 = c[2:0];
          tw_x = data_t'(x[a][b][c]); tw_y0 = data_t'(y0[a][b][c]);
          @(negedge clk);
        end
    tw_en = 0;

    upd0 = n_act[ACT_SEND_UPD] + n_act[ACT_RECV_UPD];
    start = 1;
    @(negedge clk);
    start = 0;
    check("busy after start", longint'(busy), 1);
    steps = 0; cyc = 1; s1 = 0; s2 = 0; s3 = 0; prev = STG_IDLE;
    while (!done) begin
      case (stage)
        STG_I:   s1++;
        STG_II:  s2++;
        STG_III: s3++;
        default: ;
      endcase
      if (stage != STG_IDLE) steps++;
      checks++;
      if (stage < prev && stage != STG_IDLE) begin
        failures++;
        $display("FAIL stage order: %s after %s", stage.name(), prev.name());
      end
      if (stage != prev && prev != STG_IDLE && stage != STG_IDLE) n_handoff++;
      if (stage != STG_IDLE) prev = stage;
      if (poke_start && cyc == 3) begin
        start = 1;
        n_busy_start++;
      end
      @(negedge clk);
      start = 0;
      cyc++;
      if (cyc > 1000) break;
    end
    // The cycle with done_o is the last Stage III step.
    if (stage == STG_III) begin steps++; s3++; end
    if (stage != prev && prev != STG_IDLE && stage != STG_IDLE) n_handoff++;
    check("stage I steps",   s1, nz_rows(c3, n3));
    check("stage II steps",  s2, nz_rows(c1, n1));
    check("stage III steps", s3, nz_rows(c2, n2));
    check("time-steps", steps, exp_steps);
    // An all-zero matrix still costs its actuator one cycle to pass control on.
    check("cycles start->done", cyc, exp_steps + int'(nz_rows(c3, n3) == 0)
          + int'(nz_rows(c1, n1) == 0) + int'(nz_rows(c2, n2) == 0));
    @(negedge clk);
    check("idle after done", longint'(busy), 0);
    check("stage idle after done", longint'(stage), longint'(STG_IDLE));
    check("multiply-adds", longint'(n_act[ACT_SEND_UPD] + n_act[ACT_RECV_UPD] - upd0), exp_upd);
    $display("run %0dx%0dx%0d kind %0d: %0d time-steps, %0d multiply-adds (dense: %0d)",
             n1, n2, n3, kind, steps, exp_upd, n1 * n2 * n3 * (n1 + n2 + n3));

    for (int a = 0; a < P1; a++)
      for (int b = 0; b < P2; b++)
        for (int c = 0; c < P3; c++) begin
          rd_i1 = a[2:0]; rd_i2 = b[2:0]; rd_i3 = c[2:0];
          #1;
          check($sformatf("y[%0d][%0d][%0d]", a, b, c), longint'(rd_y),
                (a < n1 && b < n2 && c < n3) ? y[a][b][c] : 0);
        end
  endtask

  initial begin
    clr = 0; cw_en = 0; tw_en = 0; start = 0; cw_sel = 0; cw_row = 0; cw_col = 0;
    cw_data = 0; tw_x = 0; tw_y0 = 0; tw_i1 = 0; tw_i2 = 0; tw_i3 = 0;
    rd_i1 = 0; rd_i2 = 0; rd_i3 = 0;
    foreach (n_act[i]) n_act[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;

    run(P1, P2, P3, 0, 1'b0);   // dense, full array: N1+N2+N3 = 24 steps
    run(P1, P2, P3, 1, 1'b1);   // sparse, start poked while busy
    run(5, 3, 7, 0, 1'b0);      // dense, smaller problem
    run(6, 8, 4, 1, 1'b0);      // sparse, smaller problem
    run(P1, P2, P3, 2, 1'b0);   // C3 all zero: Stage I skipped
    run(P1, P2, P3, 1, 1'b0);
    run(P1, P2, P3, 3, 1'b0);   // 50 % zeros
    run(P1, P2, P3, 4, 1'b0);   // 90 % zeros
    run(7, 5, 6, 4, 1'b0);

    begin
      static string nm [6] = '{"idle", "send_upd", "send_zero_coef", "pivot_zero_operand", "recv_upd", "wait_cancelled"};
      for (int i = 1; i < 6; i++) begin
        checks++;
        if (n_act[i] == 0) begin failures++; $display("FAIL never seen: %s", nm[i]); end
        $display("cell activity %-20s %0d", nm[i], n_act[i]);
      end
    end
    checks++;
    if (n_handoff == 0 || n_skip == 0 || n_empty_stage == 0 || n_busy_start == 0) begin
      failures++;
      $display("FAIL mechanism not exercised");
    end
    $display("hand-offs=%0d skipped zero vectors=%0d empty stages=%0d start-while-busy=%0d",
             n_handoff, n_skip, n_empty_stage, n_busy_start);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
