// tb_triada_actuator: self-checking test of the streaming coefficient memory.
//
// Loads random P x P matrices in which whole rows and single elements are
// zero (and, once, an all-zero matrix), starts the stream and checks, cycle
// by cycle, against a list of expected vectors built here from the loaded
// matrix: only the non-zero rows are streamed, in increasing order, one per
// cycle; on every channel the pivot (channel = row) carries tag 1 and is
// valid even when zero, other channels are valid only when non-zero; pass_o
// pulses with the last vector (or one cycle after start for an all-zero
// matrix). The run length in cycles must equal the number of non-zero rows.
// Each matrix is streamed twice to check the memory is not consumed.
module tb_triada_actuator;
  import triada_pkg::*;

  localparam int unsigned P = 8;

  logic                 clk = 1'b0;
  logic                 rst_n = 1'b0;
  logic                 clr, wr_en, start, busy, pass;
  logic [$clog2(P)-1:0] wr_row, wr_col;
  data_t                wr_data;
  bus_t                 ch [P];

  int checks = 0, failures = 0;
  int n_skipped = 0, n_zero_pivot = 0, n_empty = 0;

  triada_actuator #(.P(P)) dut (
    .clk(clk), .rst_n(rst_n), .clr_i(clr), .wr_en_i(wr_en), .wr_row_i(wr_row),
    .wr_col_i(wr_col), .wr_data_i(wr_data), .start_i(start), .busy_o(busy),
    .pass_o(pass), .ch_o(ch)
  );

  always #5 clk = ~clk;

  data_t m [P][P];

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(bit all_zero);
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int r = 0; r < int'(P); r++) begin
      bit zrow;
      zrow = all_zero || ($urandom_range(0, 3) == 0);
      for (int k = 0; k < int'(P); k++) begin
        if (zrow || $urandom_range(0, 2) == 0) m[r][k] = '0;
        else m[r][k] = data_t'($urandom);
        // Leave zeros unwritten half of the time: clr must have zeroed them.
        if (m[r][k] != '0 || $urandom_range(0, 1) == 0) begin
          wr_en = 1; wr_row = r[$clog2(P)-1:0]; wr_col = k[$clog2(P)-1:0]; wr_data = m[r][k];
          @(negedge clk);
        end
      end
    end
    wr_en = 0;
  endtask

  task automatic run_stream();
    int rows [$];
    int cyc;
    rows = {};
    for (int r = 0; r < int'(P); r++) begin
      bit nz;
      nz = 0;
      for (int k = 0; k < int'(P); k++) if (m[r][k] != '0) nz = 1;
      if (nz) rows.push_back(r);
      else n_skipped++;
      if (nz && m[r][r] == '0) n_zero_pivot++;
    end
    @(negedge clk);
    check("idle before start", longint'(busy), 0);
    start = 1;
    @(negedge clk);
    start = 0;
    if (rows.size() == 0) begin
      n_empty++;
      check("empty: busy", longint'(busy), 0);
      check("empty: pass", longint'(pass), 1);
      @(negedge clk);
      check("empty: pass once", longint'(pass), 0);
      return;
    end
    cyc = 0;
    foreach (rows[i]) begin
      int r;
      r = rows[i];
      check("busy", longint'(busy), 1);
      check("pass", longint'(pass), longint'(i == rows.size() - 1));
      for (int k = 0; k < int'(P); k++) begin
        check("tag", longint'(ch[k].tag), longint'(k == r));
        check("vld", longint'(ch[k].vld), longint'((k == r) || (m[r][k] != '0)));
        if (ch[k].vld) check("val", longint'(ch[k].val), longint'(m[r][k]));
      end
      // A start pulse while streaming must be ignored.
      start = (i == 0);
      @(negedge clk);
      start = 0;
      cyc++;
    end
    check("busy after stream", longint'(busy), 0);
    check("cycles = non-zero rows", longint'(cyc), longint'(rows.size()));
    for (int k = 0; k < int'(P); k++) check("idle channel", longint'(ch[k].vld), 0);
  endtask

  initial begin
    clr = 0; wr_en = 0; start = 0; wr_row = 0; wr_col = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 40; it++) begin
      load(it == 5);
      run_stream();
      run_stream();
    end
    checks++;
    if (n_skipped == 0 || n_zero_pivot == 0 || n_empty == 0) begin
      failures++;
      $display("FAIL coverage: skipped=%0d zero_pivot=%0d empty=%0d", n_skipped, n_zero_pivot, n_empty);
    end
    $display("skipped rows=%0d zero pivots=%0d empty matrices=%0d", n_skipped, n_zero_pivot, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
