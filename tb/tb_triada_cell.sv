// tb_triada_cell: self-checking test of one Tensor Core cell.
//
// Drives random stages, coefficient views (with and without pivot tag,
// zero and non-zero values) and operand views, loads and clears, and
// compares every time-step against a behavioural model of the cell kept in
// this testbench: the bus pairs per stage, the ESOP decisions (pivot with
// zero operand sends nothing, zero coefficient sends but does not update,
// non-pivot without operand waits) and the fixed-point multiply-add
// ((c*v) >>> FRAC, truncated to 32 bits). Checked per cycle: the three bus
// outputs, the activity code, and x''' after the clock edge; x' and x''
// are checked when a later stage sends them as pivot operands.
module tb_triada_cell;
  import triada_pkg::*;

  localparam int unsigned FRAC = 14;

  logic      clk = 1'b0;
  logic      rst_n = 1'b0;
  logic      clr;
  logic      wr_en;
  data_t     wr_x, wr_y0;
  stage_e    stage;
  bus_t      hx, lx, hy, ly, fy;
  bus_t      h_o, l_o, f_o;
  data_t     y_o;
  cell_act_e act_o;

  int checks = 0, failures = 0;
  int n_act [6];

  triada_cell #(.FRAC(FRAC)) dut (
    .clk(clk), .rst_n(rst_n), .clr_i(clr), .wr_en_i(wr_en), .wr_x_i(wr_x),
    .wr_y0_i(wr_y0), .stage_i(stage), .hx_i(hx), .lx_i(lx), .hy_i(hy),
    .ly_i(ly), .fy_i(fy), .h_o(h_o), .l_o(l_o), .f_o(f_o), .y_o(y_o),
    .act_o(act_o)
  );

  always #5 clk = ~clk;

  // Model state.
  longint m_x, m_x1, m_x2, m_x3;

  function automatic longint wrap32(longint v);
    return longint'(int'(v[31:0]));
  endfunction

  function automatic longint mulf(longint a, longint b);
    longint p;
    p = (a * b) >>> FRAC;
    return wrap32(p);
  endfunction

  function automatic data_t rnd_val();
    int r;
    r = $urandom_range(0, 9);
    if (r < 3) return '0;
    if (r < 6) return data_t'($signed($urandom_range(0, 2000)) - 1000) <<< 10;
    return data_t'($urandom);
  endfunction

  function automatic bus_t rnd_bus(bit with_tag);
    bus_t b;
    b.vld = ($urandom_range(0, 3) != 0);
    b.tag = with_tag ? ($urandom_range(0, 2) == 0) : 1'b0;
    b.val = rnd_val();
    if (!b.vld) b = BUS_IDLE;
    return b;
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

  initial begin
    clr = 0; wr_en = 0; wr_x = 0; wr_y0 = 0; stage = STG_IDLE;
    hx = BUS_IDLE; lx = BUS_IDLE; hy = BUS_IDLE; ly = BUS_IDLE; fy = BUS_IDLE;
    m_x = 0; m_x1 = 0; m_x2 = 0; m_x3 = 0;
    foreach (n_act[i]) n_act[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("y after reset", longint'(y_o), 0);

    for (int t = 0; t < 5000; t++) begin
      int sel;
      bus_t xb, yb;
      longint opnd, acc, c, exp_acc;
      bit exp_send, exp_upd;
      cell_act_e exp_act;
      @(negedge clk);
      clr = 0; wr_en = 0;
      sel = $urandom_range(0, 99);
      if (sel < 3) begin
        clr = 1;
      end else if (sel < 10) begin
        wr_en = 1;
        wr_x  = ($urandom_range(0, 3) == 0) ? '0 : rnd_val();
        wr_y0 = rnd_val();
      end
      stage = stage_e'($urandom_range(0, 3));
      hx = rnd_bus(1); lx = rnd_bus(1);
      hy = rnd_bus(0); ly = rnd_bus(0); fy = rnd_bus(0);
      #1;
      // Model of one time-step.
      xb = BUS_IDLE; yb = BUS_IDLE; opnd = 0; acc = 0;
      case (stage)
        STG_I:   begin xb = lx; yb = hy; opnd = m_x;  acc = m_x1; end
        STG_II:  begin xb = hx; yb = ly; opnd = m_x1; acc = m_x2; end
        STG_III: begin xb = lx; yb = fy; opnd = m_x2; acc = m_x3; end
        default: ;
      endcase
      c = longint'(xb.val);
      exp_send = 0; exp_upd = 0; exp_acc = acc; exp_act = ACT_IDLE;
      if (stage != STG_IDLE && xb.vld) begin
        if (xb.tag) begin
          if (opnd == 0) exp_act = ACT_PIV_ZERO;
          else begin
            exp_send = 1;
            if (c == 0) exp_act = ACT_SEND;
            else begin exp_act = ACT_SEND_UPD; exp_upd = 1; exp_acc = wrap32(acc + mulf(c, opnd)); end
          end
        end else if (yb.vld) begin
          exp_act = ACT_RECV_UPD; exp_upd = 1;
          exp_acc = wrap32(acc + mulf(c, longint'(yb.val)));
        end else exp_act = ACT_WAIT;
      end
      check("act", longint'(act_o), longint'(exp_act));
      n_act[int'(act_o)]++;
      check("h_o.vld", longint'(h_o.vld), longint'(exp_send && stage == STG_I));
      check("l_o.vld", longint'(l_o.vld), longint'(exp_send && stage == STG_II));
      check("f_o.vld", longint'(f_o.vld), longint'(exp_send && stage == STG_III));
      if (exp_send) begin
        case (stage)
          STG_I:   check("h_o.val (x)",   longint'(h_o.val), opnd);
          STG_II:  check("l_o.val (x')",  longint'(l_o.val), opnd);
          STG_III: check("f_o.val (x'')", longint'(f_o.val), opnd);
          default: ;
        endcase
      end
      // State update, with the load/clear priority of the design.
      if (clr) begin m_x = 0; m_x1 = 0; m_x2 = 0; m_x3 = 0; end
      else if (wr_en) begin m_x = longint'(wr_x); m_x1 = 0; m_x2 = 0; m_x3 = longint'(wr_y0); end
      else if (exp_upd) begin
        case (stage)
          STG_I:   m_x1 = exp_acc;
          STG_II:  m_x2 = exp_acc;
          STG_III: m_x3 = exp_acc;
          default: ;
        endcase
      end
      @(posedge clk);
      #1;
      check("y_o (x''')", longint'(y_o), m_x3);
    end

    // Every ESOP activity must have happened.
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (n_act[i] == 0) begin
        failures++;
        $display("FAIL activity %0d never seen", i);
      end
    end
    $display("activity counts idle=%0d send_upd=%0d send=%0d piv_zero=%0d recv_upd=%0d wait=%0d",
             n_act[0], n_act[1], n_act[2], n_act[3], n_act[4], n_act[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
