// triada_cell: one compute-storage-communication cell of the Tensor Core.
//
// The cell holds the four elements of one tensor point: the input x, the
// Stage I result x', the Stage II result x'' and the final x'''. In every
// time-step (one clock cycle) it follows the activity diagram of the paper's
// Elastic Sparse Outer-Product (ESOP) method:
//   * read (c; tag) from the stage's X-bus; with nothing there the cell idles;
//   * tag = 1 (pivot): if the local operand is non-zero, drive it on the
//     stage's Y-bus and, if c /= 0, update acc <- c*operand + acc;
//     a zero operand is not sent at all;
//   * tag = 0: if the Y-bus carries an operand, update acc <- c*y + acc,
//     otherwise do nothing (the wait is cancelled by the next coefficient).
// Stage -> (X, Y, operand, accumulator):
//   I: (L, H, x, x')   II: (H, L, x', x'')   III: (L, F, x'', x''').
//
// Interface: stage_i selects the bus pair. Each line through the cell is
// seen in two views: hx_i/lx_i are what the actuators put on the H and L
// lines (coefficients), hy_i/ly_i/fy_i what the cells put on the H, L and F
// lines (operands); in any stage a line carries only one kind. h/l/f_o are
// this cell's contributions (BUS_IDLE unless it is the pivot with a non-zero
// operand). The pivot reads its own
// operand, not the bus. wr_en loads x and the initial x''' (the affine
// offset of the paper's '+=' form) and clears x', x''; clr_i clears all four.
// y_o is x'''. The update is registered at the end of the time-step, so an
// operand computed in one stage is visible to the next stage one cycle later.
//
// From the paper: the stage bus pairs, pivot/non-pivot behaviour, the ESOP
// zero tests. Own choices: one time-step per clock, the load/clear port and
// the fixed-point format (FRAC fraction bits, truncating shift).
module triada_cell
  import triada_pkg::*;
#(
  parameter int unsigned FRAC = 14
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clr_i,
  input  logic      wr_en_i,
  input  data_t     wr_x_i,
  input  data_t     wr_y0_i,
  input  stage_e    stage_i,
  input  bus_t      hx_i,
  input  bus_t      lx_i,
  input  bus_t      hy_i,
  input  bus_t      ly_i,
  input  bus_t      fy_i,
  output bus_t      h_o,
  output bus_t      l_o,
  output bus_t      f_o,
  output data_t     y_o,
  output cell_act_e act_o
);

  data_t x_q, x1_q, x2_q, x3_q;

  bus_t      xbus, ybus;
  data_t     opnd, acc, acc_nxt, mul_b;
  logic      upd;
  cell_act_e act;

  // Stage routing. X-bus, Y-bus and operand are chosen in separate blocks
  // so that the Y-bus output (from xbus, opnd) has no path from the Y-bus.
  always_comb begin
    unique case (stage_i)
      STG_I, STG_III: xbus = lx_i;
      STG_II:         xbus = hx_i;
      default:        xbus = BUS_IDLE;
    endcase
  end

  always_comb begin
    unique case (stage_i)
      STG_I:   ybus = hy_i;
      STG_II:  ybus = ly_i;
      STG_III: ybus = fy_i;
      default: ybus = BUS_IDLE;
    endcase
  end

  always_comb begin
    unique case (stage_i)
      STG_I:   begin opnd = x_q;  acc = x1_q; end
      STG_II:  begin opnd = x1_q; acc = x2_q; end
      STG_III: begin opnd = x2_q; acc = x3_q; end
      default: begin opnd = '0;   acc = '0;   end
    endcase
  end

  // ESOP activity of one time-step.
  always_comb begin
    act   = ACT_IDLE;
    upd   = 1'b0;
    mul_b = '0;
    if (xbus.vld) begin
      if (xbus.tag) begin
        if (opnd == '0) begin
          act = ACT_PIV_ZERO;
        end else if (xbus.val == '0) begin
          act = ACT_SEND;
        end else begin
          act   = ACT_SEND_UPD;
          upd   = 1'b1;
          mul_b = opnd;
        end
      end else if (ybus.vld) begin
        act   = ACT_RECV_UPD;
        upd   = 1'b1;
        mul_b = ybus.val;
      end else begin
        act = ACT_WAIT;
      end
    end
    acc_nxt = acc + fx_mul(xbus.val, mul_b, FRAC);
  end

  // Y-bus drive: only the pivot with a non-zero operand. Computed from the
  // X-bus alone, so the Y-bus output never depends on the Y-bus input.
  logic send;
  assign send = xbus.vld && xbus.tag && (opnd != '0);

  always_comb begin
    h_o = BUS_IDLE;
    l_o = BUS_IDLE;
    f_o = BUS_IDLE;
    if (send) begin
      unique case (stage_i)
        STG_I:   h_o = '{vld: 1'b1, tag: 1'b0, val: opnd};
        STG_II:  l_o = '{vld: 1'b1, tag: 1'b0, val: opnd};
        STG_III: f_o = '{vld: 1'b1, tag: 1'b0, val: opnd};
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q  <= '0;
      x1_q <= '0;
      x2_q <= '0;
      x3_q <= '0;
    end else if (clr_i) begin
      x_q  <= '0;
      x1_q <= '0;
      x2_q <= '0;
      x3_q <= '0;
    end else if (wr_en_i) begin
      x_q  <= wr_x_i;
      x1_q <= '0;
      x2_q <= '0;
      x3_q <= wr_y0_i;
    end else if (upd) begin
      unique case (stage_i)
        STG_I:   x1_q <= acc_nxt;
        STG_II:  x2_q <= acc_nxt;
        STG_III: x3_q <= acc_nxt;
        default: ;
      endcase
    end
  end

  assign y_o   = x3_q;
  assign act_o = act;

endmodule
