// triada_top: TriADA, a Trilinear Algorithm/accelerator Device Architecture.
//
// Computes the separable 3D transform (3-mode matrix-by-tensor multiply-add)
//   Y[k1][k2][k3] += sum_{n1,n2,n3} X[n1][n2][n3] C1[n1][k1] C2[n2][k2] C3[n3][k3]
// for any N1 x N2 x N3 tensor with Ns <= Ps, in three chained stages of
// rank-1 (outer-product) updates, one per time-step (= one clock cycle):
//   Stage I   (N3 steps): x'   += x-column (x) C3 row,   actuator x3 on L lines
//   Stage II  (N1 steps): x''  += C1^T column (x) x'-row, actuator x1 on H lines
//   Stage III (N2 steps): x''' += x''-column (x) C2 row, actuator x2 on L lines
// The tensor stays in the Tensor Core; the actuators stream coefficient
// vectors and hand control on: x3 -> x1 -> x2. A dense transform takes
// N1+N2+N3 steps; an all-zero coefficient vector costs no step.
//
// Interface:
//   clr_i          zero every cell and every actuator memory (one cycle).
//   cw_*           write coefficient cw_data_i into actuator cw_sel_i
//                  (1: x1, 2: x2, 3: x3) at row cw_row_i (the time-step),
//                  column cw_col_i (the channel). Load C3 and C2 as they are
//                  (row n = row n of C); load C1 as well as it is, which makes
//                  row n1 of the x1 memory the column n1 of C1^T.
//   tw_*           write x and the initial value of x''' into cell
//                  (tw_i1_i, tw_i2_i, tw_i3_i); this also clears x', x''.
//   rd_*           read x''' of one cell (combinational).
//   start_i        start a transform (ignored while busy_o).
//   busy_o/done_o  busy from the cycle after start_i up to done_o, a one-cycle
//                  pulse in the cycle of the last Stage III update.
//   stage_o        stage of the current time-step.
// Writes must not be issued while busy_o is high.
//
// From the paper: the stage order, bus pairs, tags, hand-off and the
// ESOP skipping. Own choices: data format (triada_pkg::DATA_W bits, FRAC
// fraction bits), the host ports, the array size defaults (8 x 8 x 8; the
// paper gives no size).
module triada_top
  import triada_pkg::*;
#(
  parameter int unsigned P1   = 8,
  parameter int unsigned P2   = 8,
  parameter int unsigned P3   = 8,
  parameter int unsigned FRAC = 14,
  localparam int unsigned PM  = (P1 > P2) ? ((P1 > P3) ? P1 : P3) : ((P2 > P3) ? P2 : P3),
  localparam int unsigned IW  = $clog2(PM)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clr_i,
  input  logic                  cw_en_i,
  input  logic [1:0]            cw_sel_i,
  input  logic [IW-1:0]         cw_row_i,
  input  logic [IW-1:0]         cw_col_i,
  input  data_t                 cw_data_i,
  input  logic                  tw_en_i,
  input  logic [$clog2(P1)-1:0] tw_i1_i,
  input  logic [$clog2(P2)-1:0] tw_i2_i,
  input  logic [$clog2(P3)-1:0] tw_i3_i,
  input  data_t                 tw_x_i,
  input  data_t                 tw_y0_i,
  input  logic [$clog2(P1)-1:0] rd_i1_i,
  input  logic [$clog2(P2)-1:0] rd_i2_i,
  input  logic [$clog2(P3)-1:0] rd_i3_i,
  output data_t                 rd_y_o,
  input  logic                  start_i,
  output logic                  busy_o,
  output logic                  done_o,
  output stage_e                stage_o
);

  bus_t      ch1 [P1];
  bus_t      ch2 [P2];
  bus_t      ch3 [P3];
  logic      busy1, busy2, busy3;
  logic      pass1, pass2, pass3;
  logic      go;
  logic      busy_q;
  stage_e    stage;
  // Per-cell ESOP activity of the current time-step; not used by the logic,
  // kept for observation (simulation, debug taps).
  cell_act_e cell_act [P1][P2][P3];

  assign go = start_i && !busy_q;

  // Lateral Actuator (x3): Stage I, C3, P3 channels.
  triada_actuator #(.P(P3)) u_act3 (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr_i     (clr_i),
    .wr_en_i   (cw_en_i && cw_sel_i == 2'd3),
    .wr_row_i  ($clog2(P3)'(cw_row_i)),
    .wr_col_i  ($clog2(P3)'(cw_col_i)),
    .wr_data_i (cw_data_i),
    .start_i   (go),
    .busy_o    (busy3),
    .pass_o    (pass3),
    .ch_o      (ch3)
  );

  // Horizontal Actuator (x1): Stage II, C1^T, P1 channels.
  triada_actuator #(.P(P1)) u_act1 (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr_i     (clr_i),
    .wr_en_i   (cw_en_i && cw_sel_i == 2'd1),
    .wr_row_i  ($clog2(P1)'(cw_row_i)),
    .wr_col_i  ($clog2(P1)'(cw_col_i)),
    .wr_data_i (cw_data_i),
    .start_i   (pass3),
    .busy_o    (busy1),
    .pass_o    (pass1),
    .ch_o      (ch1)
  );

  // Actuator x2: Stage III, C2, P2 channels, drives the L lines.
  triada_actuator #(.P(P2)) u_act2 (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr_i     (clr_i),
    .wr_en_i   (cw_en_i && cw_sel_i == 2'd2),
    .wr_row_i  ($clog2(P2)'(cw_row_i)),
    .wr_col_i  ($clog2(P2)'(cw_col_i)),
    .wr_data_i (cw_data_i),
    .start_i   (pass1),
    .busy_o    (busy2),
    .pass_o    (pass2),
    .ch_o      (ch2)
  );

  // The stage is the actuator that streams in this time-step.
  always_comb begin
    if (busy3)      stage = STG_I;
    else if (busy1) stage = STG_II;
    else if (busy2) stage = STG_III;
    else            stage = STG_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      busy_q <= 1'b0;
    else if (clr_i)  busy_q <= 1'b0;
    else if (go)     busy_q <= 1'b1;
    else if (pass2)  busy_q <= 1'b0;
  end

  triada_tensor_core #(.P1(P1), .P2(P2), .P3(P3), .FRAC(FRAC)) u_core (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr_i   (clr_i),
    .stage_i (stage),
    .act1_i  (ch1),
    .act2_i  (ch2),
    .act3_i  (ch3),
    .wr_en_i (tw_en_i),
    .wr_i1_i (tw_i1_i),
    .wr_i2_i (tw_i2_i),
    .wr_i3_i (tw_i3_i),
    .wr_x_i  (tw_x_i),
    .wr_y0_i (tw_y0_i),
    .rd_i1_i (rd_i1_i),
    .rd_i2_i (rd_i2_i),
    .rd_i3_i (rd_i3_i),
    .rd_y_o  (rd_y_o),
    .act_o   (cell_act)
  );

  assign busy_o  = busy_q;
  assign done_o  = pass2 && busy_q;
  assign stage_o = stage;

  // Control hand-off: never two actuators streaming at once.
  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({busy1, busy2, busy3}))
    else $error("more than one actuator streaming");
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy_q |-> !(cw_en_i || tw_en_i))
    else $error("host write while busy");

endmodule
