// triada_actuator: Decoupled Active Streaming Memory (DASM), or Actuator.
//
// Holds one square P x P coefficient matrix and, once started, streams one
// coefficient vector per time-step on its P channels, every channel feeding
// a whole plane of operand lines of the Tensor Core. Row r of the memory is
// the vector of time-step r: channel k carries mem[r][k]. (For the Stage II
// actuator the host therefore loads C1 so that row n1 is the column c(n1)
// of C1^T, as in the paper.)
//
// Tags: the diagonal element of a streamed vector (channel k = r) is the
// pivot and carries tag = 1. ESOP rules of the paper:
//   * a non-pivot coefficient equal to 0 is not sent (channel idle);
//   * the pivot is sent even when its value is 0, so that the pivot cells
//     still multicast their operand;
//   * an all-zero vector is skipped without spending a time-step.
// Skipping makes the actuator independent of the problem size: rows and
// columns beyond N are zero, so only N (or fewer) vectors are ever sent.
//
// Control: start_i (while idle) begins streaming with the first non-zero
// row; busy_o is high while vectors are on the channels; pass_o pulses in
// the cycle of the last vector (or, for an all-zero matrix, the cycle after
// start_i) and is meant to start the next actuator, which then streams its
// first vector in the next cycle with no bubble. The memory is written
// through wr_* one word per cycle and is not consumed by streaming, so the
// same matrix serves any number of tensors.
//
// From the paper: channel count, diagonal tags, zero skipping, control
// hand-off. Own choices: the tags are computed from the row index and the
// row's non-zero flag instead of being stored, the write port, the indexed
// (rather than rotating) read of the drum memory.
module triada_actuator
  import triada_pkg::*;
#(
  parameter int unsigned P = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr_i,
  input  logic                 wr_en_i,
  input  logic [$clog2(P)-1:0] wr_row_i,
  input  logic [$clog2(P)-1:0] wr_col_i,
  input  data_t                wr_data_i,
  input  logic                 start_i,
  output logic                 busy_o,
  output logic                 pass_o,
  output bus_t                 ch_o [P]
);

  localparam int unsigned IW = $clog2(P);

  data_t          mem   [P][P];
  logic [P-1:0]   row_nz;
  logic           active_q, empty_q;
  logic [IW-1:0]  row_q;

  // Non-zero flag of each row.
  always_comb begin
    for (int r = 0; r < int'(P); r++) begin
      row_nz[r] = 1'b0;
      for (int k = 0; k < int'(P); k++)
        if (mem[r][k] != '0) row_nz[r] = 1'b1;
    end
  end

  // First non-zero row at or after 'from'.
  logic          first_hit, next_hit;
  logic [IW-1:0] first_row, next_row;

  always_comb begin
    first_hit = 1'b0;
    first_row = '0;
    for (int r = int'(P) - 1; r >= 0; r--) begin
      if (row_nz[r]) begin
        first_hit = 1'b1;
        first_row = IW'(r);
      end
    end
    next_hit = 1'b0;
    next_row = '0;
    for (int r = int'(P) - 1; r >= 0; r--) begin
      if (row_nz[r] && (r > int'(row_q))) begin
        next_hit = 1'b1;
        next_row = IW'(r);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      empty_q  <= 1'b0;
      row_q    <= '0;
    end else if (clr_i) begin
      active_q <= 1'b0;
      empty_q  <= 1'b0;
      row_q    <= '0;
    end else begin
      empty_q <= 1'b0;
      if (!active_q) begin
        if (start_i) begin
          active_q <= first_hit;
          empty_q  <= !first_hit;
          row_q    <= first_row;
        end
      end else if (next_hit) begin
        row_q <= next_row;
      end else begin
        active_q <= 1'b0;
      end
    end
  end

  // Coefficient memory: no reset, cleared by clr_i like a RAM being zeroed.
  always_ff @(posedge clk) begin
    if (clr_i) begin
      for (int r = 0; r < int'(P); r++)
        for (int k = 0; k < int'(P); k++)
          mem[r][k] <= '0;
    end else if (wr_en_i) begin
      mem[wr_row_i][wr_col_i] <= wr_data_i;
    end
  end

  // Channel outputs of the current vector.
  always_comb begin
    for (int k = 0; k < int'(P); k++) begin
      ch_o[k] = BUS_IDLE;
      if (active_q) begin
        ch_o[k].tag = (IW'(k) == row_q);
        ch_o[k].val = mem[row_q][k];
        ch_o[k].vld = ch_o[k].tag || (mem[row_q][k] != '0);
      end
    end
  end

  assign busy_o = active_q;
  assign pass_o = (active_q && !next_hit) || empty_q;

  // The memory must not change under a running stream.
  a_no_write_while_streaming: assert property (
    @(posedge clk) disable iff (!rst_n) !(active_q && wr_en_i))
    else $error("actuator written while streaming");
  a_no_zero_vector: assert property (
    @(posedge clk) disable iff (!rst_n) !active_q || row_nz[row_q])
    else $error("actuator streams an all-zero vector");

endmodule
