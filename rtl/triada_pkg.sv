// triada_pkg: types and constants shared by the TriADA blocks.
//
// The device computes a separable 3D transform (3-mode matrix-by-tensor
// multiply-add) in three stages. Each stage pairs an X-bus, which carries a
// tagged coefficient from an actuator, with an orthogonal Y-bus, which
// carries the operand multicast by the pivot cell:
//   Stage I   : X = lateral (L), Y = horizontal (H), x    -> x'   (sum over n3)
//   Stage II  : X = horizontal (H), Y = lateral (L), x'   -> x''  (sum over n1)
//   Stage III : X = lateral (L), Y = frontal (F),    x''  -> x''' (sum over n2)
// The bus pairs follow the paper. The word width and the fixed-point format
// are this design's choice: the paper names no number format.
package triada_pkg;

  // Width of every data word: tensor elements, coefficients, accumulators.
  parameter int unsigned DATA_W = 32;

  typedef logic signed [DATA_W-1:0] data_t;

  // Processing stage, i.e. which actuator currently owns the X-buses.
  typedef enum logic [1:0] {
    STG_IDLE = 2'd0,
    STG_I    = 2'd1,
    STG_II   = 2'd2,
    STG_III  = 2'd3
  } stage_e;

  // One operand line (H, L or F). On an X-bus tag marks the pivot
  // coefficient; on a Y-bus tag is unused (0).
  typedef struct packed {
    logic  vld;
    logic  tag;
    data_t val;
  } bus_t;

  localparam bus_t BUS_IDLE = '{vld: 1'b0, tag: 1'b0, val: '0};

  // What a cell did in one time-step (paper Fig. 6).
  typedef enum logic [2:0] {
    ACT_IDLE     = 3'd0, // no coefficient on the X-bus
    ACT_SEND_UPD = 3'd1, // pivot: sent its operand, updated (c /= 0)
    ACT_SEND     = 3'd2, // pivot: sent its operand, c = 0 so no update
    ACT_PIV_ZERO = 3'd3, // pivot with local operand 0: sends nothing
    ACT_RECV_UPD = 3'd4, // non-pivot: received the operand, updated
    ACT_WAIT     = 3'd5  // non-pivot: nothing on the Y-bus, wait cancelled
  } cell_act_e;

  // Fixed-point multiply: (a*b) >>> frac, truncated to DATA_W bits.
  function automatic data_t fx_mul(data_t a, data_t b, int unsigned frac);
    logic signed [2*DATA_W-1:0] p;
    p = (2*DATA_W)'(a) * (2*DATA_W)'(b);
    p = p >>> frac;
    return data_t'(p[DATA_W-1:0]);
  endfunction

endpackage
