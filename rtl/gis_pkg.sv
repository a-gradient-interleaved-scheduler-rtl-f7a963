// gis_pkg: shared number formats and bundle types of the gradient-interleaved
// backpropagation engine.
//
// Operands (weights w, activations a, errors delta) are DATA_W-bit signed
// fixed-point numbers with FRAC fractional bits (Q8.8 by default). Products and
// the values that travel up a column (partial sums of W^T*delta, the gradient
// accumulators G) are ACC_W-bit signed numbers with 2*FRAC fractional bits
// (Q16.16). The number format is this design's choice; the source describes
// the dataflow but gives no word widths.
package gis_pkg;

  localparam int unsigned DATA_W = 16;  // operand width (assumed)
  localparam int unsigned FRAC   = 8;   // fractional bits of an operand (assumed)
  localparam int unsigned ACC_W  = 32;  // accumulator / vertical link width (assumed)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // What moves west to east through a row: one delta value plus the tag that
  // selects what each PE does with it. os = 1 is the output-stationary step
  // (G += delta * a), os = 0 the weight-stationary step (res = res_in + delta * w).
  typedef struct packed {
    logic  valid;
    logic  os;
    data_t delta;
  } hbus_t;

  localparam int unsigned HBUS_W = $bits(hbus_t);

  // Top-level operations of the scheduler.
  typedef enum logic [0:0] {
    OP_TRAIN = 1'b0,  // load W, interleave delta^(l-1) and G^(l) over a batch, update W
    OP_SHIFT = 1'b1   // only shift the weight chain Q places (load and/or unload)
  } op_e;

endpackage
