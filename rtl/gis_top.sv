// gis_top: gradient-interleaved backpropagation engine for one fully-connected
// layer tile.
//
// For a layer z = W a with an error delta^(l) at its outputs, the engine computes
// in one pass over a mini-batch of B samples both
//   dE/da^(l-1) = W^T delta^(l)          (weight-stationary use of the array)
//   G^T         = a^(l-1) delta^(l)T     (output-stationary use of the array)
// by alternating the two on every cycle in the same P x Q array, then updates W
// in place with G. Each delta vector is read once and serves both products, and
// G never leaves the array.
//
// Blocks: gis_scheduler (phases), gis_edge_feeder (OS/WS interleaving of the
// edge streams), two gis_skew staircases (west: Q rows, south: P columns), the
// gis_array of gis_pe, and a reversing gis_skew that re-aligns the north outputs.
//
// Interface (all vectors packed, element i = row or column i):
//   start/op/batch/lr_shift -> busy, done     see gis_scheduler
//   w_req: P weights must be on w_in this same cycle; element x of the k-th
//     word (k = 0..Q-1) ends in row Q-1-k, i.e. w(x, Q-1-k) = W(Q-1-k, x).
//     While w_req is high, w_out carries the weights that leave row Q-1 (row
//     Q-1-k on the k-th cycle): the updated weights of the previous operation.
//   xd_req: delta_in (Q values, delta^(l) of the next sample) and a_in
//     (P values, a^(l-1) of the same sample) must be valid this same cycle.
//   grad_valid: grad_out holds dE/da^(l-1) of one sample (P values, Q16.16),
//     samples in issue order; each is the sum over this tile's Q rows only.
// Latency: a sample's grad_out appears P+Q cycles after its xd_req cycle, and
// all B results have left by the UPDATE cycle, so done follows the last one.
// Follows the source: the array, the two modes, the interleaving, the edge
// staggering and in-place update. This design's own choices: the number
// format, the request interface, the weight-chain ordering and SGD as the
// update rule.
module gis_top
  import gis_pkg::*;
#(
  parameter int unsigned P = 128,   // columns: 128x128 array of the evaluation
  parameter int unsigned Q = 128    // rows
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  op_e                op,
  input  logic [15:0]        batch,
  input  logic [4:0]         lr_shift,
  output logic               busy,
  output logic               done,
  output logic               w_req,
  input  data_t [P-1:0]      w_in,
  output data_t [P-1:0]      w_out,
  output logic               xd_req,
  input  data_t [Q-1:0]      delta_in,
  input  data_t [P-1:0]      a_in,
  output logic               grad_valid,
  output acc_t  [P-1:0]      grad_out
);

  logic       shift_en, issue_valid, issue_os, update_en;
  logic [4:0] lr_q;

  gis_scheduler #(.P(P), .Q(Q)) u_sched (
    .clk, .rst_n, .start, .op, .batch,
    .lr_shift_in (lr_shift),
    .busy, .done, .shift_en, .issue_valid, .issue_os, .update_en,
    .lr_shift    (lr_q)
  );

  hbus_t [Q-1:0] west_flat, west_skew;
  acc_t  [P-1:0] south_flat, south_skew, south_arr;

  gis_edge_feeder #(.P(P), .Q(Q)) u_feed (
    .clk, .rst_n, .issue_valid, .issue_os, .delta_in, .a_in,
    .west_out  (west_flat),
    .south_out (south_flat)
  );

  gis_skew #(.LANES(Q), .WIDTH(HBUS_W), .REVERSE(1'b0)) u_skew_w (
    .clk, .rst_n, .din (west_flat), .dout (west_skew)
  );

  gis_skew #(.LANES(P), .WIDTH(ACC_W), .REVERSE(1'b0)) u_skew_s (
    .clk, .rst_n, .din (south_flat), .dout (south_skew)
  );

  always_comb begin
    for (int x = 0; x < P; x++)
      south_arr[x] = shift_en ? acc_t'(w_in[x]) : south_skew[x];
  end

  acc_t  [P-1:0] north_data;
  hbus_t [P-1:0] north_tag;
  hbus_t [Q-1:0] east_unused;

  gis_array #(.P(P), .Q(Q)) u_array (
    .clk, .rst_n, .shift_en, .update_en,
    .lr_shift   (lr_q),
    .west_in    (west_skew),
    .south_in   (south_arr),
    .north_data (north_data),
    .north_tag  (north_tag),
    .east_out   (east_unused)
  );

  // North re-alignment: keep the WS-step results (column sums) with a valid bit.
  logic [P-1:0][ACC_W:0] north_flat, north_aligned;

  always_comb begin
    for (int x = 0; x < P; x++)
      north_flat[x] = {north_tag[x].valid && !north_tag[x].os, north_data[x]};
  end

  gis_skew #(.LANES(P), .WIDTH(ACC_W + 1), .REVERSE(1'b1)) u_deskew (
    .clk, .rst_n, .din (north_flat), .dout (north_aligned)
  );

  always_comb begin
    w_req      = shift_en;
    xd_req     = issue_valid && issue_os;
    grad_valid = north_aligned[0][ACC_W];
    for (int x = 0; x < P; x++) begin
      w_out[x]    = data_t'(north_data[x][DATA_W-1:0]);
      grad_out[x] = acc_t'(north_aligned[x][ACC_W-1:0]);
    end
  end

endmodule
