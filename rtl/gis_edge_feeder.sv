// gis_edge_feeder: builds the interleaved west and south edge streams.
//
// The scheduler issues each mini-batch sample n as two consecutive steps:
//   OS step (issue_os = 1): delta(n) is read (delta_req = 1) and sent west with
//     tag os = 1; a(n) is read and sent south, sign-extended to the link width.
//   WS step (issue_os = 0): the same delta(n), held in a register, is sent again
//     with tag os = 0, and the south edge gets 0, the start of every column sum.
// So each delta vector is read from memory once and used for both gradients,
// which is the reuse the interleaved schedule is built on. Outside issue cycles
// the edges carry invalid tags and zeros.
// Timing: combinational from the inputs to the outputs; the delta holding
// register is written on the OS step. The outputs feed gis_skew, which adds
// the staircase.
// Follows the source: delta at the west edge for both modes, a and 0 at the
// south edge, the OS/WS alternation. This design's own choice: the OS step
// comes first in each pair, as in the dataflow table's T0/T1 columns.
module gis_edge_feeder
  import gis_pkg::*;
#(
  parameter int unsigned P = 128,
  parameter int unsigned Q = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               issue_valid,
  input  logic               issue_os,
  input  data_t [Q-1:0]      delta_in,   // delta^(l) of one sample, one per row
  input  data_t [P-1:0]      a_in,       // a^(l-1) of the same sample, one per column
  output hbus_t [Q-1:0]      west_out,
  output acc_t  [P-1:0]      south_out
);

  data_t [Q-1:0] delta_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       delta_hold <= '0;
    else if (issue_valid && issue_os) delta_hold <= delta_in;
  end

  always_comb begin
    for (int y = 0; y < Q; y++) begin
      west_out[y].valid = issue_valid;
      west_out[y].os    = issue_valid && issue_os;
      west_out[y].delta = !issue_valid ? data_t'(0) :
                          issue_os     ? delta_in[y] : delta_hold[y];
    end
    for (int x = 0; x < P; x++) begin
      south_out[x] = (issue_valid && issue_os) ? acc_t'(a_in[x]) : acc_t'(0);
    end
  end

endmodule
