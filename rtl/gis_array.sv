// gis_array: the P x Q configurable systolic array (P columns, Q rows).
//
// Row y receives delta(y) and its mode tag at the west edge and passes it east
// one PE per cycle; column x receives a(x) (OS step) or 0 (WS step) at the
// south edge and passes a or the growing partial sum north one PE per cycle.
// With the edge inputs staggered by one cycle per row and per column, PE(x,y)
// sees sample n at cycle t0 + x + y, so every PE switches between the two
// modes on alternate cycles of its own (Table I of the dataflow).
// North outputs: v of the top row, and the tag that row registered in the same
// cycle, so a WS-tagged north word is dE/da(x) for one sample (a column sum of
// W^T * delta). With shift_en high all PEs shift their weights one row north:
// south_in[x] enters row 0 and row Q-1's weight appears on north_data[x].
// P words are loaded per cycle and a full load takes Q cycles, as in the source.
//
// Orientation: x indexes columns (east), y rows (north); w(x,y) holds W(y,x)
// of the layer, so a column sums over output neurons. This is the source's
// arrangement; the weight shift chain direction is this design's choice.
module gis_array
  import gis_pkg::*;
#(
  parameter int unsigned P = 128,  // columns (horizontal size)
  parameter int unsigned Q = 128   // rows (vertical size)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                shift_en,
  input  logic                update_en,
  input  logic [4:0]          lr_shift,
  input  hbus_t [Q-1:0]       west_in,     // one per row, already staggered
  input  acc_t  [P-1:0]       south_in,    // one per column, already staggered
  output acc_t  [P-1:0]       north_data,  // top-row vertical outputs
  output hbus_t [P-1:0]       north_tag,   // tag registered by each top-row PE
  output hbus_t [Q-1:0]       east_out     // delta leaving the east edge
);

  // h[y][x]: input of PE(x,y) from the west; h[y][P] leaves the array.
  hbus_t h [Q][P+1];
  // v[x][y]: input of PE(x,y) from the south; v[x][Q] leaves at the north.
  acc_t  v [P][Q+1];

  for (genvar y = 0; y < Q; y++) begin : g_row
    assign h[y][0]  = west_in[y];
    assign east_out[y] = h[y][P];
    for (genvar x = 0; x < P; x++) begin : g_col
      gis_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .shift_en (shift_en),
        .update_en(update_en),
        .lr_shift (lr_shift),
        .h_in     (h[y][x]),
        .h_out    (h[y][x+1]),
        .v_in     (v[x][y]),
        .v_out    (v[x][y+1]),
        .w_q      (),
        .g_q      ()
      );
    end
  end

  for (genvar x = 0; x < P; x++) begin : g_edge
    assign v[x][0]       = south_in[x];
    assign north_data[x] = v[x][Q];
    // The top-row PE's tag register: the east input of PE(x+1, Q-1).
    assign north_tag[x]  = h[Q-1][x+1];
  end

endmodule
