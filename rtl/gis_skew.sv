// gis_skew: triangular staggering buffer for one edge of the systolic array.
//
// Lane i is delayed by i clock cycles (REVERSE = 0) or by LANES-1-i cycles
// (REVERSE = 1) through a chain of registers. With REVERSE = 0 it turns a
// vector that is presented all at once into the staircase the array needs,
// one cycle later per row or per column ("staggered by a clock cycle"); with
// REVERSE = 1 it lines the staircase of north outputs back up into one vector.
// Lane 0 (or lane LANES-1 when reversed) is a wire, so the latency of lane i is
// exactly its delay. All registers are cleared by reset, so an idle edge sends
// zeros (invalid tags) into the array.
// The staircase follows the source's figures; building it from plain shift
// registers is this design's choice.
module gis_skew #(
  parameter int unsigned LANES   = 128,
  parameter int unsigned WIDTH   = 32,
  parameter bit          REVERSE = 1'b0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [LANES-1:0][WIDTH-1:0]  din,
  output logic [LANES-1:0][WIDTH-1:0]  dout
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    localparam int unsigned D = REVERSE ? (LANES - 1 - i) : i;
    if (D == 0) begin : g_wire
      assign dout[i] = din[i];
    end else begin : g_regs
      logic [WIDTH-1:0] pipe [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < D; k++) pipe[k] <= '0;
        end else begin
          pipe[0] <= din[i];
          for (int k = 1; k < D; k++) pipe[k] <= pipe[k-1];
        end
      end
      assign dout[i] = pipe[D-1];
    end
  end

endmodule
