// gis_pe: configurable processing element of the gradient-interleaved array.
//
// Each PE at column x, row y keeps one weight w(x,y) and the gradient of that
// weight, G(x,y), side by side. The mode is chosen every cycle by the tag that
// arrives with delta from the west:
//   * os = 1 (output-stationary step): the vertical input carries a(x,n);
//     G <= G + delta(y,n) * a(x,n), and a is passed north unchanged.
//   * os = 0 (weight-stationary step): the vertical input carries the partial
//     sum res(x,y-1); res(x,y) = res(x,y-1) + delta(y,n) * w(x,y) is passed north.
// delta and its tag are always passed east through a one-cycle register, so the
// same delta serves both steps (the OS and WS rows of the dataflow table).
// Because the array holds w(x,y) = W(y,x) and computes G^T = a * delta^T, the
// gradient G(x,y) lands in the PE that owns the weight it belongs to, so
// update_en applies SGD in place: w <= w - (G >>> (FRAC + lr_shift)), G <= 0.
// shift_en turns the vertical link into a weight shift chain: w is taken from
// v_in and the old w appears combinationally on v_out, one row per cycle.
//
// Timing: every output is registered except v_out while shift_en is high.
// Priority: shift_en, then update_en, then the tagged compute step.
// Follows the source: the two modes, the pipeline registers, in-place
// accumulation and update. This design's own choices: the tag encoding, the
// fixed-point formats (see gis_pkg), SGD with a power-of-two learning rate,
// wrap-around arithmetic, and reuse of the vertical link for weight loading.
module gis_pe
  import gis_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       shift_en,   // weight chain shift
  input  logic       update_en,  // in-place SGD update, clears G
  input  logic [4:0] lr_shift,   // learning rate = 2^-lr_shift
  input  hbus_t      h_in,       // from the west neighbour
  output hbus_t      h_out,      // to the east neighbour (registered)
  input  acc_t       v_in,       // from the south neighbour
  output acc_t       v_out,      // to the north neighbour
  output data_t      w_q,        // stored weight (observation)
  output acc_t       g_q         // stored gradient (observation)
);

  data_t w;
  acc_t  g;
  acc_t  v_reg;
  hbus_t h_reg;

  acc_t  prod_a;  // delta * a   (output-stationary step)
  acc_t  prod_w;  // delta * w   (weight-stationary step)
  data_t g_step;  // G scaled to weight units and by the learning rate

  always_comb begin
    prod_a = acc_t'(h_in.delta) * acc_t'(data_t'(v_in[DATA_W-1:0]));
    prod_w = acc_t'(h_in.delta) * acc_t'(w);
    g_step = data_t'(g >>> (FRAC + 32'(lr_shift)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w     <= '0;
      g     <= '0;
      v_reg <= '0;
      h_reg <= '0;
    end else if (shift_en) begin
      w     <= data_t'(v_in[DATA_W-1:0]);
      g     <= '0;
      v_reg <= '0;
      h_reg <= '0;
    end else begin
      h_reg <= h_in;
      if (update_en) begin
        w <= w - g_step;
        g <= '0;
      end
      if (h_in.valid && h_in.os) begin
        if (!update_en) g <= g + prod_a;
        v_reg <= v_in;
      end else if (h_in.valid) begin
        v_reg <= v_in + prod_w;
      end else begin
        v_reg <= v_in;
      end
    end
  end

  assign h_out = h_reg;
  assign v_out = shift_en ? acc_t'(w) : v_reg;
  assign w_q   = w;
  assign g_q   = g;

endmodule
