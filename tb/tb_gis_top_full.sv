// tb_gis_top_full: end-to-end test of the engine at its default size, the
// 128 x 128 array, with a batch of 4. See tb_gis_top_driver for what is checked.
module tb_gis_top_full;
  import gis_pkg::*;
  localparam int P = 128, Q = 128, B = 4;

  logic clk = 1'b0;
  logic rst_n, start, busy, done, w_req, xd_req, grad_valid;
  op_e op;
  logic [15:0] batch;
  logic [4:0] lr_shift;
  data_t [P-1:0] w_in, w_out, a_in;
  data_t [Q-1:0] delta_in;
  acc_t  [P-1:0] grad_out;

  always #5 clk = ~clk;

  gis_top dut (.*);
  tb_gis_top_driver #(.P(P), .Q(Q), .B(B), .WATCHDOG(5000)) drv (.*);
endmodule
