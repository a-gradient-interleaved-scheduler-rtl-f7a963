// tb_gis_edge_feeder: self-checking test of the interleaving edge feeder.
// Random sequences of OS/WS issue pairs, idle cycles and stray WS steps are
// applied with a 3-column, 4-row edge. Checked every cycle: the west tags, the
// delta on an OS step (taken from the input), the delta on a WS step (the one
// read on the latest OS step, even though the input has changed), the
// sign-extended a on an OS step and zero on the south edge otherwise.
module tb_gis_edge_feeder;
  import gis_pkg::*;
  localparam int P = 3, Q = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic issue_valid, issue_os;
  data_t [Q-1:0] delta_in;
  data_t [P-1:0] a_in;
  hbus_t [Q-1:0] west_out;
  acc_t  [P-1:0] south_out;

  int checks = 0, failures = 0, n_reuse = 0;
  data_t [Q-1:0] last_delta;

  gis_edge_feeder #(.P(P), .Q(Q)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    issue_valid = 0; issue_os = 0; delta_in = '0; a_in = '0; last_delta = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 1000; t++) begin
      int r;
      r = $urandom_range(0, 3);
      issue_valid = (r != 0);
      issue_os    = (r == 1) || (r == 2);
      for (int y = 0; y < Q; y++) delta_in[y] = data_t'($urandom);
      for (int x = 0; x < P; x++) a_in[x] = data_t'($urandom);
      #1;
      for (int y = 0; y < Q; y++) begin
        chk(west_out[y].valid == issue_valid, "valid");
        chk(west_out[y].os == (issue_valid && issue_os), "os");
        if (!issue_valid) chk(west_out[y].delta == 0, "idle delta");
        else if (issue_os) chk(west_out[y].delta == delta_in[y], "os delta");
        else chk(west_out[y].delta == last_delta[y], "ws delta reuse");
      end
      if (issue_valid && !issue_os) n_reuse++;
      for (int x = 0; x < P; x++)
        chk(south_out[x] == ((issue_valid && issue_os) ? acc_t'(a_in[x]) : acc_t'(0)), "south");
      if (issue_valid && issue_os) last_delta = delta_in;
      @(negedge clk);
    end
    if (n_reuse == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
