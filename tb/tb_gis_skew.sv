// tb_gis_skew: self-checking test of the staggering buffer.
// Two instances (staircase and reversed staircase, 6 lanes of 12 bits) get
// random vectors every cycle; each output lane must equal its input lane from
// exactly D cycles earlier (D = i, or LANES-1-i when reversed), and zero while
// the delay line still holds reset values.
module tb_gis_skew;
  localparam int L = 6, W = 12, N = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0][W-1:0] din, dout_f, dout_r;
  logic [L-1:0][W-1:0] hist [N];

  int checks = 0, failures = 0;

  gis_skew #(.LANES(L), .WIDTH(W), .REVERSE(1'b0)) dut_f (.clk, .rst_n, .din, .dout(dout_f));
  gis_skew #(.LANES(L), .WIDTH(W), .REVERSE(1'b1)) dut_r (.clk, .rst_n, .din, .dout(dout_r));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < N; t++) begin
      for (int i = 0; i < L; i++) din[i] = W'($urandom);
      hist[t] = din;
      #1;
      for (int i = 0; i < L; i++) begin
        logic [W-1:0] ef, er;
        ef = (t - i >= 0) ? hist[t-i][i] : '0;
        er = (t - (L-1-i) >= 0) ? hist[t-(L-1-i)][i] : '0;
        checks += 2;
        if (dout_f[i] !== ef) begin failures++; $display("FAIL fwd lane %0d t=%0d", i, t); end
        if (dout_r[i] !== er) begin failures++; $display("FAIL rev lane %0d t=%0d", i, t); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
