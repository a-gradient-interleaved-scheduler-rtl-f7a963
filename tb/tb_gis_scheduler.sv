// tb_gis_scheduler: self-checking test of the phase sequencer (P=5, Q=3).
// For several batch sizes, OP_TRAIN must give exactly Q shift cycles, then 2B
// issue cycles alternating OS/WS starting with OS, then P+Q-2 idle drain
// cycles, then one update cycle, then a one-cycle done; the total from start to
// done must be Q + 2B + P+Q-2 + 2 cycles. OP_SHIFT must give only Q shift cycles.
module tb_gis_scheduler;
  import gis_pkg::*;
  localparam int P = 5, Q = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic start;
  op_e op;
  logic [15:0] batch;
  logic [4:0] lr_shift_in, lr_shift;
  logic busy, done, shift_en, issue_valid, issue_os, update_en;

  int checks = 0, failures = 0;

  gis_scheduler #(.P(P), .Q(Q)) dut (.*);

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

  // Runs one operation and records the per-cycle control pattern.
  task automatic run(op_e o, int b, int lr);
    int t = 0, n_shift = 0, n_issue = 0, n_upd = 0, first_issue = -1, last_shift = -1;
    int last_issue = -1, upd_t = -1;
    bit os_ok = 1;
    @(negedge clk);
    start = 1; op = o; batch = 16'(b); lr_shift_in = 5'(lr);
    @(negedge clk);
    start = 0; batch = '0; lr_shift_in = '0;
    t = 1;
    while (!done && t < 2000) begin
      if (shift_en) begin n_shift++; last_shift = t; end
      if (issue_valid) begin
        if (first_issue < 0) first_issue = t;
        if (issue_os != (((t - first_issue) % 2) == 0)) os_ok = 0;
        n_issue++; last_issue = t;
      end
      if (update_en) begin n_upd++; upd_t = t; chk(lr_shift == 5'(lr), "lr captured"); end
      chk(busy, "busy");
      @(negedge clk); t++;
    end
    chk(n_shift == Q, "shift count");
    chk(last_shift == Q, "shift first");
    if (o == OP_TRAIN) begin
      chk(n_issue == 2 * b, "issue count");
      chk(os_ok, "os/ws alternation");
      if (b > 0) chk(first_issue == Q + 1, "issue after load");
      chk(n_upd == 1, "one update");
      chk(upd_t == Q + 2 * b + (P + Q - 2) + 1, "update cycle");
      chk(t == Q + 2 * b + (P + Q - 2) + 2, "total cycles");
    end else begin
      chk(n_issue == 0 && n_upd == 0, "shift only");
      chk(t == Q + 1, "shift total cycles");
    end
    @(negedge clk);
    chk(!done && !busy, "idle after done");
  endtask

  initial begin
    start = 0; op = OP_TRAIN; batch = '0; lr_shift_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(OP_TRAIN, 1, 3);
    run(OP_TRAIN, 4, 7);
    run(OP_SHIFT, 9, 0);
    run(OP_TRAIN, 0, 1);
    run(OP_TRAIN, 13, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
