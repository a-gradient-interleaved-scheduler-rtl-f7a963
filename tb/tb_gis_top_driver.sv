// tb_gis_top_driver: stimulus and checker for gis_top, shared by the small
// end-to-end test and the full-size test.
// It answers the engine's requests like a memory with a show-ahead read port:
// w_in always shows the next weight row, delta_in/a_in the next sample, and the
// index advances on each cycle the request is high. Three operations are run:
//   1. OP_TRAIN on W1 with batch B  (load, interleave, update; shifts out reset zeros)
//   2. OP_TRAIN on W2 with batch B  (its load shifts out W1 after the update)
//   3. OP_SHIFT                     (shifts out W2 after its update)
// Checked against integer reference arithmetic: every dE/da vector
// (W^T delta, per sample, in order), every weight that leaves the array, the
// latency from a sample's request to its result (P+Q cycles) and the length
// of each operation (Q + 2B + P+Q-2 + 2 cycles from start to done).
// Each mechanism (weight load, weight unload, OS step, WS result, delta reuse
// across a pair, in-place update, shift-only operation) is counted; one that
// never happens counts as a failure.
module tb_gis_top_driver
  import gis_pkg::*;
#(
  parameter int P = 4,
  parameter int Q = 3,
  parameter int B = 5,
  parameter int WATCHDOG = 20000
) (
  input  logic               clk,
  output logic               rst_n,
  output logic               start,
  output op_e                op,
  output logic [15:0]        batch,
  output logic [4:0]         lr_shift,
  input  logic               busy,
  input  logic               done,
  input  logic               w_req,
  output data_t [P-1:0]      w_in,
  input  data_t [P-1:0]      w_out,
  input  logic               xd_req,
  output data_t [Q-1:0]      delta_in,
  output data_t [P-1:0]      a_in,
  input  logic               grad_valid,
  input  acc_t  [P-1:0]      grad_out
);

  int checks = 0, failures = 0;
  int n_load = 0, n_unload = 0, n_os = 0, n_ws = 0, n_update = 0, n_shift_op = 0, n_reuse = 0;

  int Wn [Q][P];     // weights to load next
  int Wc [Q][P];     // weights in the array (reference)
  int Wexp [Q][P];   // what the next shift must bring out
  int D [B][Q], A [B][P];
  int wk, xn, gn;
  longint cyc;
  longint req_cyc [B];

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what, longint g = 0, longint e = 0);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d at cycle %0d", what, g, e, cyc);
    end
  endtask

  function automatic int s16(int v); return int'(data_t'(v)); endfunction

  // show-ahead sources
  always_comb begin
    for (int x = 0; x < P; x++) begin
      w_in[x] = (wk < Q) ? data_t'(Wn[Q-1-wk][x]) : data_t'(0);
      a_in[x] = (xn < B) ? data_t'(A[xn][x]) : data_t'(0);
    end
    for (int y = 0; y < Q; y++) delta_in[y] = (xn < B) ? data_t'(D[xn][y]) : data_t'(0);
  end

  // request bookkeeping and checks, sampled at each rising edge
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (w_req) begin
        n_load++;
        n_unload++;
        for (int x = 0; x < P; x++)
          chk(int'(w_out[x]) == Wexp[Q-1-wk][x], "unloaded weight", w_out[x], Wexp[Q-1-wk][x]);
        wk <= wk + 1;
      end
      if (xd_req) begin
        n_os++;
        req_cyc[xn] = cyc;
        xn <= xn + 1;
      end
      if (grad_valid) begin
        n_ws++;
        if (gn < B) begin
          chk(cyc - req_cyc[gn] == longint'(P + Q), "result latency", cyc - req_cyc[gn], P + Q);
          for (int x = 0; x < P; x++) begin
            int e;
            e = 0;
            for (int y = 0; y < Q; y++) e += Wc[y][x] * D[gn][y];
            chk(int'(grad_out[x]) == e, "dE/da", grad_out[x], e);
          end
        end else chk(0, "extra result");
        gn <= gn + 1;
      end
    end
  end

  task automatic new_samples();
    for (int n = 0; n < B; n++) begin
      for (int y = 0; y < Q; y++) D[n][y] = s16($urandom);
      for (int x = 0; x < P; x++) A[n][x] = s16($urandom);
    end
  endtask

  // One operation from start to done; returns its length in cycles.
  task automatic run_op(op_e o, int lr);
    longint t0;
    @(negedge clk);
    wk = 0; xn = 0; gn = 0;
    start = 1'b1; op = o; batch = 16'(B); lr_shift = 5'(lr);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    chk(wk == Q, "weight words consumed", wk, Q);
    if (o == OP_TRAIN) begin
      chk(cyc - t0 == longint'(Q + 2 * B + P + Q - 2 + 2), "operation cycles", cyc - t0,
          Q + 2 * B + P + Q - 2 + 2);
      chk(xn == B, "samples consumed", xn, B);
      chk(gn == B, "results produced", gn, B);
      // a pair reuses one delta read: B delta reads served 2B array steps
      if (xn == B && gn == B) n_reuse += B;
      n_update++;
    end else begin
      chk(cyc - t0 == longint'(Q + 1), "shift cycles", cyc - t0, Q + 1);
      n_shift_op++;
    end
  endtask

  // Reference of the in-place SGD update.
  task automatic ref_update(int lr);
    for (int y = 0; y < Q; y++)
      for (int x = 0; x < P; x++) begin
        int g = 0;
        for (int n = 0; n < B; n++) g += D[n][y] * A[n][x];
        Wc[y][x] = s16(Wc[y][x] - s16(g >>> (FRAC + lr)));
      end
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; op = OP_TRAIN; batch = '0; lr_shift = '0;
    cyc = 0; wk = Q; xn = B; gn = 0;
    for (int y = 0; y < Q; y++) for (int x = 0; x < P; x++) begin
      Wn[y][x] = s16($urandom); Wexp[y][x] = 0;
    end
    new_samples();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 1. train on W1
    Wc = Wn;
    run_op(OP_TRAIN, 3);
    ref_update(3);
    // 2. train on W2; its load shifts out the updated W1
    Wexp = Wc;
    for (int y = 0; y < Q; y++) for (int x = 0; x < P; x++) Wn[y][x] = s16($urandom);
    Wc = Wn;
    new_samples();
    run_op(OP_TRAIN, 6);
    ref_update(6);
    // 3. shift out the updated W2
    Wexp = Wc;
    for (int y = 0; y < Q; y++) for (int x = 0; x < P; x++) Wn[y][x] = 0;
    run_op(OP_SHIFT, 0);
    chk(!busy, "idle at end");

    $display("mechanisms: load=%0d unload=%0d os_steps=%0d ws_results=%0d delta_reuse=%0d update=%0d shift_op=%0d",
             n_load, n_unload, n_os, n_ws, n_reuse, n_update, n_shift_op);
    if (n_load == 0 || n_unload == 0 || n_os == 0 || n_ws == 0 || n_reuse == 0 ||
        n_update == 0 || n_shift_op == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
