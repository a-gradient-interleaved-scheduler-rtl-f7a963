// tb_gis_layer_tiled: runs whole fully-connected layers that are larger than
// the array, tile by tile, as a host would (8 x 8 array, batch of 4).
// Layers: 16 outputs x 16 inputs (2 x 2 tiles) and 20 outputs x 24 inputs
// (3 x 3 tiles, the last tile row zero-padded like a 1000-output layer on a
// 128-row array). For each tile the host loads W(rows, cols), streams the
// batch's delta(rows) and a(cols), adds the tile's dE/da into the layer's
// result for those columns, and collects the updated tile when the next
// operation's load shifts it out (a final OP_SHIFT flushes the last one).
// Checked against integer reference arithmetic: the layer's dE/da = W^T delta
// for every sample and input, the updated W after one SGD step, and the length
// of every operation. The word counts of the edge traffic are printed: each
// delta word is read once for both gradients and G never leaves the array.
module tb_gis_layer_tiled;
  import gis_pkg::*;
  localparam int P = 8, Q = 8, B = 4, LR = 4;
  localparam int MAXO = 24, MAXI = 24;

  logic clk = 1'b0;
  logic rst_n, start, busy, done, w_req, xd_req, grad_valid;
  op_e op;
  logic [15:0] batch;
  logic [4:0] lr_shift;
  data_t [P-1:0] w_in, w_out, a_in;
  data_t [Q-1:0] delta_in;
  acc_t  [P-1:0] grad_out;

  always #5 clk = ~clk;

  gis_top #(.P(P), .Q(Q)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;

  // the layer held by the host
  int NO, NI;
  int Wl [MAXO][MAXI], Wnew [MAXO][MAXI], Dl [B][MAXO], Al [B][MAXI], Gsum [B][MAXI];
  // the tile being streamed
  int Wt [Q][P], Dt [B][Q], At [B][P];
  int prev_r, prev_c;   // tile whose updated weights the next load returns (-1: none)
  int wk, xn, gn;
  longint n_delta_words, n_a_words, n_w_in_words, n_w_out_words, n_grad_words;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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

  always_comb begin
    for (int x = 0; x < P; x++) begin
      w_in[x] = (wk < Q) ? data_t'(Wt[Q-1-wk][x]) : data_t'(0);
      a_in[x] = (xn < B) ? data_t'(At[xn][x]) : data_t'(0);
    end
    for (int y = 0; y < Q; y++) delta_in[y] = (xn < B) ? data_t'(Dt[xn][y]) : data_t'(0);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (w_req) begin
        n_w_in_words  += P;
        if (prev_r >= 0) begin
          n_w_out_words += P;
          for (int x = 0; x < P; x++) begin
            int yy, xx;
            yy = prev_r * Q + (Q - 1 - wk);
            xx = prev_c * P + x;
            if (yy < NO && xx < NI) Wnew[yy][xx] = int'(w_out[x]);
          end
        end
        wk <= wk + 1;
      end
      if (xd_req) begin
        n_delta_words += Q;
        n_a_words     += P;
        xn <= xn + 1;
      end
      if (grad_valid) begin
        n_grad_words += P;
        chk(gn < B, "extra result", gn, B);
        for (int x = 0; x < P; x++) Gsum[gn][cur_c * P + x] += int'(grad_out[x]);
        gn <= gn + 1;
      end
    end
  end

  int cur_c;

  task automatic run_op(op_e o);
    longint t0;
    @(negedge clk);
    wk = 0; xn = 0; gn = 0;
    start = 1'b1; op = o; batch = 16'(B); lr_shift = 5'(LR);
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    if (o == OP_TRAIN)
      chk(cyc - t0 == longint'(Q + 2 * B + P + Q - 2 + 2), "tile operation cycles", cyc - t0,
          Q + 2 * B + P + Q - 2 + 2);
    else
      chk(cyc - t0 == longint'(Q + 1), "shift cycles", cyc - t0, Q + 1);
  endtask

  task automatic run_layer(int no, int ni);
    int tr, tc;
    longint c0;
    NO = no; NI = ni;
    tr = (no + Q - 1) / Q;
    tc = (ni + P - 1) / P;
    for (int y = 0; y < MAXO; y++) for (int x = 0; x < MAXI; x++) begin
      Wl[y][x] = (y < no && x < ni) ? s16($urandom_range(0, 4095) - 2048) : 0;
      Wnew[y][x] = 0;
    end
    for (int n = 0; n < B; n++) begin
      for (int y = 0; y < MAXO; y++) Dl[n][y] = (y < no) ? s16($urandom_range(0, 4095) - 2048) : 0;
      for (int x = 0; x < MAXI; x++) begin
        Al[n][x] = (x < ni) ? s16($urandom_range(0, 4095) - 2048) : 0;
        Gsum[n][x] = 0;
      end
    end
    n_delta_words = 0; n_a_words = 0; n_w_in_words = 0; n_w_out_words = 0; n_grad_words = 0;
    prev_r = -1; prev_c = -1;
    c0 = cyc;
    for (int r = 0; r < tr; r++)
      for (int c = 0; c < tc; c++) begin
        for (int y = 0; y < Q; y++) for (int x = 0; x < P; x++)
          Wt[y][x] = (r * Q + y < MAXO && c * P + x < MAXI) ? Wl[r * Q + y][c * P + x] : 0;
        for (int n = 0; n < B; n++) begin
          for (int y = 0; y < Q; y++) Dt[n][y] = (r * Q + y < MAXO) ? Dl[n][r * Q + y] : 0;
          for (int x = 0; x < P; x++) At[n][x] = (c * P + x < MAXI) ? Al[n][c * P + x] : 0;
        end
        cur_c = c;
        run_op(OP_TRAIN);
        chk(gn == B, "tile results", gn, B);
        prev_r = r; prev_c = c;
      end
    for (int y = 0; y < Q; y++) for (int x = 0; x < P; x++) Wt[y][x] = 0;
    run_op(OP_SHIFT);
    // reference
    for (int n = 0; n < B; n++)
      for (int x = 0; x < ni; x++) begin
        int e;
        e = 0;
        for (int y = 0; y < no; y++) e += Wl[y][x] * Dl[n][y];
        chk(Gsum[n][x] == e, "layer dE/da", Gsum[n][x], e);
      end
    for (int y = 0; y < no; y++)
      for (int x = 0; x < ni; x++) begin
        int g;
        g = 0;
        for (int n = 0; n < B; n++) g += Dl[n][y] * Al[n][x];
        chk(Wnew[y][x] == s16(Wl[y][x] - s16(g >>> (FRAC + LR))), "updated W",
            Wnew[y][x], s16(Wl[y][x] - s16(g >>> (FRAC + LR))));
      end
    chk(n_delta_words == longint'(tr * tc * B * Q), "delta words read once per tile",
        n_delta_words, tr * tc * B * Q);
    $display("layer %0dx%0d: %0d tiles, %0d cycles, words: delta %0d, a %0d, W in %0d, W out %0d, dE/da %0d",
             no, ni, tr * tc, cyc - c0, n_delta_words, n_a_words, n_w_in_words, n_w_out_words,
             n_grad_words);
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; op = OP_TRAIN; batch = '0; lr_shift = '0;
    wk = Q; xn = B; gn = 0; prev_r = -1; prev_c = -1; cur_c = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_layer(16, 16);
    run_layer(20, 24);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
