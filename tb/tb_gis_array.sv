// tb_gis_array: self-checking test of the P x Q configurable array (P=4, Q=3).
// The testbench itself staggers the edge inputs (row y late by y cycles, column
// x by x cycles), so the array is tested on its own. Sequence: load W through
// the shift chain, interleave a batch of B samples, update in place, run a
// second batch on the updated weights, update again, then shift the weights
// out. Checked against integer reference arithmetic: every WS-tagged north
// word (dE/da = W^T delta per sample and column, in sample order), and every
// weight that leaves the north edge after the two SGD updates.
module tb_gis_array;
  import gis_pkg::*;
  localparam int P = 4, Q = 3, B = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic shift_en, update_en;
  logic [4:0] lr_shift;
  hbus_t [Q-1:0] west_in;
  acc_t  [P-1:0] south_in;
  acc_t  [P-1:0] north_data;
  hbus_t [P-1:0] north_tag;
  hbus_t [Q-1:0] east_out;

  gis_array #(.P(P), .Q(Q)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int Wm [Q][P];           // W(y,x) held in PE(x,y)
  int D [B][Q], A [B][P];  // delta and a per sample
  int got [P][$];

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what, int g = 0, int e = 0);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d at %0t", what, g, e, $time);
    end
  endtask

  function automatic int s16(int v); return int'(data_t'(v)); endfunction

  // Collect WS results from the top row.
  always @(posedge clk) begin
    #1;
    for (int x = 0; x < P; x++)
      if (north_tag[x].valid && !north_tag[x].os) got[x].push_back(int'(north_data[x]));
  end

  task automatic batch_and_check(int lr);
    int G [Q][P];
    for (int n = 0; n < B; n++) begin
      for (int y = 0; y < Q; y++) D[n][y] = s16($urandom);
      for (int x = 0; x < P; x++) A[n][x] = s16($urandom);
    end
    for (int x = 0; x < P; x++) got[x].delete();
    // staggered issue: edge time s = 0 .. 2B-1, row y sees it at s + y
    for (int c = 0; c < 2 * B + P + Q; c++) begin
      @(negedge clk);
      for (int y = 0; y < Q; y++) begin
        int s = c - y;
        west_in[y] = '0;
        if (s >= 0 && s < 2 * B) begin
          west_in[y].valid = 1'b1;
          west_in[y].os    = (s % 2) == 0;
          west_in[y].delta = data_t'(D[s/2][y]);
        end
      end
      for (int x = 0; x < P; x++) begin
        int s = c - x;
        south_in[x] = '0;
        if (s >= 0 && s < 2 * B && (s % 2) == 0) south_in[x] = acc_t'(A[s/2][x]);
      end
    end
    @(negedge clk);
    west_in = '0; south_in = '0;
    repeat (2) @(negedge clk);
    // check dE/da = W^T delta per sample
    for (int x = 0; x < P; x++) begin
      chk(got[x].size() == B, "result count", got[x].size(), B);
      for (int n = 0; n < B && n < got[x].size(); n++) begin
        int e = 0;
        for (int y = 0; y < Q; y++) e += Wm[y][x] * D[n][y];
        chk(got[x][n] == e, "dE/da", got[x][n], e);
      end
    end
    // in-place update
    for (int y = 0; y < Q; y++)
      for (int x = 0; x < P; x++) begin
        G[y][x] = 0;
        for (int n = 0; n < B; n++) G[y][x] += D[n][y] * A[n][x];
        Wm[y][x] = s16(Wm[y][x] - s16(G[y][x] >>> (FRAC + lr)));
      end
    lr_shift = 5'(lr);
    update_en = 1'b1;
    @(negedge clk);
    update_en = 1'b0;
  endtask

  initial begin
    shift_en = 0; update_en = 0; lr_shift = 0; west_in = '0; south_in = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // load: k-th word ends in row Q-1-k
    for (int y = 0; y < Q; y++) for (int x = 0; x < P; x++) Wm[y][x] = s16($urandom);
    for (int k = 0; k < Q; k++) begin
      @(negedge clk);
      shift_en = 1'b1;
      for (int x = 0; x < P; x++) south_in[x] = acc_t'(data_t'(Wm[Q-1-k][x]));
      #1;
      for (int x = 0; x < P; x++) chk(north_data[x] == 0, "reset weight out", north_data[x], 0);
    end
    @(negedge clk);
    shift_en = 1'b0; south_in = '0;
    batch_and_check(2);
    batch_and_check(5);
    // unload
    for (int k = 0; k < Q; k++) begin
      shift_en = 1'b1;
      south_in = '0;
      #1;
      for (int x = 0; x < P; x++)
        chk(s16(int'(north_data[x])) == Wm[Q-1-k][x], "updated weight", north_data[x], Wm[Q-1-k][x]);
      @(negedge clk);
    end
    shift_en = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
