// tb_gis_pe: self-checking test of one configurable PE.
// Random sequences of weight shifts, OS steps (G += delta*a), WS steps
// (res = res_in + delta*w), idle cycles and in-place updates are applied; a
// reference model kept in plain integers predicts w, G, the registered north
// output and the registered east output, which are compared every cycle.
module tb_gis_pe;
  import gis_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic shift_en, update_en;
  logic [4:0] lr_shift;
  hbus_t h_in, h_out;
  acc_t  v_in, v_out;
  data_t w_q;
  acc_t  g_q;

  int checks = 0, failures = 0;
  int n_os = 0, n_ws = 0, n_upd = 0, n_shift = 0;

  gis_pe dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d at %0t", what, got, exp, $time);
    end
  endtask

  // Reference state
  int m_w, m_g, m_v;
  hbus_t m_h;

  function automatic int sx16(int v);
    return int'(data_t'(v));
  endfunction

  initial begin
    shift_en = 0; update_en = 0; lr_shift = 0; h_in = '0; v_in = '0;
    m_w = 0; m_g = 0; m_v = 0; m_h = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      int r;
      int delta, a;
      @(negedge clk);
      r = $urandom_range(0, 9);
      shift_en = (r == 0);
      update_en = (r == 1);
      lr_shift = 5'($urandom_range(0, 4));
      delta = sx16($urandom);
      a = sx16($urandom);
      h_in.valid = ($urandom_range(0, 4) != 0);
      h_in.os = $urandom_range(0, 1) == 1;
      h_in.delta = data_t'(delta);
      if (h_in.os || shift_en) v_in = acc_t'(data_t'(a));
      else v_in = acc_t'($urandom);
      // combinational north output during a shift is the old weight
      #1;
      if (shift_en) check("v_out shift", v_out, m_w);
      // reference next state
      if (shift_en) begin
        n_shift++;
        m_w = sx16(int'(v_in)); m_g = 0; m_v = 0; m_h = '0;
      end else begin
        if (update_en) begin
          n_upd++;
          m_w = sx16(m_w - sx16(m_g >>> (FRAC + lr_shift)));
          m_g = 0;
        end
        if (h_in.valid && h_in.os) begin
          n_os++;
          if (!update_en) m_g = m_g + delta * sx16(int'(v_in));
          m_v = int'(v_in);
        end else if (h_in.valid) begin
          n_ws++;
          m_v = int'(v_in) + delta * (update_en ? int'(w_q) : m_w);
        end else begin
          m_v = int'(v_in);
        end
        m_h = h_in;
      end
      @(posedge clk);
      #1;
      check("w", w_q, m_w);
      check("g", g_q, m_g);
      if (!shift_en) begin
        check("v_out", v_out, m_v);
        check("h_out", h_out, m_h);
      end
    end
    if (n_os == 0 || n_ws == 0 || n_upd == 0 || n_shift == 0) failures++;
    $display("os=%0d ws=%0d update=%0d shift=%0d", n_os, n_ws, n_upd, n_shift);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
