// tb_gru_act_unit: random memory terms and previous states against an
// integer model of the GRU update, plus fixed points of the piecewise-linear
// sigmoid/tanh (0 -> 0.5 / 0, saturation beyond |x| = 5) and the FC path.
module tb_gru_act_unit;
  import edgedrnn_pkg::*;

  logic is_fc = 0;
  acc_t m_r = 0, m_u = 0, m_cx = 0, m_ch = 0;
  act_t h_prev = 0, h_new, gate_r, gate_u, cand;

  gru_act_unit dut (.*);

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(longint v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : int'(v));
  endfunction
  function automatic int sig(int x);
    int a, y;
    a = x < 0 ? -x : x;
    y = a >= 1280 ? 256 : a >= 608 ? a / 32 + 216 : a >= 256 ? a / 8 + 160 : a / 4 + 128;
    return x < 0 ? 256 - y : y;
  endfunction
  function automatic int q(int a); return sat(longint'(a >>> 6)); endfunction

  initial begin
    // fixed points (memory terms are Q8.8 << 6)
    m_r = 0; m_u = 0; m_cx = 0; m_ch = 0; h_prev = 0; #1;
    check(gate_r == 128 && gate_u == 128 && cand == 0 && h_new == 0, "sigmoid(0)=0.5, tanh(0)=0");
    m_r = 32'sd6 <<< 14; m_u = -(32'sd6 <<< 14); m_cx = 32'sd3 <<< 14; #1;   // 6.0, -6.0, 3.0
    check(gate_r == 256 && gate_u == 0 && cand == 256 && h_new == 256, "saturation: r=1, u=0, c=1, h=c");
    m_u = 32'sd6 <<< 14; h_prev = -100; #1;
    check(h_new == -100, "u=1 keeps the previous state");
    is_fc = 1; m_r = 32'sd12345; #1;
    check(h_new == act_t'(12345 >>> 6), "FC output is the memory term in Q8.8");
    is_fc = 0;
    for (int n = 0; n < 5000; n++) begin
      int r, u, c, pc, h;
      m_r  = acc_t'($urandom_range(2_000_000)) - 1_000_000;
      m_u  = acc_t'($urandom_range(2_000_000)) - 1_000_000;
      m_cx = acc_t'($urandom_range(2_000_000)) - 1_000_000;
      m_ch = acc_t'($urandom_range(2_000_000)) - 1_000_000;
      if (n % 50 == 0) m_ch = acc_t'($urandom);   // saturation of the Q8.8 conversion
      h_prev = act_t'(int'($urandom_range(512)) - 256);
      #1;
      r  = sig(q(m_r));
      u  = sig(q(m_u));
      pc = sat(longint'(q(m_cx)) + ((longint'(r) * q(m_ch)) >>> 8));
      c  = 2 * sig(2 * pc) - 256;
      h  = int'((longint'(256 - u) * c + longint'(u) * h_prev) >>> 8);
      check(gate_r == r && gate_u == u && cand == c && h_new == h,
            $sformatf("n=%0d r %0d/%0d u %0d/%0d c %0d/%0d h %0d/%0d", n, gate_r, r, gate_u, u, cand, c, h_new, h));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
