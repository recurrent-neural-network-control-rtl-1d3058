// edgedrnn_ref_pkg: bit-exact software model of the DeltaGRU network, used by
// the testbenches as the independent reference.
//
// It keeps its own weights, delta references, memory terms and hidden states
// in plain integer arrays and recomputes one time step at a time, in the order
// a program would (no FIFOs, no DRAM, no pipelining). Arithmetic: Q8.8
// activations, Q2.6 weights, 32-bit wrap-around memory terms, the four-segment
// piecewise-linear sigmoid and tanh(x) = 2*sigmoid(2x) - 1. It also produces
// the DRAM byte image of the weights in the layout the accelerator reads:
// layer l, column c, beat b, MAC p at byte  base[l] + (c*beats_l + b)*8 + p.
package edgedrnn_ref_pkg;

  function automatic int sat16(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  function automatic int sig_ref(int x);
    int a, y;
    a = (x < 0) ? -x : x;
    if (a >= 1280)     y = 256;
    else if (a >= 608) y = a / 32 + 216;
    else if (a >= 256) y = a / 8 + 160;
    else               y = a / 4 + 128;
    return (x < 0) ? 256 - y : y;
  endfunction

  function automatic int tanh_ref(int x);
    return 2 * sig_ref(2 * x) - 256;
  endfunction

  function automatic int to_q88(int acc);
    return sat16(longint'(acc) >>> 6);
  endfunction

  // floor division by 256 (arithmetic shift)
  function automatic int shr8(longint v);
    return int'(v >>> 8);
  endfunction

  class delta_gru_ref;
    int n, m, q;
    int ncols[3], rows[3], in_size[3], beats[3];
    int w[3][][];          // [layer][col][row]
    int refv[3][];         // delta references
    int acc[3][];          // memory terms
    int h[2][];            // hidden states
    int thx, thh;
    int nz;                // deltas fired in the last step
    int nzl[3];            // the same, per layer

    function new(int n_in, int m_h, int q_out);
      n = n_in; m = m_h; q = q_out;
      in_size = '{n, m, m};
      ncols   = '{n + 1 + m, 2 * m + 1, m + 1};
      rows    = '{3 * m, 3 * m, q};
      beats   = '{(3 * m + 7) / 8, (3 * m + 7) / 8, (q + 7) / 8};
      for (int l = 0; l < 3; l++) begin
        w[l] = new[ncols[l]];
        foreach (w[l][c]) w[l][c] = new[rows[l]];
        refv[l] = new[ncols[l]];
        acc[l]  = new[4 * m];
      end
      h[0] = new[m];
      h[1] = new[m];
      thx = 4; thh = 128;
      reset_state();
    endfunction

    function void reset_state();
      for (int l = 0; l < 3; l++) begin
        foreach (refv[l][i]) refv[l][i] = 0;
        foreach (acc[l][i])  acc[l][i]  = 0;
      end
      foreach (h[0][i]) h[0][i] = 0;
      foreach (h[1][i]) h[1][i] = 0;
    endfunction

    // random weights in [-wmax, wmax-1]
    function void random_weights(int wmax);
      for (int l = 0; l < 3; l++)
        foreach (w[l][c, r]) w[l][c][r] = int'($urandom_range(2 * wmax - 1)) - wmax;
    endfunction

    function int col_value(int l, int c, const ref int x[]);
      if (c < in_size[l]) return (l == 0) ? x[c] : h[l - 1][c];
      if (c == in_size[l]) return 256;
      return h[l][c - in_size[l] - 1];
    endfunction

    function int col_thr(int l, int c);
      if (c == in_size[l]) return 0;
      if (l == 0 && c < in_size[l]) return thx;
      return thh;
    endfunction

    function void step(const ref int x[], ref int y[]);
      nz = 0;
      for (int l = 0; l < 3; l++) begin
        nzl[l] = 0;
        // delta + MAC
        for (int c = 0; c < ncols[l]; c++) begin
          int v, d, ad;
          v  = col_value(l, c, x);
          d  = sat16(longint'(v) - refv[l][c]);
          ad = (d < 0) ? -d : d;
          if (d != 0 && ad >= col_thr(l, c)) begin
            nz++;
            nzl[l]++;
            refv[l][c] += d;
            for (int r = 0; r < rows[l]; r++) begin
              int a;
              a = r;
              if (l != 2 && r >= 2 * m && c > in_size[l]) a = r + m;
              acc[l][a] += w[l][c][r] * d;
            end
          end
        end
        // activation
        if (l == 2) begin
          for (int k = 0; k < q; k++) y[k] = to_q88(acc[2][k]);
        end else begin
          for (int k = 0; k < m; k++) begin
            int r, u, c, pre_c;
            r = sig_ref(to_q88(acc[l][k]));
            u = sig_ref(to_q88(acc[l][k + m]));
            pre_c = sat16(longint'(to_q88(acc[l][k + 2 * m])) + shr8(longint'(r) * to_q88(acc[l][k + 3 * m])));
            c = tanh_ref(pre_c);
            h[l][k] = shr8(longint'(256 - u) * c + longint'(u) * h[l][k]);
          end
        end
      end
    endfunction

    // byte of the DRAM image of layer l at byte offset off from its base
    function int image_byte(int l, int off);
      int c, b, p, r;
      c = off / (beats[l] * 8);
      b = (off / 8) % beats[l];
      p = off % 8;
      r = b * 8 + p;
      if (c >= ncols[l] || r >= rows[l]) return 0;
      return w[l][c][r] & 8'hff;
    endfunction

    function int image_bytes(int l);
      return ncols[l] * beats[l] * 8;
    endfunction
  endclass

endpackage
