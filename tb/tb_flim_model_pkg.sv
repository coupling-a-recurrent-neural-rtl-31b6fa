// tb_flim_model_pkg -- reference model used by the testbenches.
//
// Integer (longint) model of the fixed-point GRU step and the read-out
// network, written from the arithmetic specification (Q3.12 operands,
// exact products and sums, convergent rounding to Q3.12 with saturation,
// piecewise-linear sigmoid, tanh(x) = 2 sigmoid(2x) - 1) and kept free of
// the RTL's functions, so the RTL is compared with an independent
// computation. The class also holds a random set of network coefficients
// and lists them as configuration writes.
package tb_flim_model_pkg;

  localparam longint ONE = 4096;

  function automatic longint m_sat(longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // value with 24 fraction bits -> nearest Q3.12, ties to even
  function automatic longint m_round(longint a);
    longint fl, rem;
    rem = ((a % ONE) + ONE) % ONE;      // 0..4095
    fl  = (a - rem) / ONE;              // floor(a / 4096)
    if (rem > ONE/2 || (rem == ONE/2 && (fl % 2 != 0))) fl = fl + 1;
    return m_sat(fl);
  endfunction

  function automatic longint m_mul(longint a, longint b);
    return m_round(a * b);
  endfunction

  function automatic longint m_sig(longint x);
    longint ax, y;
    ax = (x < 0) ? -x : x;
    if (ax >= 5 * ONE)               y = ONE;
    else if (ax * 1000 >= 2375 * ONE) y = ax / 32 + (ONE * 27) / 32;  // 0.84375
    else if (ax >= ONE)              y = ax / 8 + (ONE * 5) / 8;       // 0.625
    else                             y = ax / 4 + ONE / 2;
    return (x < 0) ? ONE - y : y;
  endfunction

  function automatic longint m_tanh(longint x);
    return 2 * m_sig(2 * x) - ONE;
  endfunction

  class flim_model;
    int H, F;
    longint w_ih[], b_ih[], b_hh[], w_hh[];   // w_hh[(g*H+j)*H+k]
    longint w1[], b1[], w2[];                 // w1[i*H+k]
    longint b2;

    function new(int hidden, int fc_hidden);
      H = hidden;
      F = fc_hidden;
      w_ih = new[3*H]; b_ih = new[3*H]; b_hh = new[3*H]; w_hh = new[3*H*H];
      w1 = new[F*H]; b1 = new[F]; w2 = new[F];
    endfunction

    // uniform in [-lim, lim] Q3.12 codes
    function automatic longint rnd(int lim);
      return longint'($urandom_range(2*lim)) - lim;
    endfunction

    function void randomize_weights(int scale);
      foreach (w_ih[i]) w_ih[i] = rnd(4*scale);
      foreach (b_ih[i]) b_ih[i] = rnd(scale);
      foreach (b_hh[i]) b_hh[i] = rnd(scale);
      foreach (w_hh[i]) w_hh[i] = rnd(scale);
      foreach (w1[i])   w1[i]   = rnd(2*scale);
      foreach (b1[i])   b1[i]   = rnd(scale);
      foreach (w2[i])   w2[i]   = rnd(4*scale);
      b2 = rnd(4*scale);
    endfunction

    // configuration writes {addr, data} for all coefficients
    function void cfg_list(ref int unsigned addr[$], ref int unsigned data[$]);
      for (int i = 0; i < 3*H; i++) begin
        addr.push_back(32'h1000 + i); data.push_back(int'(w_ih[i]) & 16'hFFFF);
        addr.push_back(32'h1100 + i); data.push_back(int'(b_ih[i]) & 16'hFFFF);
        addr.push_back(32'h1200 + i); data.push_back(int'(b_hh[i]) & 16'hFFFF);
      end
      for (int i = 0; i < 3*H*H; i++) begin
        addr.push_back(32'h2000 + i); data.push_back(int'(w_hh[i]) & 16'hFFFF);
      end
      for (int i = 0; i < F*H; i++) begin
        addr.push_back(32'h3000 + i); data.push_back(int'(w1[i]) & 16'hFFFF);
      end
      for (int i = 0; i < F; i++) begin
        addr.push_back(32'h3400 + i); data.push_back(int'(b1[i]) & 16'hFFFF);
        addr.push_back(32'h3500 + i); data.push_back(int'(w2[i]) & 16'hFFFF);
      end
      addr.push_back(32'h3600); data.push_back(int'(b2) & 16'hFFFF);
    endfunction

    // one GRU step; h is updated in place
    function void gru_step(ref longint h[], input longint x);
      longint hn[];
      hn = new[H];
      for (int j = 0; j < H; j++) begin
        longint ar, az, ahn, ain, r, z, n, nt;
        ar  = w_ih[j] * x       + (b_ih[j] + b_hh[j]) * ONE;
        az  = w_ih[H+j] * x     + (b_ih[H+j] + b_hh[H+j]) * ONE;
        ain = w_ih[2*H+j] * x   + b_ih[2*H+j] * ONE;
        ahn = b_hh[2*H+j] * ONE;
        for (int k = 0; k < H; k++) begin
          ar  += w_hh[(j)*H+k]     * h[k];
          az  += w_hh[(H+j)*H+k]   * h[k];
          ahn += w_hh[(2*H+j)*H+k] * h[k];
        end
        r  = m_sig(m_round(ar));
        z  = m_sig(m_round(az));
        nt = m_sat(m_round(ain) + m_mul(r, m_round(ahn)));
        n  = m_tanh(nt);
        hn[j] = m_sat(n + m_mul(z, m_sat(h[j] - n)));
      end
      for (int j = 0; j < H; j++) h[j] = hn[j];
    endfunction

    // read-out network: lifetime code (Q3.12)
    function longint fcnn(longint h[]);
      longint acc2;
      acc2 = b2 * ONE;
      for (int i = 0; i < F; i++) begin
        longint a, u;
        a = b1[i] * ONE;
        for (int k = 0; k < H; k++) a += w1[i*H+k] * h[k];
        u = (a < 0) ? 0 : m_round(a);
        acc2 += w2[i] * u;
      end
      return m_round(acc2);
    endfunction
  endclass

endpackage
