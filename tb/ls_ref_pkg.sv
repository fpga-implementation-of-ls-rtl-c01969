// ls_ref_pkg -- reference model of the LS codes for the testbenches.
//
// Builds the Golay pair by explicit concatenation (a' = a|b, b' = a|-b from
// a = b = (+1)) and lays out ZEROS C ZEROS S, code 0 from (a, b) and code 1
// from the complementary mate (reverse(b), -reverse(a)). Independent of the
// index-bit walk the RTL uses. Also provides periodic correlation.
package ls_ref_pkg;

  typedef int seq_t[$];

  function automatic void golay_pair(int m, output seq_t a, output seq_t b);
    seq_t na, nb;
    a = {1};
    b = {1};
    for (int k = 0; k < m; k++) begin
      na = {a, b};
      nb = a;
      foreach (b[i]) nb.push_back(-b[i]);
      a = na;
      b = nb;
    end
  endfunction

  function automatic seq_t ls_code(int sel, int m, int z);
    seq_t a, b, c, s, r;
    golay_pair(m, a, b);
    if (sel == 0) begin
      c = a;
      s = b;
    end else begin
      for (int i = b.size() - 1; i >= 0; i--) c.push_back(b[i]);
      for (int i = a.size() - 1; i >= 0; i--) s.push_back(-a[i]);
    end
    r = {};
    repeat (z) r.push_back(0);
    r = {r, c};
    repeat (z) r.push_back(0);
    r = {r, s};
    return r;
  endfunction

  // periodic correlation sum_n x[n] * y[(n + tau) mod N]
  function automatic int pcorr(seq_t x, seq_t y, int tau);
    int n = x.size();
    int acc = 0;
    for (int i = 0; i < n; i++) acc += x[i] * y[(i + tau) % n];
    return acc;
  endfunction

  // 2-bit chip encoding used by the RTL
  function automatic logic [1:0] enc(int v);
    return (v > 0) ? 2'b01 : (v < 0) ? 2'b11 : 2'b00;
  endfunction

  // ---- cycle-level reference of one transmitter channel -------------------
  // Index t counts clock edges after reset release (t = 0 is the first edge
  // that sees reset released). Chip k is loaded at edge l*k + l-1 and reaches
  // the filter input at edge l*(k+1); all other filter inputs are zero
  // (up-sampling by l). The RRC output after edge t is sum_k h[k]*up[t-2-k]
  // (tap register, output register). Returns the RRC outputs (rrc[t]) and DAC samples
  // (dac[t]) after edges 0 .. n-1.
  localparam int RRC_H [11] = '{39, 69, 100, 127, 146, 152, 146, 127, 100, 69, 39};

  function automatic void ref_chain(seq_t code, int n, int l, output seq_t rrc, output seq_t dac);
    int up [] = new[n];
    int acc, ph, c, s, v;
    rrc = {};
    dac = {};
    for (int t = 0; t < n; t++)
      up[t] = (t >= l && (t % l) == 0) ? code[(t / l - 1) % code.size()] : 0;
    for (int t = 0; t < n; t++) begin
      acc = 0;
      for (int k = 0; k < 11; k++)
        if (t - 2 - k >= 0) acc += RRC_H[k] * up[t - 2 - k];
      rrc.push_back(acc);
    end
    for (int t = 0; t < n; t++) begin
      if (t < 1) v = 0;
      else begin
        // I = Q = RRC output after edge t-1, carrier phase after edge t-1 is t mod 4
        ph = t % 4;
        c  = (ph == 0) ? 1 : (ph == 2) ? -1 : 0;
        s  = (ph == 1) ? 1 : (ph == 3) ? -1 : 0;
        v  = (rrc[t-1] * c + rrc[t-1] * s) * 64;
        if (v > 32767) v = 32767;
        if (v < -32768) v = -32768;
      end
      dac.push_back(v);
    end
  endfunction

endpackage
