// adic_ref_pkg: bit-accurate reference model of one base learner, written
// from the arithmetic specification (Q4.12 words, 32-bit wrapping
// accumulators, floor shifts, saturation to 16 bits, truncating division)
// with plain integer code, for the testbenches to compare against.
package adic_ref_pkg;

  function automatic int rsat(input longint v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  // keep the top 'bits' of a 16-bit value
  function automatic int rkeep(input int v, input int bits);
    int u;
    u = v & 32'hffff;
    u = u & ((32'hffff << (16 - bits)) & 32'hffff);
    return (u >= 32768) ? u - 65536 : u;
  endfunction

  function automatic int rwin(input int acc, input int sel);
    return rsat(longint'(acc >>> (12 - 2 * sel)));
  endfunction

  function automatic int lfsr_next(input int s);
    int r;
    r = s & 32'hffff;
    for (int n = 0; n < 16; n++)
      r = ((r << 1) & 32'hffff) | (((r >> 15) ^ (r >> 13) ^ (r >> 12) ^ (r >> 10)) & 1);
    return r;
  endfunction

  function automatic int dpb(input int code);
    return (code == 1) ? 12 : (code == 2) ? 8 : 16;
  endfunction

  function automatic int wbb(input int code);
    case (code)
      1: return 2;
      2: return 4;
      3: return 6;
      4: return 8;
      default: return 16;
    endcase
  endfunction

  typedef struct {
    int d, l, m;
    bit boundary, lite;
    int acc_sel, dp_code, wb_code, theta0;
  } rcfg_t;

  class bl_model;
    int beta  [32][16];
    int theta [32][32];
    int h [32];
    int xhat [16];
    int e [16];
    longint sq_err;
    bit decision;
    int seed;

    function new(int s);
      seed = s;
      foreach (beta[j, k]) beta[j][k] = 0;
      foreach (theta[a, b]) theta[a][b] = 0;
    endfunction

    function void init(rcfg_t c);
      foreach (beta[j, k]) beta[j][k] = 0;
      if (!c.lite) foreach (theta[a, b]) theta[a][b] = (a == b) ? c.theta0 : 0;
    endfunction

    function void forward(rcfg_t c, int x[16], bit training, longint th);
      int dp, wb, s, acc, b, w, tgt;
      dp = training ? 16 : dpb(c.dp_code);
      wb = training ? 16 : wbb(c.wb_code);
      s  = lfsr_next((seed & 32'hffff) == 0 ? 32'hACE1 : seed & 32'hffff);
      for (int j = 0; j < c.l; j++) begin
        b = rkeep(s, wb); s = lfsr_next(s);
        acc = b * 4096;
        for (int i = 0; i < c.d; i++) begin
          w = rkeep(s, wb); s = lfsr_next(s);
          acc = acc + w * rkeep(x[i], dp);
        end
        h[j] = rwin(acc, c.acc_sel);
        if (h[j] < 0) h[j] = 0;
      end
      sq_err = 0;
      for (int k = 0; k < c.m; k++) begin
        acc = 0;
        for (int j = 0; j < c.l; j++) acc = acc + rkeep(beta[j][k], dp) * rkeep(h[j], dp);
        xhat[k] = rwin(acc, c.acc_sel);
        tgt  = c.boundary ? 4096 : x[k];
        e[k] = rsat(longint'(tgt) - longint'(xhat[k]));
        sq_err = sq_err + longint'((e[k] * e[k]) >>> 12);
      end
      decision = (sq_err > th);
    endfunction

    function void learn(rcfg_t c);
      int p [32];
      int eta [32];
      longint acc, denom;
      for (int r = 0; r < c.l; r++) begin
        if (c.lite) p[r] = rsat(longint'((c.theta0 * h[r]) >>> 12));
        else begin
          acc = 0;
          for (int q = 0; q < c.l; q++) acc = acc + longint'(theta[r][q]) * longint'(h[q]);
          p[r] = rsat(acc >>> 12);
        end
      end
      acc = 0;
      for (int r = 0; r < c.l; r++) acc = acc + longint'(h[r]) * longint'(p[r]);
      denom = 4096 + (acc >>> 12);
      if (denom < 1) denom = 1;
      if (denom > 64'h7fff_ffff) denom = 64'h7fff_ffff;
      for (int r = 0; r < c.l; r++) eta[r] = rsat((longint'(p[r]) * 4096) / denom);
      if (!c.lite)
        for (int r = 0; r < c.l; r++)
          for (int q = 0; q < c.l; q++)
            theta[r][q] = rsat(longint'(theta[r][q]) - longint'((eta[r] * p[q]) >>> 12));
      for (int j = 0; j < c.l; j++)
        for (int k = 0; k < c.m; k++)
          beta[j][k] = rsat(longint'(beta[j][k]) + longint'((eta[j] * e[k]) >>> 12));
    endfunction
  endclass

  // ADEPOS step: returns next N and sets 'escalate' / 'confirm'
  function automatic void adepos_step(input int n, input int votes, input int k_max,
                                      output int n_next, output bit escalate,
                                      output bit confirm, output bit vote);
    vote     = (2 * votes >= n + 1);
    escalate = 0;
    confirm  = 0;
    n_next   = n;
    if (!vote) begin
      if (n != 1) n_next = n - 2;
    end else if (n != k_max) begin
      n_next   = n + 2;
      escalate = 1;
    end else begin
      confirm = 1;
    end
  endfunction

endpackage
