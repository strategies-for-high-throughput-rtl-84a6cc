// ldpc_ref_pkg: reference model shared by the decoder testbenches.
//
// ref_decode() runs layered scaled min-sum decoding of the 802.11n z=81 code strictly
// layer after layer, in the fixed point of the hardware: 10-bit values saturated to
// +-511, q = sat(p - r), r = sign * floor(3 * min / 4), p = sat(q + r), CN messages zero
// at the start, a fixed number of iterations. It returns how many q values saturated.
package ldpc_ref_pkg;
  import ldpc_pkg::*;

  typedef int app_t [NB][Z];

  function automatic int isat(int x);
    return (x > 511) ? 511 : (x < -511) ? -511 : x;
  endfunction

  function automatic int ref_decode(input app_t chan, output app_t app, input int iters);
    int cn [MB][JB][Z];
    int q [JB][Z];
    int f [Z], s [Z];
    bit sp [Z];
    int n_sat;
    n_sat = 0;
    for (int c = 0; c < NB; c++) for (int r = 0; r < Z; r++) app[c][r] = chan[c][r];
    for (int u = 0; u < MB; u++) for (int w = 0; w < JB; w++) for (int r = 0; r < Z; r++) cn[u][w][r] = 0;
    for (int it = 0; it < iters; it++) begin
      for (int u = 0; u < MB; u++) begin
        for (int r = 0; r < Z; r++) begin f[r] = 511; s[r] = 511; sp[r] = 0; end
        for (int w = 0; w < JB; w++) begin
          int c, sh;
          c = BETA_I[u][w];
          if (c < 0) continue;
          sh = HB[u][c];
          for (int r = 0; r < Z; r++) begin
            int m, raw;
            raw = app[c][(r + sh) % Z] - cn[u][w][r];
            if (raw > 511 || raw < -511) n_sat++;
            q[w][r] = isat(raw);
            m = (q[w][r] < 0) ? -q[w][r] : q[w][r];
            if (m <= f[r]) begin s[r] = f[r]; f[r] = m; end
            else if (m < s[r]) s[r] = m;
            sp[r] ^= (q[w][r] < 0);
          end
        end
        for (int w = 0; w < JB; w++) begin
          int c, sh;
          c = BETA_I[u][w];
          if (c < 0) continue;
          sh = HB[u][c];
          for (int r = 0; r < Z; r++) begin
            int m, mn, rr;
            m  = (q[w][r] < 0) ? -q[w][r] : q[w][r];
            mn = (m != f[r]) ? f[r] : s[r];
            rr = (3 * mn) >>> 2;
            if (sp[r] ^ (q[w][r] < 0)) rr = -rr;
            cn[u][w][r] = rr;
            app[c][(r + sh) % Z] = isat(q[w][r] + rr);
          end
        end
      end
    end
    return n_sat;
  endfunction

endpackage
