// ldpc_tb_pkg -- test helpers shared by the decoder testbenches: an encoder
// for the rate-1/2, z = 81 IEEE 802.11n code, a syndrome check, a noisy
// BPSK channel producing 10-bit LLRs, and a reference layered normalised
// min-sum decoder written edge by edge (full check-message storage, no
// compression) with the same number formats as the hardware, so that
// hard decisions can be compared bit for bit.
package ldpc_tb_pkg;
  import ldpc_pkg::*;

  localparam int N = NB * Z;   // 1944
  localparam int K = (NB - MB) * Z;

  typedef bit  cw_t  [N];
  typedef int  llrv_t[N];

  // Encoder: dual-diagonal parity part (column 12 has shifts 1,0,1 in rows
  // 0, 6, 11; columns 13..23 are the staircase).
  function automatic void encode(input bit info[K], output cw_t cw);
    bit lam [MB][Z];
    bit p   [MB][Z];
    for (int i = 0; i < K; i++) cw[i] = info[i];
    for (int i = 0; i < MB; i++)
      for (int r = 0; r < Z; r++) begin
        lam[i][r] = 0;
        for (int j = 0; j < NB - MB; j++)
          if (HB[i][j] >= 0) lam[i][r] ^= info[j*Z + (r + HB[i][j]) % Z];
      end
    for (int r = 0; r < Z; r++) begin
      p[0][r] = 0;
      for (int i = 0; i < MB; i++) p[0][r] ^= lam[i][r];
    end
    for (int r = 0; r < Z; r++) p[1][r] = lam[0][r] ^ p[0][(r + 1) % Z];
    for (int i = 1; i < MB - 1; i++)
      for (int r = 0; r < Z; r++)
        p[i+1][r] = lam[i][r] ^ p[i][r] ^ ((i == 6) ? p[0][r] : 1'b0);
    for (int i = 0; i < MB; i++)
      for (int r = 0; r < Z; r++) cw[K + i*Z + r] = p[i][r];
  endfunction

  // Number of unsatisfied parity checks of a word.
  function automatic int syndrome_weight(input cw_t cw);
    int w = 0;
    for (int i = 0; i < MB; i++)
      for (int r = 0; r < Z; r++) begin
        bit s = 0;
        for (int j = 0; j < NB; j++)
          if (HB[i][j] >= 0) s ^= cw[j*Z + (r + HB[i][j]) % Z];
        w += s;
      end
    return w;
  endfunction

  // Approximate standard normal sample (sum of 12 uniforms).
  function automatic real gauss();
    real s = 0.0;
    for (int i = 0; i < 12; i++) s += real'($urandom % 65536) / 65536.0;
    return s - 6.0;
  endfunction

  // BPSK (bit 0 -> +amp) plus Gaussian noise, rounded and clipped to LLR_W.
  function automatic void channel(input cw_t cw, input real amp,
                                  input real sigma, output llrv_t llr);
    int lim = (1 << (LLR_W - 1)) - 1;
    for (int i = 0; i < N; i++) begin
      real y = (cw[i] ? -amp : amp) + sigma * gauss();
      int v = int'(y);
      if (v > lim) v = lim;
      if (v < -lim) v = -lim;
      llr[i] = v;
    end
  endfunction

  function automatic int sat(input int v);
    if (v > P_MAX) return P_MAX;
    if (v < -P_MAX) return -P_MAX;
    return v;
  endfunction

  // Reference decoder: plain layered schedule, every edge message stored.
  function automatic void ref_decode(input llrv_t llr, input int iters,
                                     output cw_t hd);
    int P [N];
    int R [MB][NB][Z];
    int Q [NB][Z];
    for (int i = 0; i < N; i++) P[i] = llr[i];
    for (int l = 0; l < MB; l++)
      for (int j = 0; j < NB; j++)
        for (int r = 0; r < Z; r++) R[l][j][r] = 0;
    for (int it = 0; it < iters; it++)
      for (int l = 0; l < MB; l++) begin
        for (int j = 0; j < NB; j++)
          if (HB[l][j] >= 0)
            for (int r = 0; r < Z; r++)
              Q[j][r] = sat(P[j*Z + (r + HB[l][j]) % Z] - R[l][j][r]);
        for (int r = 0; r < Z; r++) begin
          int m1 = P_MAX + 1, m2 = P_MAX + 1, at = -1;
          bit sp = 0;
          for (int j = 0; j < NB; j++)
            if (HB[l][j] >= 0) begin
              int a = (Q[j][r] < 0) ? -Q[j][r] : Q[j][r];
              sp ^= (Q[j][r] < 0);
              if (a < m1) begin m2 = m1; m1 = a; at = j; end
              else if (a < m2) m2 = a;
            end
          if (m2 > P_MAX) m2 = P_MAX;
          m1 = m1 - m1 / 4;
          m2 = m2 - m2 / 4;
          for (int j = 0; j < NB; j++)
            if (HB[l][j] >= 0) begin
              int mag = (j == at) ? m2 : m1;
              bit s = sp ^ (Q[j][r] < 0);
              R[l][j][r] = s ? -mag : mag;
              P[j*Z + (r + HB[l][j]) % Z] = sat(Q[j][r] + R[l][j][r]);
            end
        end
      end
    for (int i = 0; i < N; i++) hd[i] = (P[i] < 0);
  endfunction
endpackage
