// tb_ref_pkg: bit-exact software model of the learning core's arithmetic,
// used by the testbenches as their reference.
//
// Values are plain ints holding Q7.8 numbers. The convolution is written in
// the paper's own 1-based form, Y(i,j) = sum_k sum_l Q(h-k, w-l) X(1+s(i-1)-k,
// 1+s(j-1)-l) with X = 0 outside the input, rather than in the index order
// the hardware walks, so an error in the hardware's address arithmetic shows
// up as a mismatch. Requantisation: arithmetic shift right by 8, saturation
// to 16 bits, optional ReLU.
package tb_ref_pkg;

  function automatic int requant(longint acc, bit relu);
    longint s;
    s = acc >>> 8;
    if (s > 32767) s = 32767;
    if (s < -32768) s = -32768;
    if (relu && s < 0) s = 0;
    return int'(s);
  endfunction

  function automatic bit would_sat(longint acc);
    longint s;
    s = acc >>> 8;
    return (s > 32767) || (s < -32768);
  endfunction

  // x: C x H x W channel-major; weights at wb + ((f*C + c)*K + r-1)*K + q-1
  // (1-based filter row r and column q), bias at bb + f. Output F x HO x WO.
  function automatic void conv(ref int x[], input int C, input int H, input int W,
                               ref int wm[], input int F, input int K, input int S,
                               input int wb, input int bb, input bit relu,
                               ref int y[], output int HO, output int WO, inout int nsat);
    longint acc;
    int X, Q;
    HO = 1 + (H + K - 2) / S;
    WO = 1 + (W + K - 2) / S;
    y = new[F * HO * WO];
    for (int f = 0; f < F; f++)
      for (int i = 1; i <= HO; i++)
        for (int j = 1; j <= WO; j++) begin
          acc = longint'(wm[bb + f]) <<< 8;
          for (int c = 0; c < C; c++)
            for (int k = 0; k <= K - 1; k++)
              for (int l = 0; l <= K - 1; l++) begin
                int r, q;
                r = 1 + S * (i - 1) - k;
                q = 1 + S * (j - 1) - l;
                if (r < 1 || r > H || q < 1 || q > W) X = 0;
                else X = x[(c * H + (r - 1)) * W + (q - 1)];
                Q = wm[wb + ((f * C + c) * K + (K - k - 1)) * K + (K - l - 1)];
                acc += longint'(Q) * longint'(X);
              end
          if (would_sat(acc)) nsat++;
          y[(f * HO + (i - 1)) * WO + (j - 1)] = requant(acc, relu);
        end
  endfunction

  function automatic void maxpool(ref int x[], input int C, input int H, input int W,
                                  input int P, ref int y[], output int HO, output int WO);
    int m;
    HO = H / P;
    WO = W / P;
    y = new[C * HO * WO];
    for (int c = 0; c < C; c++)
      for (int i = 0; i < HO; i++)
        for (int j = 0; j < WO; j++) begin
          m = -32768;
          for (int a = 0; a < P; a++)
            for (int b = 0; b < P; b++)
              if (x[(c * H + i * P + a) * W + j * P + b] > m)
                m = x[(c * H + i * P + a) * W + j * P + b];
          y[(c * HO + i) * WO + j] = m;
        end
  endfunction

  // y[n] = sigma(b[n] + sum_i W[n][i] x[i]); W at wb + n*NI + i, b at bb + n
  function automatic void dense(ref int x[], input int NI, ref int wm[], input int NO,
                                input int wb, input int bb, input bit relu,
                                ref int y[], inout int nsat);
    longint acc;
    y = new[NO];
    for (int n = 0; n < NO; n++) begin
      acc = longint'(wm[bb + n]) <<< 8;
      for (int i = 0; i < NI; i++) acc += longint'(wm[wb + n * NI + i]) * longint'(x[i]);
      if (would_sat(acc)) nsat++;
      y[n] = requant(acc, relu);
    end
  endfunction

  // Random signed value in [-lim, lim].
  function automatic int srand(int lim);
    return int'($urandom_range(2 * lim)) - lim;
  endfunction

endpackage
