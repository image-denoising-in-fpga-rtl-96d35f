// genre_ref_pkg -- bit-true reference model of the GenRE-Haar denoiser,
// written for the testbenches independently of the RTL structure.
//
// The model works on the whole row-vectorised stream at once: the image,
// then zeros (the flush), with zeros before it. It computes the LL cascade
// and the decomposition sub-bands anchored at their bottom-right sample,
// then every column of Psi centred on each pixel p: the recomposition
// window of a level-j column ends at p + (L-1)(LINE+1), L = 2^j. Box sums
// are taken either by direct double loops (`direct` = 1, slow, used on
// small images) or by running sums. It then forms Q/N, c/N, runs the
// gradient descent with the same word lengths as the hardware and produces
// the denoised pixels. Arrays are flat and carry OFF leading zeros so that
// look-backs need no bounds checks.
package genre_ref_pkg;

  function automatic int dfrac(input int j);
    return (2 * j < 6) ? 2 * j : 6;
  endfunction

  function automatic int rfrac(input int j);
    return (dfrac(j) + 2 * j < 6) ? dfrac(j) + 2 * j : 6;
  endfunction

  class genre_model;
    int W, H, LV, N, NB, LAT, T, OFF, TT, LOG2N;
    longint x[];      // [TT]
    longint ll[];     // [LV*TT]
    longint bd[];     // [NB*TT]
    longint psi[];    // [NB*N]
    longint qn[];     // [NB*NB]
    longint cn[];     // [NB]
    int     alpha[];  // [NB]
    int     xhat[];   // [N]

    function new(input int w, input int h, input int lv);
      W = w; H = h; LV = lv; N = w * h; NB = 3 * lv + 1;
      LAT = lv + 3 + ((1 << lv) - 1) * (w + 1);
      T = N + LAT; OFF = LAT + 8; TT = T + OFF;
      LOG2N = $clog2(N);
      x = new[TT]; ll = new[LV * TT]; bd = new[NB * TT];
      psi = new[NB * N]; qn = new[NB * NB]; cn = new[NB];
      alpha = new[NB]; xhat = new[N];
    endfunction

    function automatic int level_of(input int i);
      return (i >= 3 * LV) ? LV : i / 3 + 1;
    endfunction

    // Filter bank: fills ll, bd and psi from the image img[0..N-1].
    function automatic void run_filter_bank(input byte unsigned img[], input bit direct);
      longint r[], cs[];
      foreach (x[n]) x[n] = 0;
      for (int n = 0; n < N; n++) x[OFF + n] = img[n];
      foreach (ll[n]) ll[n] = 0;
      foreach (bd[n]) bd[n] = 0;
      for (int n = 0; n < TT; n++) ll[n] = x[n];
      // LL cascade and sub-bands.
      for (int j = 1; j <= LV; j++) begin
        int d  = 1 << (j - 1);
        int sh = dfrac(j - 1) + 2 - dfrac(j);
        int src = (j - 1) * TT;
        for (int n = OFF; n < TT; n++) begin
          longint vd = ll[src + n];
          longint vc = ll[src + n - d];
          longint vb = ll[src + n - d * W];
          longint va = ll[src + n - d * W - d];
          if (j < LV) ll[j * TT + n] = (vd + va + vc + vb) >>> sh;
          bd[(3 * (j - 1) + 0) * TT + n] = (vd - va + vc - vb) >>> sh;
          bd[(3 * (j - 1) + 1) * TT + n] = (vd - va - vc + vb) >>> sh;
          bd[(3 * (j - 1) + 2) * TT + n] = (vd + va - vc - vb) >>> sh;
          if (j == LV) bd[3 * LV * TT + n] = (vd + va + vc + vb) >>> sh;
        end
      end
      // Recomposition of every column.
      r = new[TT]; cs = new[TT];
      for (int i = 0; i < NB; i++) begin
        int j  = level_of(i);
        int hh = 1 << (j - 1);
        int ll_band = (i == 3 * LV);
        int kind = ll_band ? 3 : i % 3;
        int sh = dfrac(j) + 2 * j - rfrac(j);
        int base = i * TT;
        if (!direct) begin
          foreach (r[n]) begin r[n] = 0; cs[n] = 0; end
          for (int n = hh; n < TT; n++) r[n] = r[n-1] + bd[base + n] - bd[base + n - hh];
          for (int n = hh * W; n < TT; n++) cs[n] = cs[n-W] + r[n] - r[n - hh * W];
        end
        for (int p = 0; p < N; p++) begin
          longint a = OFF + p + longint'((2 * hh - 1)) * (W + 1);
          longint q4 [4];   // D, C, B, A boxes
          longint rec;
          for (int qd = 0; qd < 4; qd++) begin
            longint an = a - ((qd >= 2) ? hh * W : 0) - ((qd % 2) ? hh : 0);
            if (direct) begin
              q4[qd] = 0;
              for (int dr = 0; dr < hh; dr++)
                for (int dc = 0; dc < hh; dc++)
                  q4[qd] += bd[base + an - dr * W - dc];
            end else begin
              q4[qd] = cs[an];
            end
          end
          // q4: 0 = D, 1 = C, 2 = B, 3 = A (causal quadrants)
          case (kind)
            0: rec = q4[3] + q4[2] - q4[1] - q4[0];   // LH flipped
            1: rec = q4[3] - q4[0] - q4[2] + q4[1];   // HL flipped
            2: rec = q4[0] + q4[3] - q4[1] - q4[2];   // HH
            default: rec = q4[0] + q4[1] + q4[2] + q4[3];
          endcase
          psi[i * N + p] = (rec >>> sh) <<< (6 - rfrac(j));
        end
      end
    endfunction

    // Q/N and c/N, 12 fraction bits.
    function automatic void run_estimate(input int sigma2);
      for (int i = 0; i < NB; i++) begin
        longint sy = 0;
        for (int j = 0; j < NB; j++) begin
          longint s = 0;
          for (int p = 0; p < N; p++) s += psi[i * N + p] * psi[j * N + p];
          qn[i * NB + j] = s >>> LOG2N;
        end
        for (int p = 0; p < N; p++) sy += psi[i * N + p] * longint'(x[OFF + p]);
        cn[i] = ((sy <<< 6) >>> LOG2N) - ((longint'(sigma2) <<< 12) >>> (2 * level_of(i)));
      end
    endfunction

    function automatic void run_gd(input int iters);
      logic signed [127:0] acc, res;
      int na [];
      na = new[NB];
      foreach (alpha[i]) alpha[i] = 1 << 24;
      for (int it = 0; it < iters; it++) begin
        for (int i = 0; i < NB; i++) begin
          acc = 0;
          for (int k = 0; k < NB; k++) acc += 128'(qn[i * NB + k]) * 128'(alpha[k]);
          res = (128'(cn[i]) <<< 12) - (acc >>> 12);
          na[i] = alpha[i] + int'(res >>> (13 + 2));  // mu = 2^-13 on Q/(4N)
        end
        foreach (alpha[i]) alpha[i] = na[i];
      end
    endfunction

    function automatic void run_denoise();
      logic signed [127:0] s, rnd;
      for (int p = 0; p < N; p++) begin
        s = 0;
        for (int i = 0; i < NB; i++) s += 128'(psi[i * N + p]) * 128'(alpha[i]);
        rnd = (s + (128'(1) <<< 29)) >>> 30;
        xhat[p] = (rnd < 0) ? 0 : (rnd > 255) ? 255 : int'(rnd);
      end
    endfunction
  endclass

  // Synthetic noisy test image: smooth ramps and a bright and a dark block,
  // plus roughly uniform noise of the given amplitude, clipped to 8 bits.
  function automatic void make_image(input int w, input int h, input int amp,
                                     input int seed, output byte unsigned img[]);
    int unsigned s;
    s = seed;
    img = new[w * h];
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int v, nz;
        v = 20 + (r * 60) / h + (c * 40) / w;
        if (r >= h / 4 && r < h / 2 && c >= w / 4 && c < w / 2) v = 255;
        if (r >= h / 2 && r < 3 * h / 4 && c >= w / 2 && c < 3 * w / 4) v = 0;
        s = s * 1103515245 + 12345;
        nz = int'((s >> 16) % (2 * amp + 1)) - amp;
        v = v + nz;
        img[r * w + c] = (v < 0) ? 8'd0 : (v > 255) ? 8'd255 : 8'(v);
      end
  endfunction

endpackage
