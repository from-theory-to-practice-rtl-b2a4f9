// mwc_model_pkg: reference model used by the testbenches.
//
// make_sensing builds the m x L sensing matrix of the MWC with sign
// waveforms, A = S F D of eq. (19)/(20), in floating point from a random sign
// matrix S (M = L), and returns it quantised to integers whose largest part
// is 2^14. Column p (0..L-1) is the slice z_p = X(f + (p - L0) fp), so
// A[i][p] = c_{i, L0-p} with
//   c_il = d_l * sum_k alpha_ik exp(-j 2 pi l k / M),
//   d_0 = 1/M,  d_l = (sin(2 pi l/M) - j (1 - cos(2 pi l/M))) / (2 pi l).
// make_samples draws a sparse slice vector z[n] on a given set of symmetric
// slice pairs (z of the mirror slice is the conjugate, so y is real) and
// returns y[n] = A z[n], scaled so that the largest sample uses 15 bits.
package mwc_model_pkg;

  localparam real PI = 3.14159265358979323846;

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // are/aim: quantised A, index i*nl + p; alpha: signs, index i*nl + k
  function automatic void make_sensing(input int m, input int nl,
                                       ref int are[], ref int aim[], ref bit alpha[]);
    real fre[], fim[];
    real mx;
    int l0;
    l0 = (nl - 1) / 2;
    fre = new[m*nl]; fim = new[m*nl]; are = new[m*nl]; aim = new[m*nl]; alpha = new[m*nl];
    foreach (alpha[x]) alpha[x] = 1'($urandom);
    mx = 0.0;
    for (int i = 0; i < m; i++)
      for (int p = 0; p < nl; p++) begin
        int l;
        real dre, dim, sre, sim, w;
        l = l0 - p;
        if (l == 0) begin dre = 1.0 / nl; dim = 0.0; end
        else begin
          w = 2.0 * PI * l / nl;
          dre = $sin(w) / (2.0 * PI * l);
          dim = -(1.0 - $cos(w)) / (2.0 * PI * l);
        end
        sre = 0.0; sim = 0.0;
        for (int k = 0; k < nl; k++) begin
          real s;
          s = alpha[i*nl + k] ? 1.0 : -1.0;
          sre += s * $cos(2.0 * PI * l * k / nl);
          sim -= s * $sin(2.0 * PI * l * k / nl);
        end
        fre[i*nl + p] = dre * sre - dim * sim;
        fim[i*nl + p] = dre * sim + dim * sre;
        if (fabs(fre[i*nl + p]) > mx) mx = fabs(fre[i*nl + p]);
        if (fabs(fim[i*nl + p]) > mx) mx = fabs(fim[i*nl + p]);
      end
    foreach (fre[x]) begin
      are[x] = $rtoi(fre[x] * 16384.0 / mx);
      aim[x] = $rtoi(fim[x] * 16384.0 / mx);
    end
  endfunction

  // pairs: slice indices p (p <= L0); ns samples; y index n*m + i
  // zre/zim: the drawn z, index n*nl + p
  function automatic void make_samples(input int m, input int nl, input int ns,
                                       ref int are[], ref int aim[], ref int pairs[],
                                       ref int y[], ref real zre[], ref real zim[],
                                       output real yscale);
    real yr[];
    real mx;
    yr = new[ns*m]; y = new[ns*m]; zre = new[ns*nl]; zim = new[ns*nl];
    foreach (zre[x]) begin zre[x] = 0.0; zim[x] = 0.0; end
    for (int n = 0; n < ns; n++)
      foreach (pairs[q]) begin
        int p, pm;
        p = pairs[q]; pm = nl - 1 - p;
        zre[n*nl + p] = ($urandom % 2001) / 1000.0 - 1.0;
        zim[n*nl + p] = (p == pm) ? 0.0 : ($urandom % 2001) / 1000.0 - 1.0;
        zre[n*nl + pm] = zre[n*nl + p];
        zim[n*nl + pm] = -zim[n*nl + p];
      end
    mx = 0.0;
    for (int n = 0; n < ns; n++)
      for (int i = 0; i < m; i++) begin
        real acc;
        acc = 0.0;
        for (int p = 0; p < nl; p++)
          acc += are[i*nl + p] * zre[n*nl + p] - aim[i*nl + p] * zim[n*nl + p];
        yr[n*m + i] = acc;
        if (fabs(acc) > mx) mx = fabs(acc);
      end
    yscale = 16000.0 / mx;
    foreach (yr[x]) y[x] = $rtoi(yr[x] * yscale);
  endfunction

endpackage
