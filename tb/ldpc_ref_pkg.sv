// ldpc_ref_pkg: behavioural reference of the layered NS-FAID / min-sum decoder,
// written directly from the decoding rules (no shifters, no memories), used by
// the testbenches to check the RTL bit for bit.
//
// VN n of base-matrix column j, element e is n = j*Z + e. Check node r of
// layer l is connected, through the entry (l, j, b), to element (r + b) mod Z
// of column j. Messages are kept as integer values: alpha = sat31(gamma~ -
// beta), beta_new(k) = (product of the other edges' signs) x (min of the
// other edges' framed magnitudes), gamma~ = sat31(alpha + beta_new).
package ldpc_ref_pkg;
  import ldpc_pkg::*;

  localparam int NMAX = C_COLS * Z_DEF;

  function automatic int sat(input int x, input int m);
    return (x > m) ? m : ((x < -m) ? -m : x);
  endfunction

  // framed magnitude F(min(|a|, Q))
  function automatic int fmag(input fra_lut_t lut, input int a);
    int m;
    m = (a < 0) ? -a : a;
    if (m > QMAX) m = QMAX;
    return int'(lut[m]);
  endfunction

  // Decode llr[0 .. C*z-1] (values in [-Q, Q]) for nit iterations.
  function automatic void decode(input fra_lut_t lut, input int z, input int nit,
                                 input int llr[NMAX], output bit hard[NMAX]);
    int gam [NMAX];
    int beta [N_LAYERS][DC][Z_DEF];
    int a [DC];
    int fm [DC];
    bit sg [DC];
    int nn [DC];
    for (int n = 0; n < C_COLS*z; n++) gam[n] = llr[n];
    for (int l = 0; l < N_LAYERS; l++)
      for (int k = 0; k < DC; k++)
        for (int r = 0; r < Z_DEF; r++) beta[l][k][r] = 0;
    for (int it = 0; it < nit; it++)
      for (int l = 0; l < N_LAYERS; l++)
        for (int r = 0; r < z; r++) begin
          for (int k = 0; k < DC; k++) begin
            nn[k] = LAYER_COL[l][k]*z + (r + LAYER_SHIFT[l][k] % z) % z;
            a[k]  = sat(gam[nn[k]] - beta[l][k][r], QTMAX);
            fm[k] = fmag(lut, a[k]);
            sg[k] = (a[k] < 0);
          end
          for (int k = 0; k < DC; k++) begin
            int mn;
            bit s;
            mn = QMAX + 1;
            s  = 0;
            for (int j = 0; j < DC; j++)
              if (j != k) begin
                if (fm[j] < mn) mn = fm[j];
                s ^= sg[j];
              end
            beta[l][k][r] = s ? -mn : mn;
            gam[nn[k]]    = sat(a[k] + beta[l][k][r], QTMAX);
          end
        end
    for (int n = 0; n < NMAX; n++) hard[n] = (n < C_COLS*z) ? (gam[n] < 0) : 1'b0;
  endfunction

  // Gaussian sample (Box-Muller) from $urandom
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1000000, 1)) ) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0)) ) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * 3.14159265358979 * u2);
  endfunction

  // Quantised channel LLR of a transmitted +1 (bit 0) or -1 (bit 1):
  // [mu * (x + sigma * noise)] clipped to [-Q, Q].
  function automatic int chan_llr(input bit b, input real sigma, input real mu);
    real y;
    int  v;
    y = (b ? -1.0 : 1.0) + sigma * gauss();
    v = int'($rtoi(mu * y + ((mu * y) >= 0.0 ? 0.5 : -0.5)));
    return sat(v, QMAX);
  endfunction
endpackage
