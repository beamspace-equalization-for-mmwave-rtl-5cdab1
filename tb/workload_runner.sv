// workload_runner: drives one at_cspade instance with a synthetic mmWave
// uplink workload and checks it (used by tb_workloads).
//
// It runs NCH line-of-sight realizations, then NCH non-line-of-sight ones.
// For each channel realization it
//   1. draws a B x U antenna-domain channel of plane waves from a uniform linear
//      array (LoS: one path per user; non-LoS: four paths of random angle and
//      Rayleigh gain), normalized to a column norm of sqrt(B), users placed in
//      a 120 degree sector;
//   2. forms the beamspace channel with the unitary DFT and the beamspace LMMSE
//      matrix W = (H^H H + rho I)^-1 H^H in floating point (Gauss-Jordan);
//   3. sends T random 16-QAM vectors through the channel with complex Gaussian
//      noise at the given SNR, quantizes every antenna with a 6-bit uniform
//      symmetric quantizer (step = D1 * max_b sigma_b, D1 = 0.1), applies the
//      unitary DFT and rounds to the 9-bit, 1-fractional-bit beamspace format;
//   4. scales W by a gain g (so that s_hat = g * s fits the 13-bit output) and
//      the quantizer step, and rounds it to 12 bits with 11 fractional bits;
//   5. loads W into the equalizer and streams the T vectors twice, first with
//      save power on, then off.
// Every output is compared bit-exactly with an integer model of the equalizer
// 9 cycles after its input. The symbol error rates with and without save power
// (nearest 16-QAM point of s_hat / g) and the multiplier activity rate are
// reported; the run fails if save power costs more than 5 % symbol errors, or
// if symbol errors exceed 10 % without it.
//
// Thresholds are set per realization: tau_w = TW_FRAC * max |W entry| and
// tau_y = TY_FRAC * rms(y entry), both in LSBs.
module workload_runner #(
  parameter int  B       = 64,
  parameter int  U       = 8,
  parameter int  NCH     = 3,     // channel realizations per channel type
  parameter int  T       = 60,    // receive vectors per realization
  parameter real SNR_DB  = 20.0,
  parameter real TW_FRAC = 0.05,
  parameter real TY_FRAC = 0.35
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output bit   done
);
  localparam real PI  = 3.14159265358979;
  localparam real D1  = 0.1;
  localparam int  LAT = 2 + $clog2(B) + 1;
  localparam int  XW = 12, SW = 13, HIST = 16;
  localparam int  SMAX = (1 << (SW - 1)) - 1, SMIN = -(1 << (SW - 1));

  logic                 rst_n, lw, sp;
  logic [XW-1:0]        tau_y, tau_w;
  logic signed [XW-1:0] x_re [B], x_im [B];
  logic signed [SW-1:0] s_re [U], s_im [U];
  logic                 s_valid;

  at_cspade #(.B(B), .U(U)) dut (.clk, .rst_n, .lw, .sp, .tau_y, .tau_w, .x_re, .x_im,
                                 .s_re, .s_im, .s_valid);

  // ---------------------------------------------------------------- random
  function automatic real urand();
    return (real'($urandom) + 1.0) / 4294967297.0;
  endfunction
  function automatic real gauss();  // N(0,1)
    return $sqrt(-2.0 * $ln(urand())) * $cos(2.0 * PI * urand());
  endfunction

  // ---------------------------------------------------------------- model state
  real hr [B][U], hi [B][U];   // antenna domain channel
  real gr [B][U], gi [B][U];   // beamspace channel
  real wr [U][B], wi [U][B];   // beamspace LMMSE matrix
  int  wqr [U][B], wqi [U][B]; // quantized W
  bit  cw [U][B];
  int  yqr [T][B], yqi [T][B]; // quantized beamspace receive vectors
  int  sr [T][U], si [T][U];   // transmitted 16-QAM symbols, levels -3..3
  real g, delta;

  int  cyc, row;
  bit  eval [HIST];
  int  er [HIST][U], ei [HIST][U], etag [HIST];
  bit  nlos;                   // channel type of the current realization
  int  serr [2][2], stot [2][2];  // [LoS/NLoS][SP off/on]
  longint n_act [2], n_prod [2];

  function automatic bit is_small(input int re, input int im, input int tau);
    int ar = (re < 0) ? -re : re;
    int ai = (im < 0) ? -im : im;
    return (ar < tau) && (ai < tau);
  endfunction

  function automatic int sat(input longint v);
    longint f = v >>> 4;
    if (f > SMAX) return SMAX;
    if (f < SMIN) return SMIN;
    return int'(f);
  endfunction

  function automatic int qam_slice(input real v);  // nearest of -3,-1,1,3
    if (v < -2.0) return -3;
    if (v < 0.0)  return -1;
    if (v < 2.0)  return 1;
    return 3;
  endfunction

  // ---------------------------------------------------------------- channel
  task automatic make_channel(input bit NLOS);
    for (int u = 0; u < U; u++) begin
      real nrm = 0.0;
      int  np = NLOS ? 4 : 1;
      for (int b = 0; b < B; b++) begin hr[b][u] = 0.0; hi[b][u] = 0.0; end
      for (int l = 0; l < np; l++) begin
        real th  = (-60.0 + 120.0 * urand()) * PI / 180.0;
        real phi = PI * $sin(th);
        real ar  = NLOS ? gauss() : 1.0;
        real ai  = NLOS ? gauss() : 0.0;
        for (int b = 0; b < B; b++) begin
          hr[b][u] += ar * $cos(b * phi) - ai * $sin(b * phi);
          hi[b][u] += ar * $sin(b * phi) + ai * $cos(b * phi);
        end
      end
      for (int b = 0; b < B; b++) nrm += hr[b][u] ** 2 + hi[b][u] ** 2;
      nrm = $sqrt(real'(B) / nrm);
      for (int b = 0; b < B; b++) begin hr[b][u] *= nrm; hi[b][u] *= nrm; end
    end
    // beamspace: G = F H, F unitary DFT
    for (int k = 0; k < B; k++)
      for (int u = 0; u < U; u++) begin
        real accr = 0.0, acci = 0.0;
        for (int b = 0; b < B; b++) begin
          real a = -2.0 * PI * k * b / B;
          accr += hr[b][u] * $cos(a) - hi[b][u] * $sin(a);
          acci += hr[b][u] * $sin(a) + hi[b][u] * $cos(a);
        end
        gr[k][u] = accr / $sqrt(real'(B));
        gi[k][u] = acci / $sqrt(real'(B));
      end
  endtask

  // W = (G^H G + rho I)^-1 G^H, Gauss-Jordan on [A | G^H]
  task automatic make_lmmse(input real rho);
    real mr [U][U+B], mi [U][U+B];
    for (int i = 0; i < U; i++) begin
      for (int j = 0; j < U; j++) begin
        real accr = 0.0, acci = 0.0;
        for (int k = 0; k < B; k++) begin  // conj(G[k][i]) * G[k][j]
          accr += gr[k][i] * gr[k][j] + gi[k][i] * gi[k][j];
          acci += gr[k][i] * gi[k][j] - gi[k][i] * gr[k][j];
        end
        mr[i][j] = accr + ((i == j) ? rho : 0.0);
        mi[i][j] = acci;
      end
      for (int k = 0; k < B; k++) begin mr[i][U+k] = gr[k][i]; mi[i][U+k] = -gi[k][i]; end
    end
    for (int p = 0; p < U; p++) begin
      real dr = mr[p][p], di = mi[p][p], dn = dr * dr + di * di;
      real ir = dr / dn, ii = -di / dn;  // 1 / pivot
      for (int j = 0; j < U + B; j++) begin
        real tr = mr[p][j] * ir - mi[p][j] * ii;
        real ti = mr[p][j] * ii + mi[p][j] * ir;
        mr[p][j] = tr; mi[p][j] = ti;
      end
      for (int i = 0; i < U; i++) begin
        if (i != p) begin
          real fr = mr[i][p], fi = mi[i][p];
          for (int j = 0; j < U + B; j++) begin
            mr[i][j] -= fr * mr[p][j] - fi * mi[p][j];
            mi[i][j] -= fr * mi[p][j] + fi * mr[p][j];
          end
        end
      end
    end
    for (int u = 0; u < U; u++)
      for (int k = 0; k < B; k++) begin wr[u][k] = mr[u][U+k]; wi[u][k] = mi[u][U+k]; end
  endtask

  function automatic real absr(input real v);
    return (v < 0.0) ? -v : v;
  endfunction
  function automatic int absi(input int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int clampi(input int v, input int lo, input int hi_);
    return (v < lo) ? lo : (v > hi_) ? hi_ : v;
  endfunction

  // ---------------------------------------------------------------- stimulus
  task automatic make_vectors(input real n0);
    real sig2 = 0.0;
    for (int b = 0; b < B; b++) begin
      real v = n0;
      for (int u = 0; u < U; u++) v += hr[b][u] ** 2 + hi[b][u] ** 2;
      if (v > sig2) sig2 = v;
    end
    delta = D1 * $sqrt(sig2 / 2.0);
    for (int t = 0; t < T; t++) begin
      int ybr [B], ybi [B];  // ADC outputs in units of delta/2 (odd integers)
      for (int u = 0; u < U; u++) begin
        sr[t][u] = 2 * int'($urandom_range(0, 3)) - 3;
        si[t][u] = 2 * int'($urandom_range(0, 3)) - 3;
      end
      for (int b = 0; b < B; b++) begin
        real zr = $sqrt(n0 / 2.0) * gauss(), zi = $sqrt(n0 / 2.0) * gauss();
        for (int u = 0; u < U; u++) begin
          zr += (hr[b][u] * sr[t][u] - hi[b][u] * si[t][u]) / $sqrt(10.0);
          zi += (hr[b][u] * si[t][u] + hi[b][u] * sr[t][u]) / $sqrt(10.0);
        end
        ybr[b] = clampi(2 * int'($floor(zr / delta)) + 1, -63, 63);
        ybi[b] = clampi(2 * int'($floor(zi / delta)) + 1, -63, 63);
      end
      for (int k = 0; k < B; k++) begin
        real accr = 0.0, acci = 0.0;
        for (int b = 0; b < B; b++) begin
          real a = -2.0 * PI * k * b / B;
          accr += ybr[b] * $cos(a) - ybi[b] * $sin(a);
          acci += ybr[b] * $sin(a) + ybi[b] * $cos(a);
        end
        // y in units of delta is DFT(yb)/2; the 1-fractional-bit code is twice that
        yqr[t][k] = clampi(int'($floor(accr / $sqrt(real'(B)) + 0.5)), -256, 255);
        yqi[t][k] = clampi(int'($floor(acci / $sqrt(real'(B)) + 0.5)), -256, 255);
      end
    end
  endtask

  task automatic quantize_w();
    real mx = 0.0;
    foreach (wr[u, k]) begin
      if (absr(wr[u][k]) > mx) mx = absr(wr[u][k]);
      if (absr(wi[u][k]) > mx) mx = absr(wi[u][k]);
    end
    // s_hat(value) = sum W_fx(value) * y_fx(value), y_fx(value) = y / delta
    g = 0.25 / (mx * delta);
    if (g > 12.0) g = 12.0;
    foreach (wr[u, k]) begin
      wqr[u][k] = clampi(int'($floor(2048.0 * g * delta * wr[u][k] + 0.5)), -2048, 2047);
      wqi[u][k] = clampi(int'($floor(2048.0 * g * delta * wi[u][k] + 0.5)), -2048, 2047);
    end
  endtask

  // ---------------------------------------------------------------- cycle driver
  task automatic check_outputs();
    int k;
    if (cyc < LAT) return;
    k = (cyc - LAT) % HIST;
    checks++;
    if (s_valid !== eval[k]) begin
      failures++;
      if (failures < 10) $display("FAIL [U=%0d] s_valid=%0d expected %0d", U, s_valid, eval[k]);
    end
    if (eval[k]) begin
      int mode = (etag[k] >= T) ? 0 : 1;  // first pass SP on, second SP off
      int t = (etag[k] < 0) ? 0 : etag[k] % T;
      for (int u = 0; u < U; u++) begin
        checks++;
        if (s_re[u] !== SW'(er[k][u]) || s_im[u] !== SW'(ei[k][u])) begin
          failures++;
          if (failures < 10) $display("FAIL [U=%0d] user %0d: got %0d,%0dj expected %0d,%0dj",
                                      U, u, s_re[u], s_im[u], er[k][u], ei[k][u]);
        end
        if (etag[k] >= 0) stot[nlos][mode]++;
        if (etag[k] >= 0 && (qam_slice(real'(s_re[u]) / 256.0 / g * $sqrt(10.0)) != sr[t][u] ||
             qam_slice(real'(s_im[u]) / 256.0 / g * $sqrt(10.0)) != si[t][u])) serr[nlos][mode]++;
      end
    end
  endtask

  task automatic apply(input bit l, input bit s, input int xr [B], input int xi [B], input int tag);
    int k = cyc % HIST;
    check_outputs();
    lw = l; sp = s;
    for (int b = 0; b < B; b++) begin x_re[b] = XW'(xr[b]); x_im[b] = XW'(xi[b]); end
    if (l) begin
      for (int b = 0; b < B; b++) cw[row][b] = is_small(xr[b], xi[b], int'(tau_w));
      row++;
      eval[k] = 1'b0;
    end else begin
      row = 0;
      for (int u = 0; u < U; u++) begin
        longint ar = 0, ai = 0;
        for (int b = 0; b < B; b++) begin
          bit act = !(s && cw[u][b] && is_small(xr[b], xi[b], int'(tau_y)));
          if (s) begin n_prod[nlos]++; if (act) n_act[nlos]++; end
          if (act) begin
            ar += longint'(wqr[u][b]) * xr[b] - longint'(wqi[u][b]) * xi[b];
            ai += longint'(wqr[u][b]) * xi[b] + longint'(wqi[u][b]) * xr[b];
          end
        end
        er[k][u] = sat(ar); ei[k][u] = sat(ai);
      end
      eval[k] = 1'b1;
      etag[k] = tag;
    end
    @(negedge clk);
    cyc++;
  endtask

  int xr [B], xi [B];

  initial begin
    real n0 = $pow(10.0, -SNR_DB / 10.0);
    checks = 0; failures = 0; done = 1'b0;
    serr = '{'{0, 0}, '{0, 0}}; stot = '{'{0, 0}, '{0, 0}}; n_act = '{0, 0}; n_prod = '{0, 0};
    rst_n = 1'b0; lw = 1'b0; sp = 1'b0; tau_y = '0; tau_w = '0;
    foreach (x_re[b]) begin x_re[b] = '0; x_im[b] = '0; end
    foreach (eval[k]) begin eval[k] = 1'b0; etag[k] = 0; end
    cyc = 0; row = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int ch = 0; ch < 2 * NCH; ch++) begin
      real rms = 0.0;
      int  mxw = 0;
      nlos = (ch >= NCH);
      make_channel(nlos);
      make_lmmse(n0);
      make_vectors(n0);
      quantize_w();
      foreach (wqr[u, k]) begin
        if (absi(wqr[u][k]) > mxw) mxw = absi(wqr[u][k]);
        if (absi(wqi[u][k]) > mxw) mxw = absi(wqi[u][k]);
      end
      foreach (yqr[t, k]) rms += real'(yqr[t][k]) ** 2 + real'(yqi[t][k]) ** 2;
      rms = $sqrt(rms / (2.0 * T * B));
      tau_w = XW'(int'(TW_FRAC * mxw));
      tau_y = XW'(int'(TY_FRAC * rms));
      for (int u = 0; u < U; u++) begin
        for (int b = 0; b < B; b++) begin xr[b] = wqr[u][b]; xi[b] = wqi[u][b]; end
        apply(1'b1, 1'b0, xr, xi, 0);
      end
      for (int pass = 0; pass < 2; pass++)
        for (int t = 0; t < T; t++) begin
          for (int b = 0; b < B; b++) begin xr[b] = yqr[t][b]; xi[b] = yqi[t][b]; end
          apply(1'b0, (pass == 0), xr, xi, pass * T + t);
        end
      // flush before the next matrix is loaded
      for (int b = 0; b < B; b++) begin xr[b] = 0; xi[b] = 0; end
      for (int i = 0; i < LAT; i++) apply(1'b0, 1'b0, xr, xi, -1);
    end
    done = 1'b1;
  end

  // statistics, read by the testbench at the end
  function automatic real ser(input int nl, input int mode);
    return (stot[nl][mode] > 0) ? real'(serr[nl][mode]) / stot[nl][mode] : 0.0;
  endfunction
  function automatic real activity(input int nl);
    return (n_prod[nl] > 0) ? real'(n_act[nl]) / n_prod[nl] : 1.0;
  endfunction
endmodule
