// tb_music_lite_svd_music -- full-size workload: MUSIC range estimation of one
// radar target with the SVD engine at its default parameters (N = 32,
// 32 sweeps).
//
// Scenario (OFDM radar): 32 subcarriers spaced 960 kHz, 16 OFDM symbols,
// one target at 50 m, white Gaussian noise at 10 dB SNR.  After removing the
// transmitted symbols, subcarrier n of symbol s carries
//   exp(j(-2 pi n df 2R/c + phi_s)) + noise,
// and the test keeps its real part (the engine is real-valued), with phi_s a
// random phase per symbol.  The 32 x 32 sample covariance over the 16
// symbols, scaled so that its largest eigenvalue is 15 000, is loaded into
// the engine.  After the run the two rows of U^T with the largest |B[i][i]|
// span the signal subspace and the other 30 the noise subspace E_N.  The
// MUSIC pseudo-spectrum
//   P(r) = (|a_c|^2 + |a_s|^2) / (|E_N^T a_c|^2 + |E_N^T a_s|^2),
//   a_c[n] = cos(2 pi n df 2r/c), a_s[n] = sin(2 pi n df 2r/c),
// is searched over 1 .. 77 m in 1 cm steps (real data folds ranges about
// c/(4 df) = 78 m).  The same is done in double precision with a Jacobi
// eigen-decomposition of the same integer matrix.  Checks: the two signal
// singular values against the reference eigenvalues, the trace, U^T
// orthogonality, the estimated range against 50 m and against the double-
// precision estimate, and that the run ends within the cycle bound.
`timescale 1ns/1ps
module tb_music_lite_svd_music;
  import music_lite_pkg::*;

  localparam int  N    = 32;
  localparam int  S    = 16;
  localparam real DF   = 960.0e3;
  localparam real C0   = 3.0e8;
  localparam real RT   = 50.0;
  localparam real SNR  = 10.0;
  localparam real PI   = 3.14159265358979;
  localparam int  UNIT = 16384;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        wr_en, start, busy, done, rd_sel;
  logic [4:0]  wr_row, wr_col, rd_row, rd_col;
  data_t       wr_data, rd_data;

  music_lite_svd dut (
    .clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data,
    .start, .busy, .done, .rd_sel, .rd_row, .rd_col, .rd_data
  );

  int checks = 0, failures = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  function automatic real rabs(input real v); return v < 0.0 ? -v : v; endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1_000_000))) / 1_000_001.0;
    u2 = (real'($urandom_range(0, 1_000_000))) / 1_000_001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  real X [S][N];
  real R [N][N];
  int  Ri [N][N];
  real J [N][N];     // Jacobi working matrix
  real V [N][N];     // Jacobi eigenvectors (columns)
  real Ub [N][N];    // engine U^T / UNIT
  real Bd [N];       // engine |B[i][i]|

  // Cyclic Jacobi eigen-decomposition of the symmetric matrix in J.
  task automatic jacobi();
    real th, c, s, t1, t2, apq, app, aqq;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) V[i][j] = (i == j) ? 1.0 : 0.0;
    for (int sweep = 0; sweep < 12; sweep++)
      for (int p = 0; p < N - 1; p++)
        for (int q = p + 1; q < N; q++) begin
          apq = J[p][q]; app = J[p][p]; aqq = J[q][q];
          if (rabs(apq) > 1e-12) begin
            th = 0.5 * $atan2(2.0 * apq, aqq - app);
            c = $cos(th); s = $sin(th);
            for (int k = 0; k < N; k++) begin
              t1 = c * J[k][p] - s * J[k][q]; t2 = s * J[k][p] + c * J[k][q];
              J[k][p] = t1; J[k][q] = t2;
            end
            for (int k = 0; k < N; k++) begin
              t1 = c * J[p][k] - s * J[q][k]; t2 = s * J[p][k] + c * J[q][k];
              J[p][k] = t1; J[q][k] = t2;
            end
            for (int k = 0; k < N; k++) begin
              t1 = c * V[k][p] - s * V[k][q]; t2 = s * V[k][p] + c * V[k][q];
              V[k][p] = t1; V[k][q] = t2;
            end
          end
        end
  endtask

  // MUSIC peak search; noise basis rows are given by nb[k][n], k < NN.
  localparam int NN = N - 2;
  real nb [NN][N];
  function automatic real music_peak();
    real best_p, best_r, r, ph, num, den, pc, ps, pp;
    best_p = -1.0; best_r = 0.0;
    for (int step = 100; step <= 7700; step++) begin
      r = step * 0.01;
      num = 0.0; den = 0.0;
      for (int k = 0; k < NN; k++) begin
        pc = 0.0; ps = 0.0;
        for (int n = 0; n < N; n++) begin
          ph = 2.0 * PI * n * DF * 2.0 * r / C0;
          pc += nb[k][n] * $cos(ph);
          ps += nb[k][n] * $sin(ph);
        end
        den += pc * pc + ps * ps;
      end
      num = real'(N);
      pp = num / den;
      if (pp > best_p) begin best_p = pp; best_r = r; end
    end
    return best_r;
  endfunction

  initial begin
    real namp, phs, lmax, scale, ev [N], tmp, r_hw, r_ref, tr_in, tr_out, dot;
    int  idx [N], ti, cyc;
    wr_en = 0; start = 0; rd_sel = 0; wr_row = 0; wr_col = 0; wr_data = 0; rd_row = 0; rd_col = 0;
    // ---- snapshots and covariance ----
    namp = $sqrt(0.5 / (10.0 ** (SNR / 10.0)));   // real signal power 1/2
    for (int s = 0; s < S; s++) begin
      phs = 2.0 * PI * ($urandom_range(0, 9999) / 10000.0);
      for (int n = 0; n < N; n++)
        X[s][n] = $cos(-2.0 * PI * n * DF * 2.0 * RT / C0 + phs) + namp * gauss();
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      R[i][j] = 0.0;
      for (int s = 0; s < S; s++) R[i][j] += X[s][i] * X[s][j] / S;
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) J[i][j] = R[i][j];
    jacobi();
    lmax = 0.0;
    for (int i = 0; i < N; i++) if (J[i][i] > lmax) lmax = J[i][i];
    scale = 15000.0 / lmax;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      Ri[i][j] = $rtoi(R[i][j] * scale + (R[i][j] < 0 ? -0.5 : 0.5));
      J[i][j] = real'(Ri[i][j]);
    end
    // ---- reference on the integer matrix ----
    jacobi();
    for (int i = 0; i < N; i++) begin ev[i] = J[i][i]; idx[i] = i; end
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if (ev[idx[j]] > ev[idx[i]]) begin ti = idx[i]; idx[i] = idx[j]; idx[j] = ti; end
    for (int k = 0; k < NN; k++) for (int n = 0; n < N; n++) nb[k][n] = V[n][idx[k + 2]];
    r_ref = music_peak();
    // ---- engine ----
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      wr_en = 1; wr_row = 5'(i); wr_col = 5'(j); wr_data = data_t'(Ri[i][j]);
      @(negedge clk);
    end
    wr_en = 0; start = 1;
    @(posedge clk);
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 4_000_000) begin @(posedge clk); cyc++; @(negedge clk); end
    checks++;
    if (!done || cyc > 23 * (N * (N - 1) / 2 * 2 * N + (N - 1) * (N - 2) / 2 * N + 32 * (N - 1) * 3 * N))
      fail($sformatf("run did not finish within the cycle bound (%0d cycles)", cyc));
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      rd_sel = 1; rd_row = 5'(i); rd_col = 5'(j); #0.1 Ub[i][j] = real'(rd_data) / UNIT;
    end
    for (int i = 0; i < N; i++) begin
      rd_sel = 0; rd_row = 5'(i); rd_col = 5'(i); #0.1 Bd[i] = rabs(real'(rd_data));
    end
    // signal singular values and trace
    for (int i = 0; i < N; i++) idx[i] = i;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if (Bd[idx[j]] > Bd[idx[i]]) begin ti = idx[i]; idx[i] = idx[j]; idx[j] = ti; end
    begin
      real e_sorted [N];
      for (int i = 0; i < N; i++) e_sorted[i] = ev[i];
      for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
        if (e_sorted[j] > e_sorted[i]) begin tmp = e_sorted[i]; e_sorted[i] = e_sorted[j]; e_sorted[j] = tmp; end
      for (int k = 0; k < 2; k++) begin
        checks++;
        if (rabs(Bd[idx[k]] - e_sorted[k]) > 0.02 * e_sorted[0])
          fail($sformatf("signal singular value %0d = %f, reference %f", k, Bd[idx[k]], e_sorted[k]));
      end
      tr_in = 0.0; tr_out = 0.0;
      for (int i = 0; i < N; i++) begin tr_in += e_sorted[i]; tr_out += Bd[i]; end
      checks++;
      if (rabs(tr_out - tr_in) > 0.03 * tr_in) fail($sformatf("sum of singular values %f, reference %f", tr_out, tr_in));
      $display("singular values: engine %0.1f %0.1f | reference %0.1f %0.1f | sums %0.1f / %0.1f",
               Bd[idx[0]], Bd[idx[1]], e_sorted[0], e_sorted[1], tr_out, tr_in);
    end
    // orthogonality of U^T
    for (int i = 0; i < N; i++) for (int j = i; j < N; j++) begin
      dot = 0.0;
      for (int k = 0; k < N; k++) dot += Ub[i][k] * Ub[j][k];
      checks++;
      if (rabs(dot - (i == j ? 1.0 : 0.0)) > 0.03) fail($sformatf("U^T rows %0d,%0d dot %f", i, j, dot));
    end
    // MUSIC with the engine's noise subspace
    for (int k = 0; k < NN; k++) for (int n = 0; n < N; n++) nb[k][n] = Ub[idx[k + 2]][n];
    r_hw = music_peak();
    $display("range estimate: engine %0.2f m (error %0.3f %%), double-precision reference %0.2f m, %0d cycles",
             r_hw, 100.0 * rabs(r_hw - RT) / RT, r_ref, cyc);
    checks++;
    if (rabs(r_hw - RT) > 1.0) fail($sformatf("range %f m, target at %f m", r_hw, RT));
    checks++;
    if (rabs(r_hw - r_ref) > 0.25) fail($sformatf("range %f m, double-precision MUSIC %f m", r_hw, r_ref));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
