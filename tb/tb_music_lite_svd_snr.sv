// tb_music_lite_svd_snr -- SNR sweep of the MUSIC range estimate with the
// SVD engine at its default parameters (N = 32, 32 sweeps).
//
// Same radar scenario as tb_music_lite_svd_music (32 subcarriers spaced
// 960 kHz, 16 OFDM symbols, one target at 50 m, real part of the
// subcarrier responses with a random phase per symbol, covariance scaled so
// that its largest eigenvalue is 15 000), repeated RUNS times at each SNR
// of -5, 0, 5, 10 and 15 dB.  Each run is estimated twice: with the noise
// subspace from the engine and with a double-precision Jacobi
// eigen-decomposition of the same integer matrix.  As in the accuracy
// study of the source, the estimated ranges are averaged over the runs of
// one SNR and the error of that average from the true range is reported.
//
// Checks: every run ends within the cycle bound of the engine; at 5 dB and
// above, every engine estimate lies within 0.25 m of the double-precision
// estimate and within 1 m of the target, and the mean error over 5..15 dB
// is below 0.5 %.  Negative and zero SNR are reported, not checked, since
// MUSIC with 16 snapshots is unreliable there whatever the arithmetic.
// RUNS = 4 keeps the simulation near a minute; the source used 100 runs.
`timescale 1ns/1ps
module tb_music_lite_svd_snr;
  import music_lite_pkg::*;

  localparam int  N    = 32;
  localparam int  S    = 16;
  localparam int  RUNS = 4;
  localparam int  NSNR = 5;
  localparam real DF   = 960.0e3;
  localparam real C0   = 3.0e8;
  localparam real RT   = 50.0;
  localparam real PI   = 3.14159265358979;
  localparam int  UNIT = 16384;
  localparam int  CYC_BOUND = 23 * (N * (N - 1) / 2 * 2 * N + (N - 1) * (N - 2) / 2 * N + 32 * (N - 1) * 3 * N);

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

  // One complete run at the given SNR: build the covariance, estimate the
  // range with the reference and with the engine.
  task automatic run_one(input real snr, output real r_hw, output real r_ref, output int cyc);
    real namp, phs, lmax, scale, ev [N];
    int  idx [N], ti;
    namp = $sqrt(0.5 / (10.0 ** (snr / 10.0)));   // real signal power 1/2
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
    jacobi();
    for (int i = 0; i < N; i++) begin ev[i] = J[i][i]; idx[i] = i; end
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if (ev[idx[j]] > ev[idx[i]]) begin ti = idx[i]; idx[i] = idx[j]; idx[j] = ti; end
    for (int k = 0; k < NN; k++) for (int n = 0; n < N; n++) nb[k][n] = V[n][idx[k + 2]];
    r_ref = music_peak();
    // engine
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
    if (!done || cyc > CYC_BOUND)
      fail($sformatf("SNR %0.0f dB: run did not finish within the cycle bound (%0d cycles)", snr, cyc));
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      rd_sel = 1; rd_row = 5'(i); rd_col = 5'(j); #0.1 Ub[i][j] = real'(rd_data) / UNIT;
    end
    for (int i = 0; i < N; i++) begin
      rd_sel = 0; rd_row = 5'(i); rd_col = 5'(i); #0.1 Bd[i] = rabs(real'(rd_data));
    end
    for (int i = 0; i < N; i++) idx[i] = i;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if (Bd[idx[j]] > Bd[idx[i]]) begin ti = idx[i]; idx[i] = idx[j]; idx[j] = ti; end
    for (int k = 0; k < NN; k++) for (int n = 0; n < N; n++) nb[k][n] = Ub[idx[k + 2]][n];
    r_hw = music_peak();
  endtask

  initial begin
    real snr, r_hw, r_ref, sum_hw, sum_ref, pos_err;
    int  cyc;
    wr_en = 0; start = 0; rd_sel = 0; wr_row = 0; wr_col = 0; wr_data = 0; rd_row = 0; rd_col = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    pos_err = 0.0;
    for (int si = 0; si < NSNR; si++) begin
      snr = -5.0 + 5.0 * si;
      sum_hw = 0.0; sum_ref = 0.0;
      for (int run = 0; run < RUNS; run++) begin
        run_one(snr, r_hw, r_ref, cyc);
        sum_hw += r_hw; sum_ref += r_ref;
        $display("SNR %3.0f dB run %0d: engine %6.2f m, double precision %6.2f m, %0d cycles", snr, run, r_hw, r_ref, cyc);
        if (snr >= 5.0) begin
          checks++;
          if (rabs(r_hw - r_ref) > 0.25) fail($sformatf("SNR %0.0f dB: range %f m, double-precision MUSIC %f m", snr, r_hw, r_ref));
          checks++;
          if (rabs(r_hw - RT) > 1.0) fail($sformatf("SNR %0.0f dB: range %f m, target at %f m", snr, r_hw, RT));
        end
      end
      $display("SNR %3.0f dB: mean range engine %6.2f m (error %0.3f %%), double precision %6.2f m (error %0.3f %%)",
               snr, sum_hw / RUNS, 100.0 * rabs(sum_hw / RUNS - RT) / RT,
               sum_ref / RUNS, 100.0 * rabs(sum_ref / RUNS - RT) / RT);
      if (snr >= 5.0) pos_err += 100.0 * rabs(sum_hw / RUNS - RT) / RT / 3.0;
    end
    $display("mean range error over 5..15 dB: %0.3f %%", pos_err);
    checks++;
    if (pos_err > 0.5) fail($sformatf("mean range error over 5..15 dB is %f %%", pos_err));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NSNR * RUNS * 3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
