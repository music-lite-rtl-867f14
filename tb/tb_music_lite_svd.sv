// tb_music_lite_svd -- end-to-end test of the Golub-Kahan SVD engine on small
// matrices whose singular values are known by construction.
//
// Each test matrix is A = Q1 * diag(sigma) * Q2^T, with Q1 and Q2 products of
// random plane rotations applied in double precision, rounded to integers;
// one matrix is rank-deficient (two zero singular values).
// The engine (N = 8, 40 sweeps) runs to completion and the test checks:
//   * the sorted |B[i][i]| against the sorted sigma,
//   * that every off-diagonal entry of B has become small,
//   * that U^T is orthogonal (U^T U / UNIT^2 ~ I),
//   * that row i of U^T A has length |B[i][i]| (U^T A = Sigma V^T),
//   * the run time: exactly 23 cycles per element pair issued plus one per
//     skipped rotation.
// Mechanisms counted (each must occur): left and right rotations in the
// bidiagonalisation phase, right and left rotations in the sweep phase,
// U^T accumulation pairs, vectoring with x < 0 (quadrant pre-rotation) and
// rotation by more than 90 degrees, skipped negligible rotations and chase
// restarts below a negligible superdiagonal entry (deflation).
`timescale 1ns/1ps
module tb_music_lite_svd;
  import music_lite_pkg::*;

  localparam int N      = 8;
  localparam int SWEEPS = 40;
  localparam int UNIT   = 16384;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic           wr_en, start, busy, done, rd_sel;
  logic [2:0]     wr_row, wr_col, rd_row, rd_col;
  data_t          wr_data, rd_data;

  music_lite_svd #(.N(N), .SWEEPS(SWEEPS)) dut (
    .clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data,
    .start, .busy, .done, .rd_sel, .rd_row, .rd_col, .rd_data
  );

  int checks = 0, failures = 0;
  int n_bl = 0, n_br = 0, n_sr = 0, n_sl = 0, n_ut = 0, n_vec_prerot = 0, n_rot_prerot = 0;
  int n_skip = 0, n_restart = 0, n_pairs = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  // Mechanism monitor: count accepted pairs by kind.
  always @(posedge clk) if (rst_n && dut.skip) n_skip++;
  always @(posedge clk) if (rst_n && dut.ph == 3 && dut.st == 0 && dut.e == 0 && !dut.skip && dut.i != 0 && dut.t == dut.i) n_restart++;
  always @(posedge clk) if (rst_n && dut.u_givens.in_valid && dut.u_givens.in_ready) begin
    n_pairs++;
    if (dut.u_givens.in_pivot) begin
      case (dut.ph)
        1: n_bl++;
        2: n_br++;
        3: n_sr++;
        4: n_sl++;
        default: ;
      endcase
      if (dut.u_givens.in_a < 0) n_vec_prerot++;
    end
    if (dut.on_ut) n_ut++;
    if (dut.u_givens.u_cordic.in_mode == CORDIC_ROTATE &&
        (dut.u_givens.u_cordic.in_z > 16384 || dut.u_givens.u_cordic.in_z < -16384)) n_rot_prerot++;
  end

  real A [N][N];
  real sig [N];

  function automatic real rabs(input real v); return v < 0.0 ? -v : v; endfunction

  task automatic make_matrix(input real smax, input real ratio, input int nzero);
    real c, s, t1, t2, th;
    int  p, q;
    for (int i = 0; i < N; i++) begin
      sig[i] = (i >= N - nzero) ? 0.0 : smax * (ratio ** i);
      for (int j = 0; j < N; j++) A[i][j] = (i == j) ? sig[i] : 0.0;
    end
    for (int n = 0; n < 4 * N; n++) begin
      // left rotation of rows p, q and right rotation of columns p, q
      p = $urandom_range(0, N - 1); q = (p + $urandom_range(1, N - 1)) % N;
      th = 6.2831853 * ($urandom_range(0, 9999) / 10000.0);
      c = $cos(th); s = $sin(th);
      for (int j = 0; j < N; j++) begin
        t1 = c * A[p][j] - s * A[q][j]; t2 = s * A[p][j] + c * A[q][j];
        A[p][j] = t1; A[q][j] = t2;
      end
      p = $urandom_range(0, N - 1); q = (p + $urandom_range(1, N - 1)) % N;
      th = 6.2831853 * ($urandom_range(0, 9999) / 10000.0);
      c = $cos(th); s = $sin(th);
      for (int i = 0; i < N; i++) begin
        t1 = c * A[i][p] - s * A[i][q]; t2 = s * A[i][p] + c * A[i][q];
        A[i][p] = t1; A[i][q] = t2;
      end
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) A[i][j] = $rtoi(A[i][j] + (A[i][j] < 0 ? -0.5 : 0.5));
  endtask

  task automatic run_one(input real smax, input real ratio, input int nzero);
    int  cyc, pairs0, skips0;
    real d [N];
    real u [N][N];
    real b [N][N];
    real tmp, tol, dot, nrm;
    make_matrix(smax, ratio, nzero);
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      wr_en = 1; wr_row = 3'(i); wr_col = 3'(j); wr_data = data_t'($rtoi(A[i][j]));
      @(negedge clk);
    end
    wr_en = 0;
    start = 1;
    pairs0 = n_pairs; skips0 = n_skip;
    @(posedge clk);
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; @(negedge clk); if (cyc > 2_000_000) break; end
    checks++;
    if (cyc != 23 * (n_pairs - pairs0) + (n_skip - skips0))
      fail($sformatf("run took %0d cycles, expected 23 * %0d pairs + %0d skips", cyc, n_pairs - pairs0, n_skip - skips0));
    // read back
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      rd_sel = 0; rd_row = 3'(i); rd_col = 3'(j); #0.1 b[i][j] = real'(rd_data);
      rd_sel = 1; #0.1 u[i][j] = real'(rd_data) / UNIT;
    end
    // singular values
    for (int i = 0; i < N; i++) d[i] = rabs(b[i][i]);
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if (d[j] > d[i]) begin tmp = d[i]; d[i] = d[j]; d[j] = tmp; end
    tol = 30.0 + 0.01 * smax;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (rabs(d[i] - sig[i]) > tol) fail($sformatf("sigma[%0d] = %f, expected %f", i, d[i], sig[i]));
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) if (i != j) begin
      checks++;
      if (rabs(b[i][j]) > tol) fail($sformatf("B[%0d][%0d] = %f not annihilated", i, j, b[i][j]));
    end
    // U^T orthogonal
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      dot = 0.0;
      for (int k = 0; k < N; k++) dot += u[i][k] * u[j][k];
      checks++;
      if (rabs(dot - (i == j ? 1.0 : 0.0)) > 0.03) fail($sformatf("U^T rows %0d,%0d dot %f", i, j, dot));
    end
    // U^T A = Sigma V^T: row norms
    for (int i = 0; i < N; i++) begin
      nrm = 0.0;
      for (int j = 0; j < N; j++) begin
        dot = 0.0;
        for (int k = 0; k < N; k++) dot += u[i][k] * A[k][j];
        nrm += dot * dot;
      end
      checks++;
      if (rabs($sqrt(nrm) - rabs(b[i][i])) > tol + 0.02 * rabs(b[i][i]))
        fail($sformatf("|row %0d of U^T A| = %f, |B[i][i]| = %f", i, $sqrt(nrm), b[i][i]));
    end
  endtask

  initial begin
    wr_en = 0; start = 0; rd_sel = 0; wr_row = 0; wr_col = 0; wr_data = 0; rd_row = 0; rd_col = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    checks++;
    if (busy || done) fail("engine not idle after reset");
    run_one(15000.0, 0.6, 0);
    run_one(12000.0, 0.7, 0);
    run_one(8000.0, 0.5, 0);
    run_one(14000.0, 0.6, 2);   // rank 6: exercises the skipped rotations
    checks++; if (n_bl == 0) fail("no bidiagonalisation left rotation");
    checks++; if (n_br == 0) fail("no bidiagonalisation right rotation");
    checks++; if (n_sr == 0) fail("no sweep right rotation");
    checks++; if (n_sl == 0) fail("no sweep left rotation");
    checks++; if (n_ut == 0) fail("no U^T accumulation pair");
    checks++; if (n_vec_prerot == 0) fail("no vectoring quadrant pre-rotation");
    checks++; if (n_rot_prerot == 0) fail("no rotation quadrant pre-rotation");
    checks++; if (n_skip == 0) fail("no skipped (negligible) rotation");
    checks++; if (n_restart == 0) fail("no chase restart below a negligible superdiagonal");
    $display("mechanisms: bidiag_left=%0d bidiag_right=%0d sweep_right=%0d sweep_left=%0d ut_pairs=%0d vec_prerot=%0d rot_prerot=%0d skip=%0d restart=%0d",
             n_bl, n_br, n_sr, n_sl, n_ut, n_vec_prerot, n_rot_prerot, n_skip, n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
