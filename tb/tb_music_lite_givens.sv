// tb_music_lite_givens -- end-to-end test of the Givens rotation engine at its
// default parameters.
//
// Workload: Givens triangularisation (the annihilation sweep used by the
// Golub-Kahan reduction) of random N x N real matrices, N = 4 and 8.  For each
// column j and each row i below the diagonal, the pair (A[j][j], A[i][j]) is
// sent as a pivot and the pairs (A[j][k], A[i][k]), k > j, follow; the results
// are written back.  In parallel the test performs the same sweep in double
// precision with exact Givens rotations c = a/r, s = b/r, and compares:
//   * every pivot output against the bit-exact integer CORDIC model,
//   * every annihilated entry against zero (|b'| <= 2),
//   * the final triangular matrix against the double-precision one
//     (tolerance 40 + 1 % of the largest column norm),
//   * the latency of every pair (21 edges) and the issue interval of a
//     back-to-back stream (23 edges).
// It counts how often each mechanism occurs -- vectoring (pivot), rotation,
// vectoring quadrant pre-rotation (pivot with a < 0), rotation quadrant
// pre-rotation (|theta| > 90 degrees), output back-pressure stall and
// saturation -- and counts a failure for any that never occurs.
`timescale 1ns/1ps
module tb_music_lite_givens;
  import music_lite_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  logic   in_valid, in_ready, in_pivot, out_valid, out_ready, out_pivot;
  data_t  in_a, in_b, out_a, out_b;
  angle_t out_angle;

  music_lite_givens dut (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_pivot, .in_a, .in_b,
    .out_valid, .out_ready, .out_pivot, .out_a, .out_b, .out_angle
  );

  int checks = 0, failures = 0;
  int n_vector = 0, n_rotate = 0, n_vec_prerot = 0, n_rot_prerot = 0, n_stall = 0, n_sat = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  angle_t cur_theta = '0;

  // Send one pair, wait for and return its result.
  task automatic pair(input bit pivot, input int a, input int b, output int ra, output int rb);
    int lat, stall;
    @(negedge clk);
    in_valid = 1'b1; in_pivot = pivot; in_a = data_t'(a); in_b = data_t'(b); out_ready = 1'b0;
    while (!in_ready) begin @(posedge clk); @(negedge clk); end
    @(posedge clk);
    @(negedge clk); in_valid = 1'b0;
    lat = 0;
    while (!out_valid) begin @(posedge clk); lat++; @(negedge clk); end
    checks++;
    if (lat != 21) fail($sformatf("pair latency %0d, expected 21", lat));
    stall = $urandom_range(0, 3) == 0 ? $urandom_range(1, 4) : 0;
    if (stall > 0) begin
      int ha, hb;
      ha = out_a; hb = out_b;
      repeat (stall) @(negedge clk);
      n_stall++;
      checks++;
      if (!out_valid || int'(out_a) != ha || int'(out_b) != hb) fail("result not held under back-pressure");
    end
    checks++;
    if (out_pivot != pivot) fail("out_pivot does not follow in_pivot");
    if (pivot) begin
      int ex, ey, ez;
      n_vector++;
      if (a < 0) n_vec_prerot++;
      cordic_model(1, a, b, 0, 16, 1'b1, ex, ey, ez);
      checks++;
      if (int'(out_a) != ex || int'(out_b) != ey || int'(out_angle) != ez)
        fail($sformatf("pivot (%0d,%0d): got (%0d,%0d,%0d) model (%0d,%0d,%0d)", a, b, out_a, out_b, out_angle, ex, ey, ez));
      if ($sqrt(real'(a) * a + real'(b) * b) * 1.6468 > 32767.0) n_sat++;
      cur_theta = out_angle;
    end else begin
      n_rotate++;
      if (cur_theta > 16384 || cur_theta < -16384) n_rot_prerot++;
      checks++;
      if (out_angle != cur_theta) fail("out_angle is not the stored rotation angle");
    end
    ra = out_a; rb = out_b;
    out_ready = 1'b1;
    @(posedge clk);
    @(negedge clk); out_ready = 1'b0;
  endtask

  localparam int NMAX = 8;

  task automatic triangularise(input int n, input int amp);
    int  A [NMAX][NMAX];
    real R [NMAX][NMAX];
    real maxnorm, tol, r, c, s, t1, t2;
    int  ra, rb;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        A[i][j] = $urandom_range(0, 2 * amp) - amp;
        R[i][j] = real'(A[i][j]);
      end
    maxnorm = 0.0;
    for (int j = 0; j < n; j++) begin
      real cn; cn = 0.0;
      for (int i = 0; i < n; i++) cn += R[i][j] * R[i][j];
      if ($sqrt(cn) > maxnorm) maxnorm = $sqrt(cn);
    end
    for (int j = 0; j < n - 1; j++)
      for (int i = j + 1; i < n; i++) begin
        // reference rotation
        r = $sqrt(R[j][j] * R[j][j] + R[i][j] * R[i][j]);
        c = (r == 0.0) ? 1.0 : R[j][j] / r;
        s = (r == 0.0) ? 0.0 : R[i][j] / r;
        for (int k = j; k < n; k++) begin
          t1 = c * R[j][k] + s * R[i][k];
          t2 = -s * R[j][k] + c * R[i][k];
          R[j][k] = t1; R[i][k] = t2;
        end
        // hardware rotation
        pair(1'b1, A[j][j], A[i][j], ra, rb);
        checks++;
        if (rb > 2 || rb < -2) fail($sformatf("annihilated entry (%0d,%0d) = %0d", i, j, rb));
        A[j][j] = ra; A[i][j] = rb;
        for (int k = j + 1; k < n; k++) begin
          pair(1'b0, A[j][k], A[i][k], ra, rb);
          A[j][k] = ra; A[i][k] = rb;
        end
      end
    tol = 40.0 + 0.01 * maxnorm;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < n; j++) begin
        checks++;
        if (rabs(real'(A[i][j]) - R[i][j]) > tol)
          fail($sformatf("%0dx%0d R[%0d][%0d] = %0d, reference %f (tol %f)", n, n, i, j, A[i][j], R[i][j], tol));
      end
  endtask

  // Back-to-back stream: issue interval must be ITER + 5 + 2 = 23 edges.
  task automatic stream_rate();
    int t_acc [6];
    int na, cyc;
    na = 0; cyc = 0;
    @(negedge clk);
    in_valid = 1'b1; in_pivot = 1'b0; in_a = 16'sd1000; in_b = 16'sd500; out_ready = 1'b1;
    while (na < 6) begin
      @(posedge clk); cyc++;
      if (in_valid && in_ready) begin t_acc[na] = cyc; na++; end
      @(negedge clk);
    end
    in_valid = 1'b0;
    for (int k = 1; k < 6; k++) begin
      checks++;
      if (t_acc[k] - t_acc[k-1] != 23) fail($sformatf("issue interval %0d, expected 23", t_acc[k] - t_acc[k-1]));
    end
    while (!in_ready) begin @(posedge clk); @(negedge clk); end
    out_ready = 1'b0;
  endtask

  initial begin
    int ra, rb;
    in_valid = 0; in_pivot = 0; in_a = 0; in_b = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) triangularise(4, 4000);
    for (int t = 0; t < 3; t++) triangularise(8, 3000);
    // a pivot beyond the no-overflow range: x saturates inside the core
    pair(1'b1, 30000, 25000, ra, rb);
    stream_rate();
    checks++;
    if (n_vector == 0)     fail("no vectoring (pivot) pair");
    checks++;
    if (n_rotate == 0)     fail("no rotation pair");
    checks++;
    if (n_vec_prerot == 0) fail("no vectoring quadrant pre-rotation");
    checks++;
    if (n_rot_prerot == 0) fail("no rotation quadrant pre-rotation");
    checks++;
    if (n_stall == 0)      fail("no output stall");
    checks++;
    if (n_sat == 0)        fail("no saturation");
    $display("mechanisms: vector=%0d rotate=%0d vec_prerot=%0d rot_prerot=%0d stall=%0d saturate=%0d",
             n_vector, n_rotate, n_vec_prerot, n_rot_prerot, n_stall, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (300_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
