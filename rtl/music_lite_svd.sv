// music_lite_svd -- Golub-Kahan SVD engine built on the CORDIC Givens engine.
//
// What it does: computes the singular values of a real N x N matrix A and the
// matching left singular vectors, using nothing but Givens rotations on one
// CORDIC core.  After a run, B = U^T A V is (near) diagonal: |B[i][i]| are the
// singular values (unsorted) and row i of the stored U^T is the left singular
// vector that belongs to B[i][i].  For a covariance matrix those rows are the
// eigenvectors from which a MUSIC back end splits signal and noise subspaces.
//
// How it works: the matrix B (loaded with A) and U^T (set to UNIT * I at
// start) live in register arrays.  A scheduler walks a fixed list of
// rotations; each rotation is streamed through music_lite_givens as element
// pairs, pivot pair first, and every result is written back in place.
//   1. Bidiagonalisation (Golub-Kahan reduction): for k = 0 .. N-1, left
//      rotations of rows (k, i), pivot column k, zero B[i][k] for i > k; then
//      right rotations of columns (k+1, j), pivot row k, zero B[k][j] for
//      j > k+1.
//   2. Diagonalisation: SWEEPS zero-shift QR sweeps over the bidiagonal
//      matrix.  Sweep step i is a right rotation of columns (i, i+1) -- pivot
//      (B[0][0], B[0][1]) for i = 0, else the bulge pair (B[i-1][i],
//      B[i-1][i+1]) -- followed by a left rotation of rows (i, i+1) that
//      removes the bulge B[i+1][i].  Each sweep shrinks the superdiagonal;
//      entry i converges at the rate (sigma(i+1)/sigma(i))^2 per sweep.
//   3. Deflation.  In 16-bit arithmetic a converged superdiagonal entry
//      settles at a few LSBs, and vectoring such noise gives a random angle
//      that would mix converged columns again.  So (a) a sweep right rotation
//      whose superdiagonal pivot B[i-1][i] is within +-DEFL starts a new
//      chase instead, with pivot (B[i][i], B[i][i+1]) as at i = 0 -- the
//      problem has split there -- and (b) any rotation whose pivot pair is
//      within +-DEFL in both entries is skipped (1 cycle, no pairs).
// A left rotation is applied to all N columns of B and all N columns of U^T
// (2N pairs); a right rotation to all N rows of B (N pairs).  Zero entries
// stay exactly zero under rotation, so applying a rotation to the full row or
// column is correct, only not as fast as it could be.
// Following the source: SVD by the Golub-Kahan method (bidiagonalise, then
// diagonalise), with every step a Givens rotation done by CORDIC.  This
// design's own choices: real-valued data, the zero-shift sweep (it needs no
// shift computation, hence no multiplier or square root), a fixed sweep count
// instead of a convergence test, the deflation threshold DEFL,
// full-row/column rotations, U^T accumulation
// and no V, register-array storage, and the load/read ports.
//
// Interface: while idle, wr_en writes wr_data to B[wr_row][wr_col].  A start
// pulse (while idle) sets U^T = UNIT * I and runs the schedule; busy is high
// until the run ends, then done stays high until the next start.  rd_sel
// selects B (0) or U^T (1) for the combinational read port
// rd_data = M[rd_row][rd_col].  Precision: values are 16-bit; the largest
// singular value times the CORDIC gain 1.647 must stay below 2^15, i.e.
// sigma_max < ~19 900.
//
// Timing: every pair takes 23 cycles (ITER + 5*GAIN_COMP + 2) and a skipped
// rotation 1 cycle.  Without skips a run takes
//   23 * [ N(N-1)/2 * 2N + (N-1)(N-2)/2 * N + SWEEPS * (N-1) * 3N ]
// cycles from the start edge to done: at N = 32, SWEEPS = 32 that is
// 141 856 pairs, 3 262 688 cycles, 6.5 ms at 500 MHz; skips make it shorter.
module music_lite_svd
  import music_lite_pkg::*;
#(
  parameter int unsigned N         = 32,     // matrix dimension
  parameter int unsigned SWEEPS    = 32,     // zero-shift QR sweeps
  parameter int unsigned UNIT      = 16384,  // 1.0 in U^T (2^14)
  parameter int unsigned DEFL      = 8,      // negligible-entry threshold (LSB)
  parameter int unsigned ITER      = 16,
  parameter bit          GAIN_COMP = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // matrix load (idle only)
  input  logic                   wr_en,
  input  logic [$clog2(N)-1:0]   wr_row,
  input  logic [$clog2(N)-1:0]   wr_col,
  input  data_t                  wr_data,
  // run control
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // result read
  input  logic                   rd_sel,   // 0: B, 1: U^T
  input  logic [$clog2(N)-1:0]   rd_row,
  input  logic [$clog2(N)-1:0]   rd_col,
  output data_t                  rd_data
);

  localparam int unsigned IW = $clog2(N);
  localparam int unsigned EW = $clog2(2 * N);
  localparam int unsigned SW = (SWEEPS > 1) ? $clog2(SWEEPS) : 1;

  typedef logic [IW-1:0] idx_t;

  // Scheduler phase: which family of rotations is being applied.
  typedef enum logic [2:0] {
    PH_IDLE = 3'd0,
    PH_BL   = 3'd1,   // bidiagonalisation, left (rows)
    PH_BR   = 3'd2,   // bidiagonalisation, right (columns)
    PH_SR   = 3'd3,   // sweep, right
    PH_SL   = 3'd4,   // sweep, left
    PH_DONE = 3'd5
  } phase_e;

  typedef enum logic {
    ST_ISSUE = 1'b0,  // offer the current pair to the Givens engine
    ST_WAIT  = 1'b1   // wait for its result and write it back
  } step_e;

  data_t  bm [N][N];   // working matrix B
  data_t  ut [N][N];   // accumulated U^T

  phase_e ph;
  step_e  st;
  idx_t   k, i;        // outer / inner schedule counters
  logic [SW-1:0] sw;   // sweep counter
  logic [EW-1:0] e;    // element index within the rotation

  // ---------------------------------------------------------------------
  // Current rotation: side, the two lines p < q, and the pivot line t.
  // ---------------------------------------------------------------------
  function automatic logic negligible(input data_t v);
    return (v <= data_t'(DEFL)) && (v >= -data_t'(DEFL));
  endfunction

  logic left;
  idx_t p, q, t;
  always_comb begin
    left = 1'b1;
    p = k; q = i; t = k;
    case (ph)
      PH_BR: begin left = 1'b0; p = k + 1'b1; q = i; t = k; end
      PH_SR: begin
        left = 1'b0; p = i; q = i + 1'b1;
        // chase the bulge from row i-1, or start a new chase at row i
        t = (i == 0 || negligible(bm[i - 1'b1][i])) ? i : idx_t'(i - 1'b1);
      end
      PH_SL: begin left = 1'b1; p = i; q = i + 1'b1; t = i; end
      default: begin left = 1'b1; p = k; q = i; t = k; end
    endcase
  end

  // Element e of the rotation: e = 0 is the pivot line t, e = 1 .. N-1 the
  // other lines of B in order, e = N .. 2N-1 (left rotations only) the
  // columns of U^T.
  logic [EW-1:0] e_last;
  logic          on_ut;
  idx_t          j;
  always_comb begin
    e_last = left ? EW'(2 * N - 1) : EW'(N - 1);
    on_ut  = (e >= EW'(N));
    if (e == 0)                          j = t;
    else if (on_ut)                      j = idx_t'(e - EW'(N));
    else if (idx_t'(e - 1'b1) < t)       j = idx_t'(e - 1'b1);
    else                                 j = idx_t'(e);
  end

  data_t pa, pb;
  always_comb begin
    if (!left)      begin pa = bm[j][p]; pb = bm[j][q]; end
    else if (on_ut) begin pa = ut[p][j]; pb = ut[q][j]; end
    else            begin pa = bm[p][j]; pb = bm[q][j]; end
  end

  // ---------------------------------------------------------------------
  // Givens engine.
  // ---------------------------------------------------------------------
  logic   g_in_valid, g_in_ready, g_out_valid, g_out_ready, g_out_pivot;
  data_t  g_out_a, g_out_b;
  angle_t g_out_angle;
  logic   running;

  assign running     = (ph != PH_IDLE) && (ph != PH_DONE);
  // a rotation whose pivot pair is negligible is skipped
  logic skip;
  assign skip        = running && (st == ST_ISSUE) && (e == 0) && negligible(pa) && negligible(pb);
  assign g_in_valid  = running && (st == ST_ISSUE) && !skip;
  assign g_out_ready = running && (st == ST_WAIT);

  music_lite_givens #(
    .ITER      (ITER),
    .GAIN_COMP (GAIN_COMP)
  ) u_givens (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (g_in_valid),
    .in_ready  (g_in_ready),
    .in_pivot  (e == 0),
    .in_a      (pa),
    .in_b      (pb),
    .out_valid (g_out_valid),
    .out_ready (g_out_ready),
    .out_pivot (g_out_pivot),
    .out_a     (g_out_a),
    .out_b     (g_out_b),
    .out_angle (g_out_angle)
  );

  // ---------------------------------------------------------------------
  // Scheduler.
  // ---------------------------------------------------------------------
  logic pair_done, rot_done, advance;
  assign pair_done = (st == ST_WAIT) && g_out_valid;
  assign rot_done  = pair_done && (e == e_last);
  assign advance   = rot_done || skip;   // move to the next rotation

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= PH_IDLE;
      st <= ST_ISSUE;
      k  <= '0;
      i  <= '0;
      sw <= '0;
      e  <= '0;
    end else begin
      case (ph)
        PH_IDLE, PH_DONE: begin
          if (start) begin
            st <= ST_ISSUE;
            e  <= '0;
            k  <= '0;
            sw <= '0;
            if (N >= 2) begin ph <= PH_BL; i <= idx_t'(1); end
            else        ph <= PH_DONE;
          end
        end
        default: begin
          if (st == ST_ISSUE && !skip) begin
            if (g_in_ready) st <= ST_WAIT;
          end else if (pair_done || skip) begin
            st <= ST_ISSUE;
            e  <= advance ? '0 : e + 1'b1;
            if (advance) begin
              case (ph)
                PH_BL: begin
                  if (i != idx_t'(N - 1))              i <= i + 1'b1;
                  else if (32'(k) + 2 <= N - 1)        begin ph <= PH_BR; i <= k + idx_t'(2); end
                  else begin
                    // k = N-2: no right rotation left, move on
                    k <= k + 1'b1;
                    if (SWEEPS > 0) begin ph <= PH_SR; i <= '0; sw <= '0; end
                    else ph <= PH_DONE;
                  end
                end
                PH_BR: begin
                  if (i != idx_t'(N - 1)) i <= i + 1'b1;
                  else begin
                    k  <= k + 1'b1;
                    ph <= PH_BL;
                    i  <= k + idx_t'(2);
                  end
                end
                PH_SR: ph <= PH_SL;
                default: begin // PH_SL
                  if (32'(i) + 2 < N) begin i <= i + 1'b1; ph <= PH_SR; end
                  else if (32'(sw) + 1 < SWEEPS) begin sw <= sw + 1'b1; i <= '0; ph <= PH_SR; end
                  else ph <= PH_DONE;
                end
              endcase
            end
          end
        end
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // Matrix storage: load port, U^T initialisation and write-back.
  // ---------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (ph == PH_IDLE || ph == PH_DONE) begin
      if (wr_en && !start) bm[wr_row][wr_col] <= wr_data;
      if (start)
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++)
            ut[r][c] <= (r == c) ? data_t'(UNIT) : data_t'(0);
    end else if (pair_done) begin
      if (!left) begin
        bm[j][p] <= g_out_a;
        bm[j][q] <= g_out_b;
      end else if (on_ut) begin
        ut[p][j] <= g_out_a;
        ut[q][j] <= g_out_b;
      end else begin
        bm[p][j] <= g_out_a;
        bm[q][j] <= g_out_b;
      end
    end
  end

  assign busy    = running;
  assign done    = (ph == PH_DONE);
  assign rd_data = rd_sel ? ut[rd_row][rd_col] : bm[rd_row][rd_col];

  // ---------------------------------------------------------------------
  // Checks.
  // ---------------------------------------------------------------------
  initial begin
    assert (N >= 2 && UNIT < 19000)
      else $error("music_lite_svd: need N >= 2 and UNIT * 1.647 < 2^15");
  end

  // The engine's result always belongs to the pair the scheduler expects.
  property p_pivot_order;
    @(posedge clk) disable iff (!rst_n)
      pair_done |-> (g_out_pivot == (e == 0));
  endproperty
  a_pivot_order: assert property (p_pivot_order);

endmodule
