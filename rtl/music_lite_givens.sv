// music_lite_givens -- Givens rotation engine for CORDIC-based SVD.
//
// What it does: applies one Givens rotation to a pair of matrix rows (or
// columns), streamed as element pairs (a_j, b_j).  The first pair of a
// rotation, flagged by in_pivot, defines it: the engine rotates (a_0, b_0)
// onto the x axis, returning (r, ~0) with r = sqrt(a_0^2 + b_0^2), and keeps
// the angle theta = atan2(b_0, a_0).  Every following pair without the flag is
// rotated by -theta, i.e. receives the same plane rotation
//   a' =  cos(theta) a + sin(theta) b
//   b' = -sin(theta) a + cos(theta) b.
// These annihilating rotations are the basic step of the Golub-Kahan SVD:
// both the reduction of a matrix to bidiagonal form and the iterations that
// diagonalise the bidiagonal matrix are sequences of such rotations.  A pivot
// pair that is not a matrix element (e.g. the shifted first column of an
// implicit QR step) simply has its output ignored by the sequencer.
//
// How it works: one cordic_core does all the arithmetic.  A pivot pair is
// issued in vectoring mode with z = 0; when its result leaves the core, out_z
// is captured as theta.  A plain pair is issued in rotation mode with
// z = -theta.  The core holds one job at a time and takes a new one only after
// its previous result has been taken, so theta is always up to date before the
// next pair enters.  Using CORDIC for the Givens rotations of the SVD follows
// the source; the pivot/stream protocol and the single shared core are this
// design's choices.
//
// Interface: in_valid/in_ready and out_valid/out_ready handshakes.  out_pivot
// marks the result of a pivot pair; out_angle is the angle theta of the
// rotation that produced the output (binary angle, 2^15 == pi).  A plain pair
// sent before any pivot after reset uses theta = 0.
//
// Timing: out_valid rises ITER + 5*GAIN_COMP clock edges after the edge that
// accepts a pair; with out_ready held high a new pair is accepted every
// ITER + 5*GAIN_COMP + 2 cycles (23 cycles at the defaults).
module music_lite_givens
  import music_lite_pkg::*;
#(
  parameter int unsigned ITER      = 16,
  parameter bit          GAIN_COMP = 1'b1
) (
  input  logic   clk,
  input  logic   rst_n,
  // element pairs in
  input  logic   in_valid,
  output logic   in_ready,
  input  logic   in_pivot,
  input  data_t  in_a,
  input  data_t  in_b,
  // rotated pairs out
  output logic   out_valid,
  input  logic   out_ready,
  output logic   out_pivot,
  output data_t  out_a,
  output data_t  out_b,
  output angle_t out_angle
);

  angle_t       theta;      // angle of the current rotation
  logic         job_pivot;  // the job inside the core is a pivot
  cordic_mode_e mode;
  angle_t       z_in;
  angle_t       core_z;
  logic         core_in_ready;

  assign mode = in_pivot ? CORDIC_VECTOR : CORDIC_ROTATE;
  assign z_in = in_pivot ? angle_t'(0) : angle_t'(-theta);

  cordic_core #(
    .ITER      (ITER),
    .GAIN_COMP (GAIN_COMP)
  ) u_cordic (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (core_in_ready),
    .in_mode   (mode),
    .in_x      (in_a),
    .in_y      (in_b),
    .in_z      (z_in),
    .out_valid (out_valid),
    .out_ready (out_ready),
    .out_x     (out_a),
    .out_y     (out_b),
    .out_z     (core_z)
  );

  assign in_ready  = core_in_ready;
  assign out_pivot = job_pivot;
  assign out_angle = job_pivot ? core_z : theta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      theta     <= '0;
      job_pivot <= 1'b0;
    end else begin
      if (in_valid && core_in_ready)
        job_pivot <= in_pivot;
      if (out_valid && out_ready && job_pivot)
        theta <= core_z;
    end
  end

endmodule
