// cordic_core -- iterative CORDIC rotator built from 16-bit sign-extended
// adders.
//
// What it does: in rotation mode it rotates the vector (x, y) by the angle z;
// in vectoring mode it rotates (x, y) onto the positive x axis and returns its
// length in x and its angle atan2(y, x) (plus the initial z) in z.  These are
// the two halves of a Givens rotation: vectoring finds the angle that
// annihilates one matrix element, rotation applies that angle to the other
// element pairs of the same two rows.
//
// How it works: one CORDIC micro-rotation per clock, exactly the recurrence
//   x(i+1) = x(i) - d(i) * y(i) * 2^-i
//   y(i+1) = y(i) + d(i) * x(i) * 2^-i
//   z(i+1) = z(i) - d(i) * atan(2^-i)
// with d(i) = sign(z(i)) in rotation mode and d(i) = -sign(y(i)) in vectoring
// mode.  The three additions of an iteration run on three addsub16 units, each
// wrapping one 16-bit sign-extended adder (add16se_cla); the 2^-i factors are
// arithmetic right shifts.  The iterative structure and the recurrence follow
// the source; everything below is this design's own choice:
//   * Quadrant pre-rotation on load: CORDIC only converges for angles within
//     about +-99.7 degrees, so a rotation angle beyond +-90 degrees, or a
//     vectoring input with x < 0, is first turned by an exact +-90 degrees
//     (swap and negate, no adder).
//   * x and y saturate to 16 bits on every adder output; z wraps (binary
//     angle, so wrapping is correct modulo 2*pi).
//   * Gain compensation (GAIN_COMP = 1): the micro-rotations stretch the
//     vector by K = 1.64676; five extra cycles multiply x and y by
//     2^-1 + 2^-3 - 2^-6 - 2^-9 - 2^-12 + 2^-14 = 0.6072677 ~ 1/K
//     (2.3e-5 high) with the same x and y adders.  The constant is accurate
//     enough for long chains of rotations (an SVD applies thousands), where a
//     gain error compounds.  With GAIN_COMP = 0 the outputs carry the gain K.
//   * Inputs must satisfy sqrt(x^2 + y^2) * K < 2^15, i.e. a length below
//     about 19 900, or the intermediate values saturate.
//
// Interface: valid/ready on both sides.  A job is accepted when in_valid and
// in_ready are both high; in_ready is high only while the core is idle.  The
// result is held on out_x/out_y/out_z with out_valid high until out_ready.
//
// Timing: out_valid rises ITER + 5*GAIN_COMP clock edges after the edge that
// accepts the job (ITER iteration edges, then 5 compensation edges).  One job
// at a time: with out_ready held high the next job is accepted
// ITER + 5*GAIN_COMP + 2 edges after the previous one (23 at the defaults).
module cordic_core
  import music_lite_pkg::*;
#(
  parameter int unsigned ITER      = 16,  // micro-rotations per job
  parameter bit          GAIN_COMP = 1'b1 // multiply the result by ~1/K
) (
  input  logic         clk,
  input  logic         rst_n,
  // job input
  input  logic         in_valid,
  output logic         in_ready,
  input  cordic_mode_e in_mode,
  input  data_t        in_x,
  input  data_t        in_y,
  input  angle_t       in_z,
  // result output
  output logic         out_valid,
  input  logic         out_ready,
  output data_t        out_x,
  output data_t        out_y,
  output angle_t       out_z
);

  localparam int unsigned IW = 5;          // iteration counter width (ITER <= 16)
  localparam int unsigned COMP_STEPS = 5;  // gain-compensation cycles

  typedef enum logic [1:0] {
    S_IDLE = 2'd0,
    S_ITER = 2'd1,
    S_COMP = 2'd2,
    S_DONE = 2'd3
  } state_e;

  state_e        state;
  cordic_mode_e  mode;
  logic [IW-1:0] it;        // iteration index i / compensation step
  data_t         x, y;      // working vector
  angle_t        z;         // angle accumulator
  data_t         xo, yo;    // vector before compensation

  // ---------------------------------------------------------------------
  // Quadrant pre-rotation of the incoming job (exact, no adder).
  // ---------------------------------------------------------------------
  function automatic data_t neg_sat(input data_t v);
    return (v == data_t'(16'sh8000)) ? data_t'(16'sh7fff) : -v;
  endfunction

  // v * 2^-sh rounded to nearest (half up): the shifted-out MSB is added
  // back.  Plain truncation biases every micro-rotation by up to half an LSB
  // in a fixed direction, which builds up over long chains of rotations.
  function automatic data_t rshift_round(input data_t v, input logic [IW-1:0] sh);
    data_t r;
    r = v >>> sh;
    if (sh != 0 && v[4'(sh - 1'b1)] && r != data_t'(16'sh7fff)) r = r + 1'b1;
    return r;
  endfunction

  data_t  x0, y0;
  angle_t z0;
  always_comb begin
    x0 = in_x;
    y0 = in_y;
    z0 = in_z;
    if (in_mode == CORDIC_ROTATE) begin
      if (in_z > ANGLE_HALF_PI) begin          // turn +90 first
        x0 = neg_sat(in_y);
        y0 = in_x;
        z0 = in_z - ANGLE_HALF_PI;
      end else if (in_z < -ANGLE_HALF_PI) begin // turn -90 first
        x0 = in_y;
        y0 = neg_sat(in_x);
        z0 = in_z + ANGLE_HALF_PI;
      end
    end else if (in_x < 0) begin
      if (in_y >= 0) begin                      // turn -90 first
        x0 = in_y;
        y0 = neg_sat(in_x);
        z0 = in_z + ANGLE_HALF_PI;
      end else begin                            // turn +90 first
        x0 = neg_sat(in_y);
        y0 = in_x;
        z0 = in_z - ANGLE_HALF_PI;
      end
    end
  end

  // ---------------------------------------------------------------------
  // Adder operands: micro-rotation or gain compensation.
  // ---------------------------------------------------------------------
  logic   d_pos;                 // d(i) = +1
  data_t  xa, xb, ya, yb;
  logic   xsub, ysub, zsub;
  sum_t   xs, ys, zs;
  angle_t za, zb;

  always_comb begin
    d_pos = (mode == CORDIC_ROTATE) ? (z >= 0) : (y < 0);
    // defaults: micro-rotation i = it
    xa   = x;
    xb   = rshift_round(y, it);
    xsub = d_pos;                // x - d*y*2^-i
    ya   = y;
    yb   = rshift_round(x, it);
    ysub = !d_pos;               // y + d*x*2^-i
    za   = z;
    zb   = atan_lut(it);
    zsub = d_pos;                // z - d*atan(2^-i)
    if (state == S_COMP) begin
      case (it)
        5'd0: begin              // (v>>1) + (v>>3)
          xa = xo >>> 1;  xb = xo >>> 3;  xsub = 1'b0;
          ya = yo >>> 1;  yb = yo >>> 3;  ysub = 1'b0;
        end
        5'd1: begin              // - (v>>6)
          xb = xo >>> 6;  xsub = 1'b1;
          yb = yo >>> 6;  ysub = 1'b1;
        end
        5'd2: begin              // - (v>>9)
          xb = xo >>> 9;  xsub = 1'b1;
          yb = yo >>> 9;  ysub = 1'b1;
        end
        5'd3: begin              // - (v>>12)
          xb = xo >>> 12; xsub = 1'b1;
          yb = yo >>> 12; ysub = 1'b1;
        end
        default: begin           // + (v>>14)
          xb = xo >>> 14; xsub = 1'b0;
          yb = yo >>> 14; ysub = 1'b0;
        end
      endcase
    end
  end

  addsub16 u_xadd (.a(xa), .b(xb), .sub(xsub), .s(xs));
  addsub16 u_yadd (.a(ya), .b(yb), .sub(ysub), .s(ys));
  addsub16 u_zadd (.a(za), .b(zb), .sub(zsub), .s(zs));

  // ---------------------------------------------------------------------
  // Control and registers.
  // ---------------------------------------------------------------------
  assign in_ready  = (state == S_IDLE);
  assign out_valid = (state == S_DONE);
  assign out_x     = x;
  assign out_y     = y;
  assign out_z     = z;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      mode  <= CORDIC_ROTATE;
      it    <= '0;
      x     <= '0;
      y     <= '0;
      z     <= '0;
      xo    <= '0;
      yo    <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          if (in_valid) begin
            mode  <= in_mode;
            x     <= x0;
            y     <= y0;
            z     <= z0;
            it    <= '0;
            state <= S_ITER;
          end
        end
        S_ITER: begin
          x <= sat16(xs);
          y <= sat16(ys);
          z <= zs[ANG_W-1:0];
          if (it == IW'(ITER - 1)) begin
            it <= '0;
            if (GAIN_COMP) begin
              xo    <= sat16(xs);
              yo    <= sat16(ys);
              state <= S_COMP;
            end else begin
              state <= S_DONE;
            end
          end else begin
            it <= it + 1'b1;
          end
        end
        S_COMP: begin
          x <= sat16(xs);
          y <= sat16(ys);
          if (it == IW'(COMP_STEPS - 1)) begin
            it    <= '0;
            state <= S_DONE;
          end else begin
            it <= it + 1'b1;
          end
        end
        default: begin // S_DONE
          if (out_ready) state <= S_IDLE;
        end
      endcase
    end
  end

  // ---------------------------------------------------------------------
  // Checks.
  // ---------------------------------------------------------------------
  initial begin
    assert (ITER >= 1 && ITER <= MAX_ITER)
      else $error("cordic_core: ITER must be 1..%0d", MAX_ITER);
  end

  // The result stays put while it waits to be taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (out_valid && !out_ready) |=> (out_valid && $stable(out_x) && $stable(out_y) && $stable(out_z));
  endproperty
  a_hold: assert property (p_hold);

endmodule
