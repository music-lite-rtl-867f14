// cordic_ref_pkg -- reference models for the testbenches.
//
// cordic_model() is an integer re-statement of the CORDIC job the core
// performs (quadrant pre-rotation, ITER micro-rotations of
//   x -= d*round(y/2^i), y += d*round(x/2^i), z -= d*atan(2^-i),
// saturation of x and y to 16 bits, wrapping z, then the optional
// multiplication by 2^-1 + 2^-3 - 2^-6 - 2^-9 - 2^-12 + 2^-14), written with plain integer
// arithmetic and its own arctangent table computed with $atan, so it shares
// no code with the RTL.  The real-valued helpers give the mathematically
// exact rotation the hardware approximates.
package cordic_ref_pkg;

  function automatic int sat(input int v);
    if (v > 32767)  return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic int wrap16(input int v);
    int r;
    r = v & 16'hffff;
    return (r >= 32768) ? r - 65536 : r;
  endfunction

  function automatic int asr(input int v, input int sh);
    return v >>> sh;
  endfunction

  // v / 2^sh rounded half up
  function automatic int asr_rnd(input int v, input int sh);
    if (sh == 0) return v;
    return (v + (1 <<< (sh - 1))) >>> sh;
  endfunction

  function automatic int atan_ref(input int i);
    return int'($atan(2.0 ** (-i)) * 32768.0 / 3.14159265358979);
  endfunction

  // mode: 0 = rotate by z, 1 = vector onto the x axis
  task automatic cordic_model(input int mode, input int x_i, input int y_i, input int z_i,
                              input int iter, input bit comp,
                              output int xo, output int yo, output int zo);
    int x, y, z, xn, yn, d, ax, ay;
    x = x_i; y = y_i; z = z_i;
    if (mode == 0) begin
      if (z > 16384)       begin x = sat(-y_i); y = x_i;       z = z - 16384; end
      else if (z < -16384) begin x = y_i;       y = sat(-x_i); z = z + 16384; end
    end else if (x_i < 0) begin
      if (y_i >= 0) begin x = y_i;       y = sat(-x_i); z = wrap16(z + 16384); end
      else          begin x = sat(-y_i); y = x_i;       z = wrap16(z - 16384); end
    end
    for (int i = 0; i < iter; i++) begin
      if (mode == 0) d = (z >= 0) ? 1 : -1;
      else           d = (y < 0)  ? 1 : -1;
      xn = sat(x - d * asr_rnd(y, i));
      yn = sat(y + d * asr_rnd(x, i));
      z  = wrap16(z - d * atan_ref(i));
      x = xn; y = yn;
    end
    if (comp) begin
      ax = sat(asr(x, 1) + asr(x, 3)); ax = sat(ax - asr(x, 6)); ax = sat(ax - asr(x, 9));
      ax = sat(ax - asr(x, 12)); ax = sat(ax + asr(x, 14));
      ay = sat(asr(y, 1) + asr(y, 3)); ay = sat(ay - asr(y, 6)); ay = sat(ay - asr(y, 9));
      ay = sat(ay - asr(y, 12)); ay = sat(ay + asr(y, 14));
      x = ax; y = ay;
    end
    xo = x; yo = y; zo = z;
  endtask

  function automatic real ang2rad(input int a);
    return real'(a) * 3.14159265358979 / 32768.0;
  endfunction

  function automatic real rad2ang(input real r);
    return r * 32768.0 / 3.14159265358979;
  endfunction

  // angle difference wrapped into [-32768, 32767]
  function automatic int ang_diff(input int a, input int b);
    return wrap16(a - b);
  endfunction

  function automatic real rabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
