// tb_cordic_core -- self-checking test of the iterative CORDIC core.
//
// Two instances: the default core (16 iterations, gain compensation) and a
// short one (12 iterations, no compensation).  Each job is checked three ways:
//   * bit-exact against the integer model in cordic_ref_pkg;
//   * against real arithmetic (cos/sin/atan2/sqrt) within a tolerance, for
//     the default core and inputs inside the no-overflow range;
//   * for its latency: out_valid must rise exactly ITER + 5*GAIN_COMP edges
//     after the accepting edge, and the core must refuse jobs while busy.
// The output side is stalled at random for a few cycles and the held result
// is compared before and after the stall.  Directed jobs cover all four
// quadrants, angles beyond +-90 degrees and saturating inputs.
`timescale 1ns/1ps
module tb_cordic_core;
  import music_lite_pkg::*;
  import cordic_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  // ---- DUT 0: defaults ----
  logic         iv0, ir0, ov0, or0;
  cordic_mode_e m0;
  data_t        x0, y0, ox0, oy0;
  angle_t       z0, oz0;
  cordic_core dut0 (.clk, .rst_n, .in_valid(iv0), .in_ready(ir0), .in_mode(m0),
                    .in_x(x0), .in_y(y0), .in_z(z0), .out_valid(ov0), .out_ready(or0),
                    .out_x(ox0), .out_y(oy0), .out_z(oz0));

  // ---- DUT 1: 12 iterations, no compensation ----
  logic         iv1, ir1, ov1, or1;
  cordic_mode_e m1;
  data_t        x1, y1, ox1, oy1;
  angle_t       z1, oz1;
  cordic_core #(.ITER(12), .GAIN_COMP(1'b0)) dut1 (.clk, .rst_n, .in_valid(iv1), .in_ready(ir1), .in_mode(m1),
                    .in_x(x1), .in_y(y1), .in_z(z1), .out_valid(ov1), .out_ready(or1),
                    .out_x(ox1), .out_y(oy1), .out_z(oz1));

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL: %s", msg);
  endtask

  // Run one job on DUT 0 and check it.
  task automatic job0(input int mode, input int x, input int y, input int z, input bit real_chk);
    int ex, ey, ez, lat;
    data_t hx, hy; angle_t hz;
    @(negedge clk);
    iv0 = 1'b1; m0 = cordic_mode_e'(mode[0]); x0 = data_t'(x); y0 = data_t'(y); z0 = angle_t'(z);
    or0 = 1'b0;
    @(posedge clk);                       // accepting edge (core idle)
    checks++; if (!ir0) fail("core 0 not ready when idle");
    @(negedge clk); iv0 = 1'b0;
    lat = 0;
    while (!ov0) begin
      // must refuse a job while busy
      if (ir0) fail("core 0 ready while busy");
      @(posedge clk); lat++;
      @(negedge clk);
    end
    checks++;
    if (lat != 16 + 5) fail($sformatf("core 0 latency %0d, expected 21", lat));
    // random stall, result must hold
    hx = ox0; hy = oy0; hz = oz0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    checks++;
    if (ox0 != hx || oy0 != hy || oz0 != hz || !ov0) fail("core 0 result not held during stall");
    cordic_model(mode, x, y, z, 16, 1'b1, ex, ey, ez);
    checks++;
    if (int'(ox0) != ex || int'(oy0) != ey || int'(oz0) != ez)
      fail($sformatf("core 0 mode %0d in (%0d,%0d,%0d): got (%0d,%0d,%0d) model (%0d,%0d,%0d)",
                     mode, x, y, z, ox0, oy0, oz0, ex, ey, ez));
    if (real_chk) begin
      real rx, ry, th, r, tol;
      r = $sqrt(real'(x) * x + real'(y) * y);
      tol = 12.0 + 0.002 * r;
      checks++;
      if (mode == 0) begin
        th = ang2rad(z);
        rx = x * $cos(th) - y * $sin(th);
        ry = x * $sin(th) + y * $cos(th);
        if (rabs(rx - ox0) > tol || rabs(ry - oy0) > tol || ang_diff(oz0, 0) > 4 || ang_diff(oz0, 0) < -4)
          fail($sformatf("core 0 rotate (%0d,%0d) by %0d: got (%0d,%0d,z=%0d) exact (%f,%f)", x, y, z, ox0, oy0, oz0, rx, ry));
      end else begin
        int ea, atol;
        ea = wrap16(int'(rad2ang($atan2(real'(y), real'(x)))) + z);
        // one LSB of residual y moves the angle by 1/r rad = 10430/r angle LSBs
        atol = 4 + int'(2.0 * 10430.4 / r);
        if (rabs(r - ox0) > tol || rabs(real'(oy0)) > tol || (r > 500.0 && (ang_diff(oz0, ea) > atol || ang_diff(oz0, ea) < -atol)))
          fail($sformatf("core 0 vector (%0d,%0d): got (%0d,%0d,z=%0d) exact (%f,0,%0d)", x, y, ox0, oy0, oz0, r, ea));
      end
    end
    or0 = 1'b1;
    @(posedge clk);
    @(negedge clk); or0 = 1'b0;
    checks++;
    if (ov0 || !ir0) fail("core 0 did not return to idle after handoff");
  endtask

  // Run one job on DUT 1 (model check and latency only).
  task automatic job1(input int mode, input int x, input int y, input int z);
    int ex, ey, ez, lat;
    @(negedge clk);
    iv1 = 1'b1; m1 = cordic_mode_e'(mode[0]); x1 = data_t'(x); y1 = data_t'(y); z1 = angle_t'(z);
    or1 = 1'b1;
    @(posedge clk);
    @(negedge clk); iv1 = 1'b0;
    lat = 0;
    while (!ov1) begin @(posedge clk); lat++; @(negedge clk); end
    checks++;
    if (lat != 12) fail($sformatf("core 1 latency %0d, expected 12", lat));
    cordic_model(mode, x, y, z, 12, 1'b0, ex, ey, ez);
    checks++;
    if (int'(ox1) != ex || int'(oy1) != ey || int'(oz1) != ez)
      fail($sformatf("core 1 mode %0d in (%0d,%0d,%0d): got (%0d,%0d,%0d) model (%0d,%0d,%0d)",
                     mode, x, y, z, ox1, oy1, oz1, ex, ey, ez));
    @(posedge clk);
  endtask

  function automatic int rnd_in(input int lim);
    return $urandom_range(0, 2 * lim) - lim;
  endfunction

  initial begin
    iv0 = 0; or0 = 0; m0 = CORDIC_ROTATE; x0 = 0; y0 = 0; z0 = 0;
    iv1 = 0; or1 = 0; m1 = CORDIC_ROTATE; x1 = 0; y1 = 0; z1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // directed: four quadrants, vectoring
    job0(1, 10000, 0, 0, 1);
    job0(1, 10000, 10000, 0, 1);
    job0(1, -10000, 5000, 0, 1);
    job0(1, -10000, -5000, 0, 1);
    job0(1, 3000, -12000, 0, 1);
    job0(1, 0, 15000, 0, 1);
    job0(1, -15000, 0, 0, 1);
    // directed: rotations, incl. beyond +-90 degrees and -pi
    job0(0, 12000, 0, 8192, 1);
    job0(0, 12000, 0, 16384, 1);
    job0(0, 12000, 0, 30000, 1);
    job0(0, 12000, 3000, -30000, 1);
    job0(0, 5000, -7000, -32768, 1);
    // saturating inputs (model only)
    job0(1, 32767, 32767, 0, 0);
    job0(0, -32768, 32767, 12345, 0);
    // random
    for (int n = 0; n < 300; n++) begin
      int x, y;
      x = rnd_in(13000); y = rnd_in(13000);
      job0(n % 2, x, y, (n % 2 == 0) ? int'(angle_t'($urandom)) : rnd_in(2000), 1);
    end
    for (int n = 0; n < 150; n++)
      job1(n % 2, int'(data_t'($urandom)), int'(data_t'($urandom)), int'(angle_t'($urandom)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
