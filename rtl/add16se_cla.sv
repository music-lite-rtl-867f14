// add16se_cla -- 16-bit sign-extended carry-lookahead adder.
//
// Adds two 16-bit two's-complement operands and returns their exact 17-bit
// sign-extended sum, so the result never overflows.  This is the accurate
// reference adder of the CORDIC datapath: every addition and subtraction the
// CORDIC core performs goes through an adder with exactly this port shape
// (two 16-bit operands, a 17-bit sum, no carry-in), which is the shape of the
// "add16se" approximate adders the core is meant to be evaluated with.
// Swapping this module for an approximate adder of the same shape is the
// design-space knob of the datapath.
//
// Structure: four 4-bit groups.  Inside a group, carries come from the
// bit generate/propagate terms by lookahead; a second lookahead level computes
// the carry into each group from the group generate/propagate terms.  The
// 17th (sign) bit is a15 ^ b15 ^ c16, i.e. the sum of the sign-extended
// operands.  The lookahead structure and the 4-bit grouping are this design's
// choice; the source only names a carry-lookahead adder as the accurate
// baseline.
//
// Interface: purely combinational, a/b in, s out, no clock.
module add16se_cla
  import music_lite_pkg::*;
(
  input  data_t a,
  input  data_t b,
  output sum_t  s
);

  localparam int unsigned GRP = 4;
  localparam int unsigned NG  = DATA_W / GRP;

  logic [DATA_W-1:0] g, p;       // bit generate / propagate
  logic [DATA_W:0]   c;          // carry into each bit, c[16] = carry out
  logic [NG-1:0]     gg, gp;     // group generate / propagate
  logic [NG:0]       gc;         // carry into each group

  assign g = a & b;
  assign p = a ^ b;

  // Group generate / propagate.
  always_comb begin
    for (int k = 0; k < NG; k++) begin
      gg[k] = g[k*GRP+3]
            | (p[k*GRP+3] & g[k*GRP+2])
            | (p[k*GRP+3] & p[k*GRP+2] & g[k*GRP+1])
            | (p[k*GRP+3] & p[k*GRP+2] & p[k*GRP+1] & g[k*GRP]);
      gp[k] = &p[k*GRP +: GRP];
    end
  end

  // Second-level lookahead: carry into each group (carry-in is 0).
  always_comb begin
    gc[0] = 1'b0;
    gc[1] = gg[0];
    gc[2] = gg[1] | (gp[1] & gg[0]);
    gc[3] = gg[2] | (gp[2] & gg[1]) | (gp[2] & gp[1] & gg[0]);
    gc[4] = gg[3] | (gp[3] & gg[2]) | (gp[3] & gp[2] & gg[1])
          | (gp[3] & gp[2] & gp[1] & gg[0]);
  end

  // First-level lookahead: carries inside each group.
  always_comb begin
    for (int k = 0; k < NG; k++) begin
      c[k*GRP]   = gc[k];
      c[k*GRP+1] = g[k*GRP] | (p[k*GRP] & gc[k]);
      c[k*GRP+2] = g[k*GRP+1] | (p[k*GRP+1] & g[k*GRP])
                 | (p[k*GRP+1] & p[k*GRP] & gc[k]);
      c[k*GRP+3] = g[k*GRP+2] | (p[k*GRP+2] & g[k*GRP+1])
                 | (p[k*GRP+2] & p[k*GRP+1] & g[k*GRP])
                 | (p[k*GRP+2] & p[k*GRP+1] & p[k*GRP] & gc[k]);
    end
    c[DATA_W] = gc[NG];
  end

  assign s[DATA_W-1:0] = p ^ c[DATA_W-1:0];
  assign s[DATA_W]     = a[DATA_W-1] ^ b[DATA_W-1] ^ c[DATA_W];

endmodule
