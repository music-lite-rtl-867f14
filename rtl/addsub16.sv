// addsub16 -- add or subtract two 16-bit words using only a 16-bit
// sign-extended adder.
//
// The adder behind it (add16se_cla, or an approximate adder of the same
// shape) has no carry-in, so subtraction cannot be done as a + ~b + 1.
// Instead it uses the identity  a - b = ~(~a + b):  the operand a is inverted
// on the way in and the 17-bit sum is inverted on the way out.  The identity
// is exact in two's complement, so with the accurate adder the result is the
// exact 17-bit difference; with an approximate adder the subtraction inherits
// that adder's error, just as the additions do.  This trick is this design's
// choice; the source does not say how the CORDIC core subtracts.
//
// Interface: combinational.  sub = 0 gives a + b, sub = 1 gives a - b, both as
// 17-bit sign-extended results.
module addsub16
  import music_lite_pkg::*;
(
  input  data_t a,
  input  data_t b,
  input  logic  sub,
  output sum_t  s
);

  data_t a_in;
  sum_t  sum;

  assign a_in = sub ? ~a : a;

  add16se_cla u_add (
    .a (a_in),
    .b (b),
    .s (sum)
  );

  assign s = sub ? ~sum : sum;

endmodule
