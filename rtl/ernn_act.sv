// ernn_act: piecewise linear sigmoid and tanh.
//
// The activation functions of the compute units are approximated by
// straight-line segments, so they need only comparators, shifts and adders
// and no lookup table in external memory. The paper states that sigmoid and
// tanh use a piecewise linear approximation but not its segments; the
// segments below are the well-known PLAN sigmoid (slopes 1/4, 1/8, 1/32),
// chosen here because every slope is a power of two:
//
//   |x| >= 5           y = 1
//   2.375 <= |x| < 5   y = |x|/32 + 0.84375
//   1 <= |x| < 2.375   y = |x|/8  + 0.625
//   |x| < 1            y = |x|/4  + 0.5
//   x < 0              y = 1 - y(|x|)
//
// tanh uses the identity tanh(x) = 2*sigmoid(2x) - 1 on the same segments.
//
// Interface: x is PW bits with FRAC fraction bits; is_tanh selects the
// function; y is DW bits with FRAC fraction bits. Combinational.
module ernn_act
  import ernn_pkg::*;
(
  input  logic signed [PW-1:0] x,
  input  logic                 is_tanh,
  output logic signed [DW-1:0] y
);
  localparam int unsigned XW  = PW + 2;
  localparam logic signed [XW-1:0] ONE = XW'(1 << FRAC);

  logic signed [XW-1:0] xs, ax, s;

  always_comb begin
    xs = is_tanh ? (XW'(x) <<< 1) : XW'(x);
    ax = (xs < 0) ? -xs : xs;
    if (ax >= 5 * ONE)
      s = ONE;
    else if (ax >= (19 * ONE) / 8)                        // 2.375
      s = (ax >>> 5) + (27 * ONE) / 32;                   // 0.84375
    else if (ax >= ONE)
      s = (ax >>> 3) + (5 * ONE) / 8;                     // 0.625
    else
      s = (ax >>> 2) + ONE / 2;
    if (xs < 0) s = ONE - s;
    if (is_tanh) s = (s <<< 1) - ONE;
    y = DW'(s);
  end

endmodule
