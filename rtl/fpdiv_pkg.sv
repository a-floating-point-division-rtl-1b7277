// fpdiv_pkg: widths, IEEE-754 double-precision field layout and the
// piecewise-linear segment table shared by the division unit.
//
// The segment boundaries are Table I of the design (n = 5 Taylor terms,
// eight segments covering [1, 2.12392]); they are kept as integers in units
// of 1e-5 and every fixed-point constant is derived from them by the
// constant functions below, so no number is pasted twice:
//   C0_k = floor(4 / (a_k + b_k) * 2^FRAC)          (intercept of eq. 15)
//   C1_k = ceil (4 / (a_k + b_k)^2 * 2^FRAC)        (slope of eq. 15)
//   BND_k = ceil(b_(k-1) * 2^52)                    (segment start, 1.52 format)
// Rounding C0 down and C1 up keeps every initial approximation y0 at or
// below the exact tangent value, hence at or below 1/x, so m = 1 - x*y0 is
// never negative.
package fpdiv_pkg;

  // Fraction bits of the fixed-point Taylor datapath (m, its powers, y0, 1/b).
  // Not given by the design; 64 leaves about ten guard bits over the 53-bit
  // significand.
  localparam int unsigned FRAC = 64;

  // IEEE-754 binary64 layout.
  localparam int unsigned EXP_W  = 11;
  localparam int unsigned MAN_W  = 52;
  localparam int unsigned SIG_W  = MAN_W + 1;   // significand with hidden one
  localparam int unsigned BIAS   = 1023;

  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } fp64_t;

  // Number of piecewise-linear segments (Table I).
  localparam int unsigned NSEG = 8;

  // Table I: a = 1, b0 .. b7, in units of 1e-5.
  localparam int unsigned SEG_EDGE [0:NSEG] = '{100000, 109811, 120835, 132690,
                                                145709, 159866, 175616, 192922,
                                                212392};

  function automatic logic [FRAC+1:0] seg_c0(int unsigned k);
    logic [191:0] num, s;
    s   = 192'(SEG_EDGE[k] + SEG_EDGE[k+1]);
    num = 192'(400000) << FRAC;
    return (FRAC+2)'(num / s);
  endfunction

  function automatic logic [FRAC+1:0] seg_c1(int unsigned k);
    logic [191:0] num, s2;
    s2  = 192'(SEG_EDGE[k] + SEG_EDGE[k+1]);
    s2  = s2 * s2;
    num = 192'(64'd40000000000) << FRAC;
    return (FRAC+2)'((num + s2 - 192'd1) / s2);
  endfunction

  function automatic logic [SIG_W-1:0] seg_start(int unsigned k);
    logic [127:0] num;
    num = 128'(SEG_EDGE[k]) << MAN_W;
    return SIG_W'((num + 128'd99999) / 128'd100000);
  endfunction

endpackage
