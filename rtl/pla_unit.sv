// pla_unit: piecewise-linear initial approximation of 1/x for a normalised
// significand x in [1, 2), and the Taylor argument m = 1 - x*y0.
//
// The range is split into the eight segments [b_(k-1), b_k) of Table I
// (derived for five Taylor terms and 53-bit precision; the last segment ends
// at 2.12392, past 2). On segment [a, b] the approximation is the tangent of
// 1/x at the midpoint, y0 = 4/(a+b) - 4x/(a+b)^2 (eq. 15), which is the line
// with the least total error over the segment. Since the tangent lies below
// the convex 1/x, m = 1 - x*y0 is non-negative; it peaks at the segment ends
// at about 2^-8.8, so m^6 stays near 2^-53.
//
// Datapath: seven comparators against the segment starts select the
// segment; a multiplexer picks its constants C0, C1; one multiplier and one
// subtractor form y0 = C0 - C1*x; a second multiplier and subtractor form
// m = 1 - x*y0. Constants are computed at elaboration from Table I
// (see fpdiv_pkg). Purely combinational.
//
// Formats: x is 1.52 (the IEEE-754 significand with its hidden one); y0 and m
// are fractions with FRAC bits (value = integer / 2^FRAC). Forming m here,
// next to y0, is this design's choice: the paper's system figure shows only
// y0 leaving this unit and does not say which multiplier forms x*y0.
module pla_unit
  import fpdiv_pkg::*;
#(
  parameter int unsigned F = FRAC
) (
  input  logic [SIG_W-1:0] x,      // 1.52, bit 52 set
  output logic [2:0]       seg,
  output logic [F-1:0]     y0,
  output logic [F-1:0]     m
);

  logic [F+1:0]     c0_tab [NSEG];
  logic [F+1:0]     c1_tab [NSEG];
  logic [SIG_W-1:0] st_tab [NSEG];

  for (genvar g = 0; g < NSEG; g++) begin : g_seg
    localparam logic [FRAC+1:0]  C0 = seg_c0(g);
    localparam logic [FRAC+1:0]  C1 = seg_c1(g);
    localparam logic [SIG_W-1:0] ST = seg_start(g);
    assign c0_tab[g] = (F+2)'(C0 >> (FRAC - F));
    assign c1_tab[g] = (F+2)'((C1 + ((FRAC+2)'(1) << (FRAC - F)) - 1) >> (FRAC - F));
    assign st_tab[g] = ST;
  end

  // Segment select: count of segment starts at or below x.
  always_comb begin
    seg = '0;
    for (int unsigned g = 1; g < NSEG; g++)
      if (x >= st_tab[g]) seg = 3'(g);
  end

  // y0 = C0 - ceil(C1 * x), FRAC fraction bits.
  logic [F+SIG_W+1:0] c1x;
  logic [F+1:0]       c1x_r, y0_w;
  assign c1x   = (F+SIG_W+2)'(c1_tab[seg]) * (F+SIG_W+2)'(x);
  assign c1x_r = (F+2)'((c1x + (F+SIG_W+2)'({MAN_W{1'b1}})) >> MAN_W);
  assign y0_w  = c0_tab[seg] - c1x_r;
  assign y0    = y0_w[F-1:0];

  // m = 1 - x*y0, truncated to FRAC fraction bits.
  logic [F+SIG_W:0] xy, one, m_w;
  assign xy  = (F+SIG_W+1)'(x) * (F+SIG_W+1)'(y0);
  assign one = (F+SIG_W+1)'(1) << (F + MAN_W);
  assign m_w = (one - xy) >> MAN_W;
  assign m   = m_w[F-1:0];

endmodule
