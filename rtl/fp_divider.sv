// fp_divider: IEEE-754 double-precision divider q = a / b built on a
// Taylor-series reciprocal and iterative logarithmic multipliers.
//
// Flow (one division at a time):
//   1. unpack a and b; handle NaN, infinity and zero operands directly;
//   2. pla_unit: initial approximation y0 ~ 1/x of b's significand x and the
//      Taylor argument m = 1 - x*y0 (registered);
//   3. powering_unit: m, m^2 .. m^N_TERMS, two powers per step (odd power on
//      the ILM multiplier with cached data of m, even power on the squarer),
//      each step's pair summed and handed to the accumulator;
//   4. accumulator: 1/x ~ y0 * (1 + m + ... + m^N_TERMS);
//   5. final ILM multiplier: significand of a times 1/x;
//   6. normalise (quotient of significands lies in (0.5, 2)), round to
//      nearest even, pack; exponent = ea - eb + bias.
// Steps 2-5 are the paper's system; steps 1 and 6 (IEEE-754 packing and
// special cases) are this design's choices, as the paper leaves them out.
// Subnormal inputs are treated as zero and results below the normal range
// flush to zero; overflow gives infinity. With N_TERMS = 5 the reciprocal is
// good to about 53 bits, so a quotient can differ from the correctly rounded
// one by one unit in the last place.
//
// Interface: pulse `start` with `a`, `b` while `busy` is low; `done` pulses
// for one clock with `q` valid (held until the next division). Latency is
// data dependent: the ILM units take one clock per set bit of the smaller
// operand; a special case takes 2 clocks, a normal division at most about 160.
module fp_divider
  import fpdiv_pkg::*;
#(
  parameter int unsigned N_TERMS = 5,    // highest Taylor power (paper: n = 5)
  parameter int unsigned F       = FRAC  // fraction bits of the Taylor datapath
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic        busy,
  output logic        done,
  output logic [63:0] q
);

  localparam int unsigned PW = F + 1;               // final multiplier width
  localparam logic [63:0] QNAN = 64'h7FF8_0000_0000_0000;

  typedef enum logic [2:0] {S_IDLE, S_PLA, S_START, S_POW, S_ACC, S_MUL, S_ROUND, S_DONE} state_t;
  state_t state;

  fp64_t            a_q, b_q;
  logic             sgn_q;
  logic signed [13:0] exp_q;
  logic [F-1:0]     y0_q, m_q;

  // ---------------- operand classification
  fp64_t fa, fb;
  assign fa = a;
  assign fb = b;
  logic a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;
  assign a_nan  = (fa.exp == '1) && (fa.man != '0);
  assign b_nan  = (fb.exp == '1) && (fb.man != '0);
  assign a_inf  = (fa.exp == '1) && (fa.man == '0);
  assign b_inf  = (fb.exp == '1) && (fb.man == '0);
  assign a_zero = (fa.exp == '0);                  // zero or subnormal
  assign b_zero = (fb.exp == '0);

  // ---------------- piecewise-linear approximation
  logic [SIG_W-1:0] xb;
  logic [2:0]       seg;
  logic [F-1:0]     y0_w, m_w;
  assign xb = {1'b1, b_q.man};
  pla_unit #(.F(F)) u_pla (.x(xb), .seg(seg), .y0(y0_w), .m(m_w));

  // ---------------- powering unit and accumulator
  logic         pw_start, pw_busy, pw_tv, pw_done;
  logic [F-1:0] pw_term;
  logic [7:0]   pw_steps;
  logic [15:0]  pw_reused;
  logic         acc_busy, acc_rv;
  logic [F-1:0] acc_sum;
  logic [F:0]   recip;

  assign pw_start = (state == S_START);

  powering_unit #(.W(F), .N_TERMS(N_TERMS)) u_pow (
    .clk, .rst_n, .start(pw_start), .x(m_q), .busy(pw_busy),
    .term_valid(pw_tv), .term(pw_term), .done(pw_done), .steps(pw_steps),
    .reused(pw_reused));

  accumulator #(.F(F)) u_acc (
    .clk, .rst_n, .load(pw_start), .y0(y0_q), .add(pw_tv), .term(pw_term),
    .finish(state == S_ACC && !acc_busy && !acc_rv), .busy(acc_busy),
    .sum(acc_sum), .recip_valid(acc_rv), .recip(recip));

  // ---------------- final multiplier: significand(a) * 1/x
  logic [PW-1:0]   recip_q;
  logic            fm_busy, fm_done;
  logic [2*PW-1:0] fm_p;
  logic [7:0]      fm_iters;
  logic            fm_start;
  assign fm_start = (state == S_MUL) && !fm_busy && !fm_done;

  ilm_multiplier #(.W(PW)) u_fmul (
    .clk, .rst_n, .start(fm_start), .a(PW'({1'b1, a_q.man})), .b(recip_q),
    .busy(fm_busy), .done(fm_done), .p(fm_p), .iters(fm_iters));

  logic [2*PW-1:0] prod_q;

  // ---------------- normalise and round (product scale 2^(F+52))
  localparam int unsigned ONE = F + MAN_W;          // bit weight of 1.0
  logic               hi;
  logic [MAN_W-1:0]   man_t;
  logic               guard, sticky, rnd;
  logic [MAN_W:0]     man_r;
  logic signed [13:0] exp_n;
  always_comb begin
    hi = prod_q[ONE];
    if (hi) begin
      man_t  = prod_q[ONE-1 -: MAN_W];
      guard  = prod_q[ONE-1-MAN_W];
      sticky = |prod_q[ONE-2-MAN_W:0];
      exp_n  = exp_q;
    end else begin
      man_t  = prod_q[ONE-2 -: MAN_W];
      guard  = prod_q[ONE-2-MAN_W];
      sticky = |prod_q[ONE-3-MAN_W:0];
      exp_n  = exp_q - 14'sd1;
    end
    rnd   = guard && (sticky || man_t[0]);
    man_r = {1'b0, man_t} + (MAN_W+1)'(rnd);
    if (man_r[MAN_W]) exp_n = exp_n + 14'sd1;       // rounded up to 2.0
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      q       <= '0;
      a_q     <= '0;
      b_q     <= '0;
      sgn_q   <= 1'b0;
      exp_q   <= '0;
      y0_q    <= '0;
      m_q     <= '0;
      recip_q <= '0;
      prod_q  <= '0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          a_q   <= fa;
          b_q   <= fb;
          sgn_q <= fa.sign ^ fb.sign;
          exp_q <= 14'(signed'({1'b0, fa.exp})) - 14'(signed'({1'b0, fb.exp})) + 14'sd1023;
          if (a_nan || b_nan || (a_inf && b_inf) || (a_zero && b_zero)) begin
            q <= QNAN;            state <= S_DONE;
          end else if (a_inf || b_zero) begin
            q <= {fa.sign ^ fb.sign, 11'h7FF, 52'd0}; state <= S_DONE;
          end else if (a_zero || b_inf) begin
            q <= {fa.sign ^ fb.sign, 63'd0};          state <= S_DONE;
          end else begin
            state <= S_PLA;
          end
        end
        S_PLA: begin              // registers y0 and m
          y0_q  <= y0_w;
          m_q   <= m_w;
          state <= S_START;
        end
        S_START: state <= S_POW;  // starts the powering unit, loads y0
        S_POW: if (pw_done) state <= S_ACC;
        S_ACC: if (acc_rv) begin
          recip_q <= recip;
          state   <= S_MUL;
        end
        S_MUL: if (fm_done) begin
          prod_q <= fm_p;
          state  <= S_ROUND;
        end
        S_ROUND: begin
          if (exp_n >= 14'sd2047)  q <= {sgn_q, 11'h7FF, 52'd0};
          else if (exp_n <= 14'sd0) q <= {sgn_q, 63'd0};
          else q <= {sgn_q, exp_n[10:0], man_r[MAN_W-1:0]};
          state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
