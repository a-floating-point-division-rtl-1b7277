// accumulator: sums the Taylor terms delivered by the powering unit and
// scales the sum by the initial approximation, giving
//   1/b ~ y0 * (1 + m + m^2 + ... + m^n)      (eq. 11)
// as y0 + y0*S with S = m + m^2 + ... + m^n.
//
// `load` clears S and takes y0 (which reaches the accumulator directly from
// the piecewise-linear unit, past the powering unit); each `add` adds one
// powering-unit step (two terms) to S; `finish` starts the multiplication
// y0*S on an ILM multiplier and, when it completes, `recip_valid` pulses with
// recip = y0 + y0*S. The paper shows only an "Accumulator" block between the
// powering unit and the final multiplier; the explicit y0 scaling step and its
// use of the ILM multiplier are this design's choices.
//
// Formats: y0, term and S are fractions with F bits; recip has one integer
// bit and F fraction bits (it is below 1 in practice).
// Timing: `finish` may coincide with the last `add`. The multiplication
// starts on the next clock, and recip_valid rises
// max(1, min(popcount(y0), popcount(S))) + 2 clock edges after the edge that
// samples `finish`.
module accumulator #(
  parameter int unsigned F = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [F-1:0] y0,
  input  logic         add,
  input  logic [F-1:0] term,
  input  logic         finish,
  output logic         busy,
  output logic [F-1:0] sum,
  output logic         recip_valid,
  output logic [F:0]   recip
);

  logic [F-1:0]   y0_q;
  logic           mul_busy, mul_done;
  logic [2*F-1:0] mul_p;
  logic [7:0]     mul_iters;
  logic           waiting, pend;

  ilm_multiplier #(.W(F)) u_mul (
    .clk, .rst_n, .start(pend), .a(y0_q), .b(sum),
    .busy(mul_busy), .done(mul_done), .p(mul_p), .iters(mul_iters));

  assign busy = waiting;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y0_q        <= '0;
      sum         <= '0;
      recip       <= '0;
      recip_valid <= 1'b0;
      waiting     <= 1'b0;
      pend        <= 1'b0;
    end else begin
      recip_valid <= 1'b0;
      if (load) begin
        y0_q <= y0;
        sum  <= '0;
      end else if (add) begin
        sum <= sum + term;
      end
      // the multiplication starts one clock after finish, so a term added
      // in the same clock as finish is included
      pend <= finish && !waiting;
      if (finish && !waiting) waiting <= 1'b1;
      if (waiting && mul_done) begin
        waiting     <= 1'b0;
        recip       <= {1'b0, y0_q} + (F+1)'(mul_p[2*F-1:F]);
        recip_valid <= 1'b1;
      end
    end
  end

endmodule
