// ilm_multiplier: iterative logarithmic multiplier (Babic/Avramovic/Bulic
// scheme) for two unsigned W-bit operands, one correction term per clock.
//
// Writing N = 2^k + (N - 2^k), the product splits into
//   N1*N2 = 2^(k1+k2) + 2^k2 (N1 - 2^k1) + 2^k1 (N2 - 2^k2)      (P_approx)
//         + (N1 - 2^k1)(N2 - 2^k2)                                 (E, error)
// Every clock one datapath of the paper's multiplier figure evaluates
// P_approx for the current pair: two leading-one detectors give k1, k2 and the
// residues, two barrel shifters align the residues, an adder sums them, a
// second adder forms k1 + k2 and a decoder turns it into 2^(k1+k2), and a last
// adder adds everything into the running product. The residues become the next
// operand pair (the error term E is again a product). The unit stops when a
// residue is zero (exact product) or, if MAX_ITERS > 0, after MAX_ITERS
// corrections (approximate product, the accuracy/time trade the scheme is
// known for). MAX_ITERS = 0, the default, always gives the exact product.
//
// Interface: pulse `start` with `a`, `b` valid while `busy` is low; `done`
// pulses for one clock with `p` valid (p holds until the next start).
// Latency: done rises max(1, c) clock edges after the edge that samples start,
// c being the number of corrections, min(popcount(a), popcount(b)) in exact
// mode.
// The iteration-per-clock sequencing and the handshake are this design's
// choices; the datapath follows the paper.
module ilm_multiplier #(
  parameter int unsigned W         = 64,
  parameter int unsigned MAX_ITERS = 0,
  localparam int unsigned KW = (W > 1) ? $clog2(W) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         busy,
  output logic         done,
  output logic [2*W-1:0] p,
  output logic [7:0]   iters     // corrections used by the last product
);

  logic [W-1:0]   n1_q, n2_q;
  logic [KW-1:0]  k1, k2;
  logic [W-1:0]   p2k1, p2k2, r1, r2;
  logic           z1, z2;
  logic [2*W-1:0] term;

  lod #(.W(W)) u_lod1 (.n(n1_q), .k(k1), .pow2k(p2k1), .residue(r1), .zero(z1));
  lod #(.W(W)) u_lod2 (.n(n2_q), .k(k2), .pow2k(p2k2), .residue(r2), .zero(z2));

  // P_approx of the current pair: decoder + two barrel shifters + adders.
  always_comb begin
    logic [KW:0] ksum;
    ksum = {1'b0, k1} + {1'b0, k2};
    term = ({{(2*W-1){1'b0}}, 1'b1} << ksum)
         + ((2*W)'(r1) << k2)
         + ((2*W)'(r2) << k1);
  end

  logic last;
  assign last = (r1 == '0) || (r2 == '0) ||
                ((MAX_ITERS != 0) && (32'(iters) + 1 >= MAX_ITERS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      p     <= '0;
      n1_q  <= '0;
      n2_q  <= '0;
      iters <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        n1_q  <= a;
        n2_q  <= b;
        p     <= '0;
        iters <= '0;
      end else if (busy) begin
        if (z1 || z2) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          p     <= p + term;
          n1_q  <= r1;
          n2_q  <= r2;
          iters <= iters + 8'd1;
          if (last) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
