// cached_multiplier: the powering unit's ILM multiplier, forming x * N2 where
// the x-side leading-one data comes from the cache instead of a second
// detector.
//
// It runs the same correction loop as ilm_multiplier: each clock adds
//   2^(k1+k2) + 2^k2 (x_i - 2^k1) + 2^k1 (N2_i - 2^k2)
// to the product and moves to the residues. k1 and x_i - 2^k1 of correction i
// are read from cache entry i (written when x was squared), so the unit has a
// single priority encoder / LOD, on the N2 side, as the paper asks for the
// powering unit's multiplier. It stops when the x chain ends (cache `rlast`),
// when the N2 residue is zero, or when the cache is empty; the product is
// always exact.
//
// The chain of b found by the detector (k2, N2 - 2^k2 per correction) is
// presented on the chain_* outputs.
//
// Interface: pulse `start` with `b` while `busy` is low; `done` pulses one
// clock with `p` valid. done rises max(1, min(popcount(x), popcount(b)))
// clock edges after the edge that samples start. `raddr` drives the cache read port.
module cached_multiplier #(
  parameter int unsigned W = 64,
  localparam int unsigned KW = (W > 1) ? $clog2(W) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   b,
  // cache read port (x-side chain)
  output logic [7:0]     raddr,
  input  logic [KW-1:0]  c_k,
  input  logic [W-1:0]   c_res,
  input  logic           c_last,
  input  logic [7:0]     c_len,
  output logic           busy,
  output logic           done,
  output logic [2*W-1:0] p,
  // leading-one chain of b found by this unit's detector, one entry per
  // correction (the powering unit caches it for a later squaring of b)
  output logic           chain_we,
  output logic [7:0]     chain_idx,
  output logic [KW-1:0]  chain_k,
  output logic [W-1:0]   chain_res
);

  logic [W-1:0]   n2_q;
  logic [KW-1:0]  k2;
  logic [W-1:0]   p2k2, r2;
  logic           z2;
  logic [2*W-1:0] term;

  lod #(.W(W)) u_lod (.n(n2_q), .k(k2), .pow2k(p2k2), .residue(r2), .zero(z2));

  always_comb begin
    logic [KW:0] ksum;
    ksum = {1'b0, c_k} + {1'b0, k2};
    term = ({{(2*W-1){1'b0}}, 1'b1} << ksum)
         + ((2*W)'(c_res) << k2)
         + ((2*W)'(r2) << c_k);
  end

  assign chain_we  = busy && !z2 && (c_len != 8'd0);
  assign chain_idx = raddr;
  assign chain_k   = k2;
  assign chain_res = r2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      p     <= '0;
      n2_q  <= '0;
      raddr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        n2_q  <= b;
        p     <= '0;
        raddr <= '0;
      end else if (busy) begin
        if (z2 || (c_len == 8'd0)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          p     <= p + term;
          n2_q  <= r2;
          raddr <= raddr + 8'd1;
          if (c_last || (r2 == '0)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
