// squaring_unit: squarer derived from the iterative logarithmic multiplier.
//
// For one operand the ILM identity collapses to
//   N^2 = 4^k + 2^(k+1) (N - 2^k) + (N - 2^k)^2
// so a single leading-one detector, one shifter for 2^(k+1)(N - 2^k), a
// shift for 4^k = 2^(2k), an incrementer for k+1 and two adders suffice. One
// stage of that datapath is reused every clock: stage i takes the residue
// sqrt(E(i)) and the partial square P(i) and yields sqrt(E(i+1)) = N - 2^k
// and P(i+1) = P(i) + 4^k + 2^(k+1)(N - 2^k). The loop ends when the residue
// is zero, so the square is always exact; the number of clocks is the
// operand's popcount.
//
// Each stage's leading-one data (k and N - 2^k) is also presented on the
// chain_* outputs; the powering unit writes the chain of x into its cache
// while it squares x, so the multiplier does not need its own detector for x.
// Conversely, when the operand's chain was already found by the multiplier
// (an even power used there as a factor), the ext_* inputs supply it and the
// detector is only needed for the stages past the cached part. The result is
// the same either way; only where k and N - 2^k come from changes.
//
// Interface: pulse `start` with `n` while `busy` is low; `done` pulses one
// clock with `sq` valid (held until the next start). done rises
// max(1, popcount(n)) clock edges after the edge that samples start.
// The paper prints the 4^k term as "(100)_2 << k" in the text and as a shifter
// fed with (10)_2 in its figure; neither equals 4^k, so this unit follows the
// equation and forms 4^k as 1 << 2k.
module squaring_unit #(
  parameter int unsigned W = 64,
  localparam int unsigned KW = (W > 1) ? $clog2(W) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   n,
  output logic           busy,
  output logic           done,
  output logic [2*W-1:0] sq,
  // leading-one chain of the operand, one entry per stage
  output logic           chain_we,
  output logic [7:0]     chain_idx,
  output logic [KW-1:0]  chain_k,
  output logic [W-1:0]   chain_res,
  // optional cached chain of the operand: when ext_en is high at start, the
  // first ext_len stages take k and N - 2^k from ext_k / ext_res (entry
  // chain_idx) instead of the detector
  input  logic           ext_en,
  input  logic [7:0]     ext_len,
  input  logic [KW-1:0]  ext_k,
  input  logic [W-1:0]   ext_res,
  output logic [7:0]     cached_stages   // stages of the last square fed from the cache
);

  logic [W-1:0]   n_q;
  logic [KW-1:0]  k, k_lod;
  logic [W-1:0]   p2k, res, res_lod;
  logic           z, z_lod;
  logic [2*W-1:0] stage_sum;
  logic           ext_q, use_c;
  logic [7:0]     len_q;

  lod #(.W(W)) u_lod (.n(n_q), .k(k_lod), .pow2k(p2k), .residue(res_lod), .zero(z_lod));

  // leading-one data of this stage: cached copy while it lasts, else detector
  assign use_c = ext_q && (chain_idx < len_q);
  assign k     = use_c ? ext_k   : k_lod;
  assign res   = use_c ? ext_res : res_lod;
  assign z     = z_lod;

  always_comb begin
    logic [KW:0] kp1;
    kp1       = {1'b0, k} + 1'b1;                          // adder: k+1
    stage_sum = ({{(2*W-1){1'b0}}, 1'b1} << {k, 1'b0})     // 4^k
              + ((2*W)'(res) << kp1);                      // 2^(k+1)(N-2^k)
  end

  assign chain_we  = busy && !z;
  assign chain_k   = k;
  assign chain_res = res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      sq        <= '0;
      n_q       <= '0;
      chain_idx <= '0;
      ext_q     <= 1'b0;
      len_q     <= '0;
      cached_stages <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        n_q       <= n;
        sq        <= '0;
        chain_idx <= '0;
        ext_q     <= ext_en;
        len_q     <= ext_len;
        cached_stages <= '0;
      end else if (busy) begin
        if (z) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          sq        <= sq + stage_sum;
          n_q       <= res;
          chain_idx <= chain_idx + 8'd1;
          if (use_c) cached_stages <= cached_stages + 8'd1;
          if (res == '0) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
