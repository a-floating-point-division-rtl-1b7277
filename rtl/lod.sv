// lod: leading-one detector of the iterative logarithmic multiplier.
//
// For an unsigned operand N it returns k, the position of the leading one
// (the characteristic, N = 2^k (1 + x)), and N - 2^k, the operand with that
// bit cleared. It is built as the dotted "LOD" box of the multiplier and
// squarer datapaths: a priority encoder produces k, a barrel shifter turns
// the constant 1 into 2^k, a bitwise NOT inverts it and an AND with N clears
// the leading one. When N is zero, k is 0, the residue is 0 and `zero` is set.
// Purely combinational.
module lod #(
  parameter int unsigned W  = 64,
  localparam int unsigned KW = (W > 1) ? $clog2(W) : 1
) (
  input  logic [W-1:0]  n,
  output logic [KW-1:0] k,        // position of the leading one
  output logic [W-1:0]  pow2k,    // 2^k
  output logic [W-1:0]  residue,  // N - 2^k
  output logic          zero      // N == 0
);

  // Priority encoder: the highest set bit wins.
  always_comb begin
    k = '0;
    for (int unsigned i = 0; i < W; i++)
      if (n[i]) k = KW'(i);
  end

  // Barrel shifter, bitwise NOT and AND.
  assign zero    = (n == '0);
  assign pow2k   = zero ? '0 : ({{(W-1){1'b0}}, 1'b1} << k);
  assign residue = n & ~pow2k;

endmodule
