// pow_cache: cache of the leading-one chain of x inside the powering unit.
//
// While the squaring unit forms x^2 it produces, stage by stage, the
// priority-encoder value k and the LOD value N - 2^k of x and of each of its
// residues. These are exactly the x-side values the ILM multiplier needs in
// its successive corrections when it later forms x * x^k, so they are stored
// here once and read back for every odd power. The paper says the values of x
// are cached; storing the whole chain (one entry per correction) rather than
// only the first pair is this design's reading of it, since the multiplier
// needs the x-side values of every correction.
//
// Interface: `clear` empties the cache; a write stores {k, residue} at `waddr`
// and sets the length to waddr + 1. The read port is asynchronous: `rdata_k`,
// `rdata_res` of entry `raddr`, and `rlast` is set when `raddr` is the last
// stored entry. `len` is the number of stored entries.
module pow_cache #(
  parameter int unsigned W     = 64,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned KW = (W > 1) ? $clog2(W) : 1,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          we,
  input  logic [7:0]    waddr,
  input  logic [KW-1:0] wdata_k,
  input  logic [W-1:0]  wdata_res,
  input  logic [7:0]    raddr,
  output logic [KW-1:0] rdata_k,
  output logic [W-1:0]  rdata_res,
  output logic          rlast,
  output logic [7:0]    len
);

  logic [KW-1:0] mem_k   [DEPTH];
  logic [W-1:0]  mem_res [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) begin
      mem_k[waddr[AW-1:0]]   <= wdata_k;
      mem_res[waddr[AW-1:0]] <= wdata_res;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                            len <= '0;
    else if (clear)                        len <= '0;
    else if (we && (32'(waddr) < DEPTH))   len <= waddr + 8'd1;
  end

  logic in_range;
  assign in_range  = (32'(raddr) < DEPTH) && (raddr < len);
  assign rdata_k   = in_range ? mem_k[raddr[AW-1:0]]   : '0;
  assign rdata_res = in_range ? mem_res[raddr[AW-1:0]] : '0;
  assign rlast     = (raddr + 8'd1 >= len);

endmodule
