// tb_squaring_unit: checks the ILM-derived squarer. The square must equal
// n*n, done must come max(1, popcount(n)) clocks after start, and stage i
// must present k = position of the i-th leading one and the residue with the
// first i+1 leading ones cleared on its chain outputs. A second set of squares
// takes its first stages from an externally supplied chain; the result and
// the chain must be the same and the number of cached stages must be
// min(popcount, supplied length).
module tb_squaring_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         start = 1'b0, busy, done, ch_we;
  logic [63:0]  n, ch_res;
  logic [127:0] sq;
  logic [7:0]   ch_idx;
  logic [5:0]   ch_k;
  logic         ext_en = 1'b0;
  logic [7:0]   ext_len = '0, cached;
  logic [5:0]   ext_k;
  logic [63:0]  ext_res;
  logic [5:0]   tab_k   [64];
  logic [63:0]  tab_res [64];
  assign ext_k   = tab_k[ch_idx[5:0]];
  assign ext_res = tab_res[ch_idx[5:0]];

  squaring_unit #(.W(64)) u_dut (.clk, .rst_n, .start, .n, .busy, .done, .sq,
    .chain_we(ch_we), .chain_idx(ch_idx), .chain_k(ch_k), .chain_res(ch_res),
    .ext_en, .ext_len, .ext_k, .ext_res, .cached_stages(cached));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] cur;
  int          chain_bad;

  // chain monitor: compares each stage with a bit scan of the operand
  always @(negedge clk) if (ch_we) begin
    int hi;
    hi = -1;
    for (int i = 63; i >= 0; i--) if (cur[i] && hi < 0) hi = i;
    cur[hi] = 1'b0;
    if (hi < 0 || int'(ch_k) != hi || ch_res != cur) chain_bad++;
  end

  task automatic square(input logic [63:0] v);
    int lat, exp_lat;
    @(negedge clk); n = v; start = 1'b1; cur = v; chain_bad = 0;
    @(negedge clk); start = 1'b0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    exp_lat = (($countones(v) < 1) ? 1 : $countones(v)) + 1;  // from the start cycle
    checks += 3;
    if (sq != 128'(v) * 128'(v)) begin failures++; $display("FAIL %h^2 = %h", v, sq); end
    if (lat != exp_lat) begin failures++; $display("FAIL latency %0d expected %0d", lat, exp_lat); end
    if (chain_bad != 0 || cur != 0) begin failures++; $display("FAIL chain of %h", v); end
  endtask

  // squaring with the first `len` stages supplied from a chain table
  task automatic square_ext(input logic [63:0] v, input int len);
    logic [63:0] t;
    int          exp_c;
    t = v;
    for (int s = 0; s < 64; s++) begin
      int hi;
      hi = -1;
      for (int i = 63; i >= 0; i--) if (t[i] && hi < 0) hi = i;
      if (hi >= 0) t[hi] = 1'b0;
      tab_k[s] = 6'((hi < 0) ? 0 : hi); tab_res[s] = t;
    end
    @(negedge clk); n = v; start = 1'b1; ext_en = 1'b1; ext_len = 8'(len);
    cur = v; chain_bad = 0;
    @(negedge clk); start = 1'b0; ext_en = 1'b0;
    while (!done) @(negedge clk);
    exp_c = ($countones(v) < len) ? $countones(v) : len;
    checks += 3;
    if (sq != 128'(v) * 128'(v)) begin failures++; $display("FAIL ext %h^2 = %h", v, sq); end
    if (int'(cached) != exp_c) begin failures++; $display("FAIL cached stages %0d expected %0d", cached, exp_c); end
    if (chain_bad != 0) begin failures++; $display("FAIL ext chain of %h", v); end
  endtask

  initial begin
    n = '0; cur = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    square(0); square(1); square(3); square('1); square(64'h8000_0000_0000_0000);
    for (int i = 0; i < 400; i++) square({$urandom, $urandom} >> ($urandom % 64));
    for (int i = 0; i < 100; i++) square_ext({$urandom, $urandom} >> ($urandom % 64), int'($urandom % 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
