// tb_cached_multiplier: fills a cache with the leading-one chain of x
// (computed here by a bit scan), then multiplies x by random operands. The
// product must equal x*b and take max(1, min(popcount(x), popcount(b))) clocks,
// and the chain outputs must list the leading ones of b, one per correction.
module tb_cached_multiplier;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         clear = 1'b0, we = 1'b0, c_last, start = 1'b0, busy, done;
  logic [7:0]   waddr, raddr, c_len;
  logic [5:0]   wk, c_k;
  logic [63:0]  wres, c_res, b;
  logic [127:0] p;
  logic         mc_we;
  logic [7:0]   mc_idx;
  logic [5:0]   mc_k;
  logic [63:0]  mc_res, cur;
  int           chain_bad, chain_n;

  // chain of b found by the multiplier: entry i = i-th leading one of b
  always @(negedge clk) if (mc_we) begin
    int hi;
    hi = -1;
    for (int i = 63; i >= 0; i--) if (cur[i] && hi < 0) hi = i;
    if (hi >= 0) cur[hi] = 1'b0;
    if (hi < 0 || int'(mc_k) != hi || mc_res != cur || int'(mc_idx) != chain_n) chain_bad++;
    chain_n++;
  end

  pow_cache #(.W(64), .DEPTH(64)) u_cache (.clk, .rst_n, .clear, .we, .waddr,
    .wdata_k(wk), .wdata_res(wres), .raddr, .rdata_k(c_k), .rdata_res(c_res),
    .rlast(c_last), .len(c_len));

  cached_multiplier #(.W(64)) u_dut (.clk, .rst_n, .start, .b, .raddr, .c_k,
    .c_res, .c_last, .c_len, .busy, .done, .p,
    .chain_we(mc_we), .chain_idx(mc_idx), .chain_k(mc_k), .chain_res(mc_res));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_x(input logic [63:0] x);
    int idx;
    @(negedge clk); clear = 1'b1;
    @(negedge clk); clear = 1'b0;
    idx = 0;
    for (int i = 63; i >= 0; i--) if (x[i]) begin
      x[i] = 1'b0;
      waddr = 8'(idx); wk = 6'(i); wres = x; we = 1'b1;
      @(negedge clk);
      idx++;
    end
    we = 1'b0;
  endtask

  task automatic mul(input logic [63:0] x, input logic [63:0] y);
    int lat, exp_lat;
    @(negedge clk); b = y; start = 1'b1; cur = y; chain_bad = 0; chain_n = 0;
    @(negedge clk); start = 1'b0; lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    exp_lat = ($countones(x) < $countones(y)) ? $countones(x) : $countones(y);
    if (exp_lat < 1) exp_lat = 1;
    checks += 3;
    if (chain_bad != 0 || chain_n != ((exp_lat == 1 && (x == 0 || y == 0)) ? 0 : exp_lat)) begin
      failures++; $display("FAIL chain of %h: %0d entries, %0d bad", y, chain_n, chain_bad);
    end
    exp_lat++;                 // lat counts from the cycle that holds start
    if (p != 128'(x) * 128'(y)) begin failures++; $display("FAIL %h * %h = %h", x, y, p); end
    if (lat != exp_lat) begin failures++; $display("FAIL latency %0d expected %0d", lat, exp_lat); end
  endtask

  initial begin
    logic [63:0] x;
    waddr = '0; wk = '0; wres = '0; b = '0; cur = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    load_x(0); mul(0, 64'h55);
    for (int t = 0; t < 20; t++) begin
      x = {$urandom, $urandom} >> ($urandom % 64);
      load_x(x);
      mul(x, 0);
      mul(x, '1);
      for (int i = 0; i < 20; i++) mul(x, {$urandom, $urandom} >> ($urandom % 64));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
