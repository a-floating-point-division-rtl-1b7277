// tb_ilm_multiplier: checks the iterative logarithmic multiplier.
// Instance 1 (64-bit, exact mode): the product must equal a*b and done must
// come max(1, min(popcount(a), popcount(b))) clocks after start.
// Instance 2 (16-bit, at most 3 corrections): the result must equal the ILM
// approximation a*b - a'*b', where a' and b' are a and b with their three
// leading ones removed (or the exact product if either runs out first).
module tb_ilm_multiplier;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         s1 = 1'b0, busy1, done1;
  logic [63:0]  a1, b1;
  logic [127:0] p1;
  logic [7:0]   it1;
  ilm_multiplier #(.W(64)) u_exact (.clk, .rst_n, .start(s1), .a(a1), .b(b1),
    .busy(busy1), .done(done1), .p(p1), .iters(it1));

  logic         s2 = 1'b0, busy2, done2;
  logic [15:0]  a2, b2;
  logic [31:0]  p2;
  logic [7:0]   it2;
  ilm_multiplier #(.W(16), .MAX_ITERS(3)) u_approx (.clk, .rst_n, .start(s2), .a(a2), .b(b2),
    .busy(busy2), .done(done2), .p(p2), .iters(it2));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] strip(logic [63:0] v, int n);
    for (int j = 0; j < n; j++)
      for (int i = 63; i >= 0; i--) if (v[i]) begin v[i] = 1'b0; break; end
    return v;
  endfunction

  task automatic mul_exact(input logic [63:0] x, input logic [63:0] y);
    int lat, exp_lat;
    @(negedge clk); a1 = x; b1 = y; s1 = 1'b1;
    @(negedge clk); s1 = 1'b0; lat = 1;
    while (!done1) begin @(negedge clk); lat++; end
    exp_lat = ($countones(x) < $countones(y)) ? $countones(x) : $countones(y);
    if (exp_lat < 1) exp_lat = 1;
    exp_lat++;                 // lat counts from the cycle that holds start
    checks += 2;
    if (p1 != 128'(x) * 128'(y)) begin
      failures++; $display("FAIL %h * %h = %h", x, y, p1);
    end
    if (lat != exp_lat) begin
      failures++; $display("FAIL latency %0d, expected %0d", lat, exp_lat);
    end
  endtask

  task automatic mul_approx(input logic [15:0] x, input logic [15:0] y);
    logic [31:0] e;
    @(negedge clk); a2 = x; b2 = y; s2 = 1'b1;
    @(negedge clk); s2 = 1'b0;
    while (!done2) @(negedge clk);
    e = 32'(x) * 32'(y) - 32'(strip(64'(x), 3)) * 32'(strip(64'(y), 3));
    checks++;
    if (p2 != e) begin
      failures++; $display("FAIL approx %h * %h = %h, expected %h", x, y, p2, e);
    end
  endtask

  initial begin
    a1 = '0; b1 = '0; a2 = '0; b2 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    mul_exact(0, 64'h1234);
    mul_exact(64'h1234, 0);
    mul_exact(1, 1);
    mul_exact('1, '1);
    mul_exact(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0001);
    for (int i = 0; i < 300; i++)
      mul_exact({$urandom, $urandom} >> ($urandom % 64), {$urandom, $urandom} >> ($urandom % 64));
    for (int i = 0; i < 300; i++) mul_approx(16'($urandom), 16'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
