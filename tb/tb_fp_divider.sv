// tb_fp_divider: end-to-end test of the double-precision divider at its
// default parameters (five Taylor terms, 64-bit fixed-point datapath).
//
// Each division is checked against the simulator's own IEEE-754 division:
// normal results must be within one unit in the last place (the reciprocal is
// good to about 53 bits), specials must match exactly, and results below the
// normal range must be a signed zero (the divider flushes). The test also
// checks that every division with normal operands takes exactly
// ceil(N_TERMS/2) = 3 powering steps (two Taylor terms per step), and counts
// how often each mechanism occurs: every one of the eight approximation
// segments, normalisation of a quotient below 1, rounding up, overflow,
// underflow, NaN, infinity and zero operands. A mechanism never seen is a
// failure.
module tb_fp_divider;
  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [63:0] a, b, q;
  logic        busy, done;
  int          checks = 0, failures = 0;

  fp_divider u_dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt_seg [8];
  int cnt_norm = 0, cnt_round = 0, cnt_ovf = 0, cnt_unf = 0;
  int cnt_nan = 0, cnt_inf = 0, cnt_zero = 0, max_lat = 0, cnt_exact = 0, cnt_ulp = 0;

  function automatic logic [63:0] ref_div(logic [63:0] x, logic [63:0] y);
    logic [63:0] r;
    r = $realtobits($bitstoreal(x) / $bitstoreal(y));
    if (r[62:52] == 11'h7FF && r[51:0] != 0) r = 64'h7FF8_0000_0000_0000;
    if (r[62:52] == 11'h000) r = {r[63], 63'd0};       // flush subnormals
    return r;
  endfunction

  // segment index of b's significand, from Table I (units of 1e-5)
  function automatic int seg_of(logic [63:0] y);
    real s;
    int  k;
    int  edges [8] = '{100000, 109811, 120835, 132690, 145709, 159866, 175616, 192922};
    s = 1.0 + real'(y[51:0]) / 4503599627370496.0;
    k = 0;
    for (int i = 1; i < 8; i++) if (s * 100000.0 >= real'(edges[i])) k = i;
    return k;
  endfunction

  task automatic divide(input logic [63:0] x, input logic [63:0] y);
    logic [63:0] e;
    int          lat;
    longint      d;
    logic        normal_ops;
    @(negedge clk);
    a = x; b = y; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    if (lat > max_lat) max_lat = lat;
    e = ref_div(x, y);
    normal_ops = (x[62:52] != 0) && (x[62:52] != 11'h7FF) &&
                 (y[62:52] != 0) && (y[62:52] != 11'h7FF);
    checks++;
    if (e[62:52] == 11'h7FF || e[62:0] == 0 || !normal_ops) begin
      if (q !== e) begin
        failures++;
        $display("FAIL special %h / %h: got %h expected %h", x, y, q, e);
      end
    end else begin
      d = longint'(q[62:0]) - longint'(e[62:0]);
      if (q[63] != e[63] || d > 1 || d < -1) begin
        failures++;
        $display("FAIL %h / %h: got %h expected %h", x, y, q, e);
      end
      if (d == 0) cnt_exact++; else cnt_ulp++;
    end
    if (normal_ops) begin
      checks++;
      if (u_dut.u_pow.steps != 8'd3) begin
        failures++;
        $display("FAIL %h / %h: %0d powering steps, expected 3", x, y, u_dut.u_pow.steps);
      end
      cnt_seg[seg_of(y)]++;
      if ({1'b1, x[51:0]} < {1'b1, y[51:0]}) cnt_norm++;
      if (u_dut.rnd) cnt_round++;
      if (e[62:52] == 11'h7FF) cnt_ovf++;
      if (e[62:0] == 0) cnt_unf++;
    end else begin
      if (e[62:52] == 11'h7FF && e[51:0] != 0) cnt_nan++;
      else if (e[62:52] == 11'h7FF) cnt_inf++;
      else cnt_zero++;
    end
  endtask

  function automatic logic [63:0] rnd_normal(int emin, int emax);
    logic [63:0] r;
    r[63]    = 1'($urandom);
    r[62:52] = 11'(emin + int'($urandom % 32'(emax - emin + 1)));
    r[51:0]  = {20'($urandom), $urandom};
    return r;
  endfunction

  initial begin
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // exact and well-known quotients
    divide($realtobits(6.0),  $realtobits(3.0));
    divide($realtobits(1.0),  $realtobits(3.0));
    divide($realtobits(-7.5), $realtobits(2.5));
    divide($realtobits(1.0),  $realtobits(1.0));
    divide($realtobits(3.0),  $realtobits(1.9999999));
    divide(64'h3FFF_FFFF_FFFF_FFFF, 64'h3FF0_0000_0000_0001);
    // one operand per segment, and the segment edges
    for (int k = 0; k < 8; k++) begin
      real bs [9] = '{1.0, 1.09811, 1.20835, 1.3269, 1.45709, 1.59866, 1.75616, 1.92922, 1.99999};
      divide($realtobits(1.0), $realtobits(bs[k]));
      divide($realtobits(1.7), $realtobits(bs[k] + 0.00001));
    end
    // specials
    divide(64'h7FF8_0000_0000_0001, $realtobits(1.0));
    divide($realtobits(0.0), $realtobits(0.0));
    divide(64'h7FF0_0000_0000_0000, 64'h7FF0_0000_0000_0000);
    divide(64'h7FF0_0000_0000_0000, $realtobits(2.0));
    divide($realtobits(2.0), $realtobits(0.0));
    divide($realtobits(-2.0), 64'h7FF0_0000_0000_0000);
    divide($realtobits(0.0), $realtobits(-3.0));
    // overflow and underflow
    divide(64'h7FE0_0000_0000_0000, $realtobits(0.25));
    divide(64'h0010_0000_0000_0000, $realtobits(4.0));
    // random normal operands
    for (int i = 0; i < 300; i++) divide(rnd_normal(900, 1150), rnd_normal(900, 1150));
    for (int i = 0; i < 20; i++)  divide(rnd_normal(1, 2046), rnd_normal(1, 2046));

    for (int k = 0; k < 8; k++) begin
      checks++;
      if (cnt_seg[k] == 0) begin failures++; $display("FAIL segment %0d never used", k); end
    end
    checks += 7;
    if (cnt_norm == 0)  begin failures++; $display("FAIL no normalisation shift"); end
    if (cnt_round == 0) begin failures++; $display("FAIL no rounding up"); end
    if (cnt_ovf == 0)   begin failures++; $display("FAIL no overflow"); end
    if (cnt_unf == 0)   begin failures++; $display("FAIL no underflow"); end
    if (cnt_nan == 0)   begin failures++; $display("FAIL no NaN case"); end
    if (cnt_inf == 0)   begin failures++; $display("FAIL no infinity case"); end
    if (cnt_zero == 0)  begin failures++; $display("FAIL no zero case"); end
    $display("segments %0d %0d %0d %0d %0d %0d %0d %0d; normalise %0d round-up %0d overflow %0d underflow %0d nan %0d inf %0d zero %0d; max latency %0d clocks",
             cnt_seg[0], cnt_seg[1], cnt_seg[2], cnt_seg[3], cnt_seg[4], cnt_seg[5], cnt_seg[6], cnt_seg[7],
             cnt_norm, cnt_round, cnt_ovf, cnt_unf, cnt_nan, cnt_inf, cnt_zero, max_lat);
    $display("normal quotients: %0d correctly rounded, %0d one unit off", cnt_exact, cnt_ulp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
