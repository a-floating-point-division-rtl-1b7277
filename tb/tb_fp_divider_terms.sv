// tb_fp_divider_terms: runs the divider with twelve Taylor terms, the full
// power schedule of the paper's flow diagram (six powering steps, with the
// squarer reusing the cached leading-one chains of m^4 and m^6 for m^8 and
// m^12). Quotients of random normal operands are compared with the
// simulator's IEEE-754 division (within one unit in the last place, and the
// number of correctly rounded ones is reported); every division must take six
// steps, and chain reuse must occur.
module tb_fp_divider_terms;
  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [63:0] a, b, q;
  logic        busy, done;
  int          checks = 0, failures = 0, exact = 0, reuse = 0, total = 0;

  fp_divider #(.N_TERMS(12)) u_dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .q);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; b = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      logic [63:0] e;
      longint      d;
      a = {1'($urandom), 11'(1000 + $urandom % 40), 20'($urandom), $urandom};
      b = {1'($urandom), 11'(1000 + $urandom % 40), 20'($urandom), $urandom};
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      while (!done) @(negedge clk);
      e = $realtobits($bitstoreal(a) / $bitstoreal(b));
      d = longint'(q[62:0]) - longint'(e[62:0]);
      total++;
      checks += 2;
      if (q[63] != e[63] || d > 1 || d < -1) begin
        failures++; $display("FAIL %h / %h: got %h expected %h", a, b, q, e);
      end
      if (d == 0) exact++;
      if (u_dut.u_pow.steps != 8'd6) begin
        failures++; $display("FAIL %0d steps, expected 6", u_dut.u_pow.steps);
      end
      if (u_dut.u_pow.reused != 0) reuse++;
    end
    checks++;
    if (reuse == 0) begin failures++; $display("FAIL cached chains never reused"); end
    $display("twelve terms: %0d of %0d quotients correctly rounded, chain reuse in %0d", exact, total, reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
