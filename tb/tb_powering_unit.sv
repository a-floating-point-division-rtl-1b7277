// tb_powering_unit: checks the sequence of step sums of the powering unit
// against powers computed here with plain 128-bit multiplication and the same
// truncation (keep the upper 64 bits of each product). Instance 1 uses the
// default five terms (three steps: m+m^2, m^3+m^4, m^5); instance 2 uses
// twelve terms (six steps, the paper's flow diagram). Both also check the
// number of steps, i.e. two powers per step, and that the squarer takes
// cached leading-one chains for m^8 and m^12 in the twelve-term runs (and
// never in the five-term runs).
module tb_powering_unit;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        s5 = 1'b0, b5, tv5, d5, s12 = 1'b0, b12, tv12, d12;
  logic [63:0] x, t5, t12;
  logic [7:0]  st5, st12;
  logic [15:0] ru5, ru12;
  int          reuse_runs = 0;

  powering_unit #(.W(64)) u_p5 (.clk, .rst_n, .start(s5), .x, .busy(b5),
    .term_valid(tv5), .term(t5), .done(d5), .steps(st5), .reused(ru5));
  powering_unit #(.W(64), .N_TERMS(12)) u_p12 (.clk, .rst_n, .start(s12), .x,
    .busy(b12), .term_valid(tv12), .term(t12), .done(d12), .steps(st12), .reused(ru12));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] fmul(logic [63:0] u, logic [63:0] v);
    logic [127:0] w;
    w = 128'(u) * 128'(v);
    return w[127:64];
  endfunction

  task automatic run(input logic [63:0] v, input int n);
    logic [63:0] pw [1:12];
    logic [63:0] e;
    int          got;
    pw[1] = v;
    for (int i = 2; i <= n; i++)
      pw[i] = (i % 2 == 0) ? fmul(pw[i/2], pw[i/2]) : fmul(v, pw[i-1]);
    @(negedge clk); x = v;
    if (n == 5) s5 = 1'b1; else s12 = 1'b1;
    @(negedge clk); s5 = 1'b0; s12 = 1'b0;
    got = 0;
    forever begin
      if ((n == 5) ? tv5 : tv12) begin
        got++;
        e = pw[2*got-1] + ((2*got <= n) ? pw[2*got] : 64'd0);
        checks++;
        if (((n == 5) ? t5 : t12) != e) begin
          failures++;
          $display("FAIL n=%0d x=%h step %0d: %h expected %h", n, v, got, (n == 5) ? t5 : t12, e);
        end
        if ((n == 5) ? d5 : d12) break;
      end
      @(negedge clk);
    end
    @(negedge clk);
    checks++;
    if (n == 5 && ru5 != 0) begin failures++; $display("FAIL cached chains used with five terms"); end
    if (n == 12 && ru12 != 0) reuse_runs++;
    checks++;
    if (got != (n + 1) / 2 || int'((n == 5) ? st5 : st12) != got) begin
      failures++; $display("FAIL n=%0d: %0d steps, expected %0d", n, got, (n + 1) / 2);
    end
  endtask

  initial begin
    x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(0, 5); run(64'h0080_0000_0000_0000, 5); run('1, 5); run('1, 12);
    for (int i = 0; i < 60; i++) run({$urandom, $urandom} >> (8 + $urandom % 8), 5);
    for (int i = 0; i < 30; i++) run({$urandom, $urandom}, 12);
    for (int i = 0; i < 30; i++) run({$urandom, $urandom} >> (8 + $urandom % 8), 12);
    checks++;
    if (reuse_runs == 0) begin failures++; $display("FAIL cached chains never reused with twelve terms"); end
    $display("twelve-term runs that reused cached chains: %0d", reuse_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
