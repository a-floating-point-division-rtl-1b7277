// tb_accumulator: loads y0, adds a random number of terms and finishes; the
// reciprocal must equal y0 + floor(y0 * S / 2^64), S the sum of the terms,
// computed here with 128-bit multiplication. A second load must clear S.
module tb_accumulator;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        load = 1'b0, add = 1'b0, finish = 1'b0, busy, rv;
  logic [63:0] y0, term, sum;
  logic [64:0] recip;

  accumulator #(.F(64)) u_dut (.clk, .rst_n, .load, .y0, .add, .term, .finish,
    .busy, .sum, .recip_valid(rv), .recip);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0]  yv, s;
    logic [127:0] pr;
    y0 = '0; term = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      int n;
      yv = {1'b1, 31'($urandom), $urandom};
      if (t == 0) yv = '0;
      @(negedge clk); load = 1'b1; y0 = yv;
      @(negedge clk); load = 1'b0;
      s = '0;
      n = int'($urandom % 4);
      for (int i = 0; i < n; i++) begin
        term = {$urandom, $urandom} >> (8 + $urandom % 40);
        s = s + term;
        add = 1'b1; @(negedge clk); add = 1'b0;
      end
      finish = 1'b1; @(negedge clk); finish = 1'b0;
      while (!rv) @(negedge clk);
      pr = 128'(yv) * 128'(s);
      checks += 2;
      if (sum != s) begin failures++; $display("FAIL sum %h expected %h", sum, s); end
      if (recip != 65'(yv) + 65'(pr[127:64])) begin
        failures++; $display("FAIL recip %h expected %h", recip, 65'(yv) + 65'(pr[127:64]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
