// tb_pla_unit: checks the piecewise-linear approximation on random
// significands and on the Table I segment edges. The segment must match a
// comparison with the Table I boundaries in floating point; y0 must lie within
// 2^-50 of the tangent formula 4/(a+b) - 4x/(a+b)^2 and not above 1/x; m must
// equal 1 - x*y0 (exact integer arithmetic, truncated to 64 fraction bits) and
// stay below 2^-8.6, the bound that makes five Taylor terms enough.
module tb_pla_unit;
  logic [52:0] x;
  logic [2:0]  seg;
  logic [63:0] y0, m;
  int checks = 0, failures = 0;
  real edges [9] = '{1.0, 1.09811, 1.20835, 1.3269, 1.45709, 1.59866, 1.75616, 1.92922, 2.12392};
  real max_m = 0.0;

  pla_unit u_dut (.x, .seg, .y0, .m);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [52:0] v);
    real xr, s, yr, y0r, mr;
    int  es;
    logic [116:0] xy, em;
    x = v; #1;
    xr = real'(v) / 4503599627370496.0;         // 2^52
    es = 0;
    for (int k = 1; k < 8; k++) if (xr >= edges[k]) es = k;
    s   = edges[es] + edges[es+1];
    yr  = 4.0 / s - 4.0 * xr / (s * s);
    y0r = real'(y0) / 18446744073709551616.0;  // 2^64
    xy  = 117'(v) * 117'(y0);
    em  = ((117'(1) << 116) - xy) >> 52;
    mr  = real'(m) / 18446744073709551616.0;
    if (mr > max_m) max_m = mr;
    checks++;
    if (int'(seg) != es || (y0r - yr) > 1.0e-15 || (yr - y0r) > 1.0e-15 ||
        xy > (117'(1) << 116) || em != 117'(m) || mr > 0.00258) begin
      failures++;
      $display("FAIL x=%h seg=%0d (exp %0d) y0=%h (%f vs %f) m=%h", v, seg, es, y0, y0r, yr, m);
    end
  endtask

  initial begin
    check(53'h10_0000_0000_0000);
    check(53'h1F_FFFF_FFFF_FFFF);
    for (int k = 1; k < 8; k++) begin
      logic [52:0] e;
      e = 53'($rtoi(edges[k] * 1048576.0)) << 32;
      check(e); check(e - 1); check(e + 1);
    end
    for (int i = 0; i < 2000; i++) check({1'b1, 20'($urandom), $urandom});
    $display("largest m seen: %e", max_m);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
