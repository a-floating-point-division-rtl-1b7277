// tb_recip_precision: measures how many correct bits the reciprocal datapath
// (piecewise-linear start, powering unit, accumulator) delivers, for 3, 5 and
// 7 Taylor terms, on random significands and on the segment edges where the
// initial error is largest. The error of r ~ 1/x is taken exactly in integers
// as 1 - x*r. With the eight segments derived for five terms the design
// target is 53 bits; the test requires at least 52.5 bits for five terms and
// at least 60 bits for seven, and that three terms are clearly worse
// (the segments were sized for five). It prints the worst case of each.
module tb_recip_precision;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NT [3] = '{3, 5, 7};

  logic [52:0] x;
  logic [2:0]  seg;
  logic [63:0] y0, m;
  pla_unit u_pla (.x, .seg, .y0, .m);

  logic        go = 1'b0;
  logic [64:0] recip [3];
  logic        rv [3];

  for (genvar g = 0; g < 3; g++) begin : g_chain
    logic        tv, pdone, pbusy, abusy;
    logic [63:0] term, sum;
    logic [7:0]  steps;
    powering_unit #(.W(64), .N_TERMS(NT[g])) u_pow (.clk, .rst_n, .start(go), .x(m),
      .busy(pbusy), .term_valid(tv), .term(term), .done(pdone), .steps(steps));
    accumulator #(.F(64)) u_acc (.clk, .rst_n, .load(go), .y0(y0), .add(tv), .term(term),
      .finish(pdone), .busy(abusy), .sum(sum), .recip_valid(rv[g]), .recip(recip[g]));
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real worst [3] = '{200.0, 200.0, 200.0};

  task automatic run(input logic [52:0] v);
    logic        got [3];
    logic [117:0] prod, err;
    real bits;
    @(negedge clk); x = v; go = 1'b1;
    @(negedge clk); go = 1'b0;
    got = '{0, 0, 0};
    while (!(got[0] && got[1] && got[2])) begin
      for (int g = 0; g < 3; g++) if (rv[g]) begin
        got[g] = 1'b1;
        prod = 118'(v) * 118'(recip[g]);                 // scale 2^116
        err  = (prod > (118'(1) << 116)) ? prod - (118'(1) << 116) : (118'(1) << 116) - prod;
        bits = (err == 0) ? 200.0 : 116.0 - $ln(real'(err)) / $ln(2.0);
        if (bits < worst[g]) worst[g] = bits;
      end
      @(negedge clk);
    end
  endtask

  initial begin
    real edges [8] = '{1.0, 1.09811, 1.20835, 1.3269, 1.45709, 1.59866, 1.75616, 1.92922};
    x = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++) begin
      logic [52:0] e;
      e = 53'($rtoi(edges[k] * 1048576.0)) << 32;
      run(e); if (k > 0) run(e - 1);
    end
    run(53'h1F_FFFF_FFFF_FFFF);
    for (int i = 0; i < 200; i++) run({1'b1, 20'($urandom), $urandom});
    $display("worst-case correct bits: 3 terms %f, 5 terms %f, 7 terms %f", worst[0], worst[1], worst[2]);
    checks += 3;
    if (worst[1] < 52.5) begin failures++; $display("FAIL five terms below 52.5 bits"); end
    if (worst[2] < 60.0) begin failures++; $display("FAIL seven terms below 60 bits"); end
    if (worst[0] > 45.0) begin failures++; $display("FAIL three terms unexpectedly precise"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
