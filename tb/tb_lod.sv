// tb_lod: checks the leading-one detector on random operands of every
// density, on single-bit operands and on zero. Expected k and N - 2^k are
// found by a bit scan in the testbench.
module tb_lod;
  localparam int W = 64;
  logic [W-1:0] n, pow2k, residue;
  logic [5:0]   k;
  logic         zero;
  int checks = 0, failures = 0;

  lod #(.W(W)) u_dut (.n, .k, .pow2k, .residue, .zero);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [W-1:0] v);
    int ek;
    ek = -1;
    for (int i = W - 1; i >= 0; i--) if (v[i] && ek < 0) ek = i;
    n = v;
    #1;
    checks++;
    if (ek < 0) begin
      if (!zero || residue != 0) begin
        failures++; $display("FAIL zero operand: zero=%b residue=%h", zero, residue);
      end
    end else if (zero || int'(k) != ek || residue != (v & ~(64'd1 << ek)) || pow2k != (64'd1 << ek)) begin
      failures++;
      $display("FAIL n=%h: k=%0d (exp %0d) residue=%h", v, k, ek, residue);
    end
  endtask

  initial begin
    check('0);
    for (int i = 0; i < W; i++) check(64'd1 << i);
    for (int i = 0; i < 500; i++) check({$urandom, $urandom} >> ($urandom % 64));
    check('1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
