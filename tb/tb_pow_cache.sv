// tb_pow_cache: writes random chains into the cache and reads them back,
// checking the data, the stored length, the last-entry flag, reads past the
// end (zero) and clearing.
module tb_pow_cache;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        clear = 1'b0, we = 1'b0, rlast;
  logic [7:0]  waddr, raddr, len;
  logic [5:0]  wk, rk;
  logic [63:0] wres, rres;
  logic [5:0]  ref_k   [64];
  logic [63:0] ref_res [64];

  pow_cache #(.W(64), .DEPTH(64)) u_dut (.clk, .rst_n, .clear, .we, .waddr,
    .wdata_k(wk), .wdata_res(wres), .raddr, .rdata_k(rk), .rdata_res(rres),
    .rlast, .len);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = '0; raddr = '0; wk = '0; wres = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      int n;
      n = 1 + int'($urandom % 64);
      @(negedge clk); clear = 1'b1;
      @(negedge clk); clear = 1'b0;
      checks++;
      if (len != 0) begin failures++; $display("FAIL len %0d after clear", len); end
      for (int i = 0; i < n; i++) begin
        ref_k[i] = 6'($urandom); ref_res[i] = {$urandom, $urandom};
        waddr = 8'(i); wk = ref_k[i]; wres = ref_res[i]; we = 1'b1;
        @(negedge clk);
      end
      we = 1'b0;
      checks++;
      if (int'(len) != n) begin failures++; $display("FAIL len %0d expected %0d", len, n); end
      for (int i = 0; i < n + 2 && i < 64; i++) begin
        raddr = 8'(i); #1;
        checks++;
        if (i < n) begin
          if (rk != ref_k[i] || rres != ref_res[i] || rlast != (i == n - 1)) begin
            failures++; $display("FAIL entry %0d", i);
          end
        end else if (rk != 0 || rres != 0 || !rlast) begin
          failures++; $display("FAIL read past end %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
