// tb_clk_strobe_gen: checks the default 144-clock (1 MHz) periods of both
// strobes and independent divisor changes.
module tb_clk_strobe_gen;
  logic clk = 0, rst_n = 0;
  logic [15:0] cdiv, pdiv;
  logic cs, ps;
  int checks = 0, failures = 0;
  int cyc = 0, lc = -1, lp = -1;
  int exp_c, exp_p;
  int nc = 0, np = 0;
  clk_strobe_gen dut (.clk, .rst_n, .ctrl_div(cdiv), .patn_div(pdiv), .ctrl_stb(cs), .patn_stb(ps));
  always #5 clk = ~clk;
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cs) begin
      if (lc >= 0 && exp_c > 0) begin checks++; if (cyc - lc != exp_c) begin failures++; $display("ctrl period %0d exp %0d", cyc - lc, exp_c); end end
      lc <= cyc; nc++;
    end
    if (ps) begin
      if (lp >= 0 && exp_p > 0) begin checks++; if (cyc - lp != exp_p) begin failures++; $display("patn period %0d exp %0d", cyc - lp, exp_p); end end
      lp <= cyc; np++;
    end
  end
  initial begin
    cdiv = 144; pdiv = 144; exp_c = 144; exp_p = 144;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (144 * 20) @(posedge clk);
    @(posedge ps); exp_c = 0; exp_p = 0; cdiv = 100; pdiv = 288;
    repeat (600) @(posedge clk);
    exp_c = 100; exp_p = 288;
    repeat (3000) @(posedge clk);
    checks++;
    if (nc < 40 || np < 25) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
