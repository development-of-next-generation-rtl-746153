// tb_vector_sum: random cavity vectors and cavity counts against a reference
// sum/normalize, plus the cases of the paper's test: 20000 normalized by 1 and
// by 2 (giving 10000) with only one cavity non-zero; two clocks of latency.
module tb_vector_sum;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, iv = 0, ov;
  iq_t cav [12][8];
  iq_t vs [8];
  logic [3:0] ncav;
  int checks = 0, failures = 0;
  vector_sum #(.NCAV(12), .NHARM(8)) dut (.clk, .rst_n, .in_valid(iv), .cav_iq(cav), .ncav, .vsum(vs), .out_valid(ov));
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic one(input int n, input bit single);
    int si [8], sq [8];
    for (int h = 0; h < 8; h++) begin si[h] = 0; sq[h] = 0; end
    @(negedge clk);
    ncav = 4'(n);
    for (int c = 0; c < 12; c++) for (int h = 0; h < 8; h++) begin
      if (single) begin
        cav[c][h].i = (c == 0) ? 16'sd20000 : 16'sd0; cav[c][h].q = 0;
      end else begin
        cav[c][h].i = 16'($urandom); cav[c][h].q = 16'($urandom);
      end
      si[h] += int'(cav[c][h].i); sq[h] += int'(cav[c][h].q);
    end
    iv = 1; @(negedge clk); iv = 0;
    for (int c = 0; c < 12; c++) for (int h = 0; h < 8; h++) cav[c][h] = '0;  // only sampled at in_valid
    @(posedge clk); #1;
    checks++; if (!ov) failures++;
    for (int h = 0; h < 8; h++) begin
      real ei, eq;
      int d;
      d = (n == 0) ? 1 : n;
      ei = $itor(si[h]) / d; eq = $itor(sq[h]) / d;
      if (ei > 32767) ei = 32767; if (ei < -32768) ei = -32768;
      if (eq > 32767) eq = 32767; if (eq < -32768) eq = -32768;
      checks++;
      if (fabs($itor(vs[h].i) - ei) > 1.01 || fabs($itor(vs[h].q) - eq) > 1.01) begin
        failures++;
        if (failures < 10) $display("n=%0d h=%0d got (%0d,%0d) exp (%f,%f)", n, h, int'(vs[h].i), int'(vs[h].q), ei, eq);
      end
    end
  endtask
  initial begin
    ncav = 12;
    for (int c = 0; c < 12; c++) for (int h = 0; h < 8; h++) cav[c][h] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    one(1, 1);
    checks++; if (vs[0].i != 20000) failures++;
    one(2, 1);
    checks++; if (vs[0].i != 10000) failures++;
    for (int k = 0; k < 300; k++) one($urandom_range(0, 15), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
