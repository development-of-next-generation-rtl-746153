// tb_sat_sum: random inputs, with and without overflow, against a saturating
// reference sum; one clock of latency.
module tb_sat_sum;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t in [8];
  sample_t out;
  int checks = 0, failures = 0;
  sat_sum #(.N(8)) dut (.clk, .rst_n, .in, .out);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < 8; k++) in[k] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int s, e;
      @(negedge clk);
      s = 0;
      for (int k = 0; k < 8; k++) begin
        in[k] = (n % 2) ? 16'($urandom) : 16'($urandom_range(0, 8000)) - 16'sd4000;
        s += int'(in[k]);
      end
      e = s > 32767 ? 32767 : (s < -32768 ? -32768 : s);
      @(posedge clk); #1;
      checks++;
      if (int'(out) != e) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
