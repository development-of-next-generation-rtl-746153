// tb_phase_accumulator: checks that the phase advances by the frequency word
// every clock, including wrap-around and a frequency change.
module tb_phase_accumulator;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  freq_t freq;
  phase_t phase, model;
  int checks = 0, failures = 0;
  phase_accumulator dut (.clk, .rst_n, .freq, .phase);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    freq = 32'd29826162; model = '0;
    repeat (2) @(posedge clk);
    #1 checks++; if (phase != 0) failures++;
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(posedge clk); #1;
      model = model + freq;
      checks++;
      if (phase != model) begin
        failures++;
        if (failures < 5) $display("n=%0d phase %h exp %h", n, phase, model);
      end
      if (n % 500 == 499) freq = $urandom;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
