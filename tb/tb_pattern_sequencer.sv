// tb_pattern_sequencer: checks that nothing moves before the first trigger,
// restart at the 25 Hz trigger, one step per
// pattern strobe and holding at the last address.
module tb_pattern_sequencer;
  localparam int D = 20;
  logic clk = 0, rst_n = 0, trig = 0, stb = 0;
  logic [4:0] addr;
  int model = 0;
  bit running = 0;
  int checks = 0, failures = 0;
  pattern_sequencer #(.DEPTH(D)) dut (.clk, .rst_n, .trig_25hz(trig), .patn_stb(stb), .addr);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      trig = ($urandom_range(0, 99) == 0);
      stb  = ($urandom_range(0, 2) == 0);
      @(posedge clk); #1;
      if (trig) begin model = 0; running = 1; end
      else if (running && stb && model != D - 1) model++;
      checks++;
      if (int'(addr) != model) begin
        failures++;
        if (failures < 10) $display("n=%0d addr %0d exp %0d", n, addr, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
