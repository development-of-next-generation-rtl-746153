// tb_freq_lut: writes the table and reads it back through frequency words,
// checking the address slice [27:18], saturation above 9 MHz and the one-clock
// read latency.
module tb_freq_lut;
  import llrf_pkg::*;
  logic clk = 0;
  logic wr_en = 0;
  logic [9:0] wr_addr;
  logic [15:0] wr_data, rd;
  freq_t freq;
  int checks = 0, failures = 0;
  logic [15:0] model [1024];
  freq_lut dut (.clk, .wr_en, .wr_addr, .wr_data, .freq, .rd_data(rd));
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    freq = '0;
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); wr_en = 1; wr_addr = 10'(a); wr_data = 16'($urandom); model[a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      int exp_a;
      @(negedge clk);
      freq = (n % 10 == 0) ? $urandom : ($urandom & 32'h0fff_ffff);
      exp_a = (freq >= 32'h1000_0000) ? 1023 : int'(freq[27:18]);
      @(posedge clk); #1;
      checks++;
      if (rd !== model[exp_a]) begin
        failures++;
        if (failures < 10) $display("freq %h rd %h exp %h", freq, rd, model[exp_a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
