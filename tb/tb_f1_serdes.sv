// tb_f1_serdes: sends random revolution frequency words through the serializer
// and deserializer, once per 1 MHz control period, and checks value and
// latency (33 clocks from the start bit, 35 from the load strobe).
module tb_f1_serdes;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, ser, fv;
  freq_t f1_in, f1_out;
  int checks = 0, failures = 0;
  int cyc = 0, load_cyc = 0;
  f1_serializer   u_s (.clk, .rst_n, .load, .f1(f1_in), .ser);
  f1_deserializer u_d (.clk, .rst_n, .ser, .f1(f1_out), .f1_valid(fv));
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    f1_in = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      freq_t w;
      @(negedge clk);
      w = $urandom; f1_in = w; load = 1; load_cyc = cyc;
      @(negedge clk); load = 0; f1_in = $urandom;   // change after capture
      @(posedge fv); #1;
      checks++;
      if (f1_out != w) begin failures++; $display("got %h exp %h", f1_out, w); end
      checks++;
      if (cyc - load_cyc != 35) begin failures++; $display("latency %0d", cyc - load_cyc); end
      repeat (100) @(posedge clk);
      checks++;
      if (f1_out != w) failures++;   // holds between frames
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
