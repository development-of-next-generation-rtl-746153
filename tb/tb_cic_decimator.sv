// tb_cic_decimator: checks unity DC gain, rejection of tones at multiples of
// 1 MHz (the CIC's zeros for R = 144), and out_valid 2 clocks after the
// decimation strobe.
module tb_cic_decimator;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic signed [17:0] din;
  logic dec_stb;
  sample_t dout;
  logic dv;
  int checks = 0, failures = 0;
  int cnt = 0;
  int last_stb = -100;
  int cyc = 0;
  cic_decimator #(.IN_W(18), .R(144), .N(3)) dut (.clk, .rst_n, .in_data(din), .dec_stb, .out_data(dout), .out_valid(dv));
  always #5 clk = ~clk;
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dec_stb) last_stb <= cyc;
    if (dv) begin
      checks++;
      if (cyc > 5 && cyc - last_stb != 2) begin failures++; $display("valid latency %0d", cyc - last_stb); end
    end
  end
  // strobe every 144 clocks
  always @(posedge clk) begin
    if (!rst_n) cnt <= 0; else cnt <= (cnt == 143) ? 0 : cnt + 1;
  end
  assign dec_stb = rst_n && cnt == 143;

  task automatic settle_and_check(input int expv, input int tol, input string what);
    repeat (6) @(posedge dv);
    @(negedge clk);
    checks++;
    if ((int'(dout) - expv > tol) || (expv - int'(dout) > tol)) begin
      failures++; $display("%s: got %0d exp %0d", what, dout, expv);
    end
  endtask

  real ph;
  int mode = 0;   // 0 const, 1 tone + const
  int dc = 0;
  int amp = 0;
  real fr = 0.0;
  always @(posedge clk) begin
    ph = ph + 2.0 * 3.14159265358979 * fr / 144.0;
    din <= 18'(dc + $rtoi(amp * $cos(ph)));
  end
  initial begin
    ph = 0.0; din = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    dc = 12345; settle_and_check(12345, 1, "dc");
    dc = -20000; settle_and_check(-20000, 1, "dc neg");
    dc = 5000; amp = 60000; fr = 2.0; settle_and_check(5000, 2, "2 MHz tone");
    fr = 7.0; settle_and_check(5000, 2, "7 MHz tone");
    fr = 16.0; settle_and_check(5000, 2, "16 MHz tone");
    dc = 0; amp = 40000; fr = 0.0; settle_and_check(40000 > 32767 ? 32767 : 40000, 1, "saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
