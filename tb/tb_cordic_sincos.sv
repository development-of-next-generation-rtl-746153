// tb_cordic_sincos: checks the CORDIC against real-valued cos/sin for random
// and corner phases, and checks its latency of ITER+2 = 18 clocks.
module tb_cordic_sincos;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  import llrf_pkg::*;
  localparam int LAT = 17;  // register stages after the sampling edge
  logic clk = 0, rst_n = 0;
  phase_t phase;
  sample_t c, s;
  int checks = 0, failures = 0;
  cordic_sincos dut (.clk, .rst_n, .phase, .cos_o(c), .sin_o(s));
  always #5 clk = ~clk;

  phase_t hist [$];
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    phase = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000 + LAT; n++) begin
      @(negedge clk);
      if (n < 8) phase = 32'(n) << 29;          // multiples of 45 degrees
      else       phase = $urandom;
      hist.push_back(phase);
      if (hist.size() > LAT) begin
        phase_t p;
        real a, ec, es;
        p = hist.pop_front();
        @(posedge clk); #1;
        a  = $itor($signed(p)) / 2147483648.0 * 3.14159265358979;
        ec = 32767.0 * $cos(a);
        es = 32767.0 * $sin(a);
        checks++;
        if (fabs($itor(c) - ec) > 4.0 || fabs($itor(s) - es) > 4.0) begin
          failures++;
          if (failures < 10) $display("phase %h: got %0d %0d exp %f %f", p, c, s, ec, es);
        end
      end else @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
