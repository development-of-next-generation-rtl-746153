// tb_iq_rotator: reproduces the rotation cases of the vector sum test
// ((20000,0) by 0, +90 and -45 degrees) plus random vectors, angles and gains
// against a real-valued reference.
module tb_iq_rotator;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] angle;
  gain_t gain;
  iq_t in, out;
  int checks = 0, failures = 0;
  iq_rotator dut (.clk, .rst_n, .angle, .gain, .in, .out);
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic run(input logic [15:0] a, input gain_t g, input int i, input int q, input int tol);
    real th, ei, eq, gg;
    angle = a; gain = g; in.i = 16'(i); in.q = 16'(q);
    repeat (25) @(posedge clk);
    #1;
    th = $itor($signed(a)) / 32768.0 * 3.14159265358979;
    gg = $itor(g) / 16384.0;
    ei = gg * (i * $cos(th) - q * $sin(th));
    eq = gg * (i * $sin(th) + q * $cos(th));
    if (ei > 32767) ei = 32767; if (ei < -32768) ei = -32768;
    if (eq > 32767) eq = 32767; if (eq < -32768) eq = -32768;
    checks++;
    if (fabs($itor(out.i) - ei) > tol || fabs($itor(out.q) - eq) > tol) begin
      failures++;
      $display("a=%0d g=%0d in=(%0d,%0d) out=(%0d,%0d) exp=(%f,%f)", a, g, i, q, out.i, out.q, ei, eq);
    end
  endtask
  initial begin
    angle = 0; gain = 16384; in = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(16'd0, 16384, 20000, 0, 1);
    run(16'd16384, 16384, 20000, 0, 1);        // +90 degrees -> (0, 20000)
    run(-16'sd8192, 16384, 20000, 0, 2);       // -45 degrees -> (14142, -14142)
    run(16'd0, 8192, 20000, 0, 1);             // gain 0.5
    for (int n = 0; n < 200; n++)
      run(16'($urandom), 16'($urandom_range(0, 32767)), $urandom_range(0, 40000) - 20000,
          $urandom_range(0, 40000) - 20000, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
