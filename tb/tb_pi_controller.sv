// tb_pi_controller: compares the PI controller with a reference model for
// random setpoints, measurements and gains, including integrator clamping and
// output saturation, and checks the one-clock latency.
module tb_pi_controller;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  sample_t sp, meas, out;
  logic signed [15:0] kp, ki;
  logic ov;
  int checks = 0, failures = 0;
  pi_controller dut (.clk, .rst_n, .in_valid, .setpoint(sp), .measured(meas), .kp, .ki, .out, .out_valid(ov));
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  longint integ = 0;
  longint imax = 64'sd32767 * 4096, imin = -64'sd32768 * 4096;
  initial begin
    sp = 0; meas = 0; kp = 0; ki = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      longint e, s, expv;
      @(negedge clk);
      if (n % 200 == 0) begin
        kp = 16'($urandom_range(0, 8192)); ki = 16'($urandom_range(0, 2048));
        if (n % 400 == 0) ki = 16'(-$signed(16'(ki)));
      end
      sp = 16'($urandom); meas = 16'($urandom_range(0, 2000)) - 16'sd1000 + sp / 2;
      in_valid = ($urandom_range(0, 3) == 0);
      e = longint'(sp) - longint'(meas);
      @(posedge clk); #1;
      if (in_valid) begin
        integ = integ + e * longint'(ki);
        if (integ > imax) integ = imax;
        if (integ < imin) integ = imin;
        s = (e * longint'(kp) + integ) >>> 12;
        expv = s > 32767 ? 32767 : (s < -32768 ? -32768 : s);
        checks++;
        if (!ov || longint'(out) != expv) begin
          failures++;
          if (failures < 10) $display("n=%0d out %0d exp %0d ov %b", n, out, expv, ov);
        end
      end else begin
        checks++;
        if (ov) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
