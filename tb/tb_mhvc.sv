// tb_mhvc: the sawtooth test. Eight harmonics of f1 = 1 MHz are regulated in a
// loop (rf output fed back to the ADC 3 clocks later) to the I/Q setpoints
// (0, 3000*(-1)^(h+1)/h), the Fourier series of a sawtooth with h=1 set to
// (0, 3000). Checks every harmonic's measured I/Q against its setpoint and the
// ADC waveform, clock by clock, against the calculated series.
module tb_mhvc;
  import llrf_pkg::*;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  localparam logic [31:0] F1 = 32'd29826162;
  localparam real PI = 3.14159265358979;
  localparam int K = 3;
  logic clk = 0, rst_n = 0;
  sample_t adc, rf;
  phase_t ph;
  logic ctrl_stb;
  logic [15:0] pa;
  logic cfg_we = 0;
  logic [2:0] cfg_harm;
  logic [3:0] cfg_item;
  logic [15:0] cfg_idx;
  logic [31:0] cfg_data;
  iq_t iqm [8], iqr [8];
  logic iqv;
  int checks = 0, failures = 0;
  int cnt = 0;
  int spq [8];

  mhvc dut (.clk, .rst_n, .adc, .phase_h1(ph), .freq_h1(F1), .ctrl_stb, .pat_addr(pa),
            .cfg_we, .cfg_harm, .cfg_item, .cfg_idx, .cfg_data,
            .rf_out(rf), .iq_meas(iqm), .iq_rot(iqr), .iq_valid(iqv));

  always #5 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  sample_t rf_hist [8];
  always @(posedge clk) begin
    if (!rst_n) begin ph <= '0; cnt <= 0; end
    else begin
      ph  <= ph + F1;
      cnt <= (cnt == 143) ? 0 : cnt + 1;
    end
    for (int k = 7; k > 0; k--) rf_hist[k] <= rf_hist[k-1];
    rf_hist[0] <= rf;
  end
  assign ctrl_stb = rst_n && cnt == 143;
  assign adc = rf_hist[K-1];

  task automatic wr(input int h, input logic [3:0] item, input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_harm = 3'(h); cfg_item = item; cfg_idx = 16'(idx); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    pa = 0;
    for (int k = 0; k < 8; k++) rf_hist[k] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int h = 1; h <= 8; h++) begin
      logic [31:0] fh;
      fh = F1 * 32'(h);
      spq[h-1] = $rtoi($floor(3000.0 / h + 0.5)) * ((h % 2) ? 1 : -1);
      wr(h - 1, ITEM_GAIN_LUT, int'(fh[27:18]), GAIN_ONE);
      // loop delay: 24 clocks in the block, 1 in the sum, K on the line
      wr(h - 1, ITEM_PH_LUT, int'(fh[27:18]), 32'((longint'(fh) * (25 + K) + 32768) >> 16));
      wr(h - 1, ITEM_GAIN_PAT, 0, GAIN_ONE);
      wr(h - 1, ITEM_IQ_PAT, 0, {16'sd0, 16'(spq[h-1])});
      wr(h - 1, ITEM_REG, REG_KP, 400);
      wr(h - 1, ITEM_REG, REG_KI, 600);
    end
    repeat (150) @(posedge iqv);
    #1;
    for (int h = 0; h < 8; h++) begin
      int di, dq;
      di = int'(iqm[h].i); dq = int'(iqm[h].q) - spq[h];
      checks++;
      if (di > 4 || -di > 4 || dq > 4 || -dq > 4) begin
        failures++; $display("h=%0d iq (%0d,%0d) exp (0,%0d)", h + 1, iqm[h].i, iqm[h].q, spq[h]);
      end
    end
    // waveform: ADC(t) against the series evaluated at the revolution phase
    for (int n = 0; n < 288; n++) begin
      real a, e;
      @(negedge clk);
      a = $itor($signed(ph)) / 2147483648.0 * PI;
      e = 0.0;
      for (int h = 1; h <= 8; h++) e += spq[h-1] * $sin(h * a);
      checks++;
      if (fabs($itor(adc) - e) > 30.0) begin
        failures++; if (failures < 10) $display("wave n=%0d adc %0d exp %f", n, adc, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
