// tb_harmonic_fb: one harmonic feedback block, f1 = 1 MHz.
//  A: demodulation. The ADC carries 10000*cos(3*phi - 30 deg) plus a 5th
//     harmonic; with hn = 3 the filtered I/Q must be (8660, 5000).
//  B: modulation and latency. With the loop open (ADC = 0), Kp = 1 and the
//     setpoint (6000, -4000), FB out must equal 6000 cos + (-4000) sin of the
//     harmonic phase presented 24 clocks earlier, clock by clock.
//  C: closed loop. FB out is fed back to the ADC 3 clocks later; the phase
//     offset LUT holds the loop delay (27 clocks) at this frequency; the I/Q
//     must settle on the setpoint, then on a new setpoint and with the gain
//     pattern halved, when the pattern address moves on.
module tb_harmonic_fb;
  import llrf_pkg::*;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  localparam int PD = 16;
  localparam logic [31:0] F1 = 32'd29826162;     // 1 MHz at 144 MHz
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  sample_t adc, fb;
  phase_t ph;
  logic ctrl_stb;
  logic [3:0] pa;
  logic cfg_we = 0;
  logic [3:0] cfg_item;
  logic [15:0] cfg_idx;
  logic [31:0] cfg_data;
  iq_t iqm, iqr;
  logic iqv;
  int checks = 0, failures = 0;
  int mode = 0;            // 0 synthetic ADC, 1 ADC = 0, 2 loopback
  int hn = 3;
  int cnt = 0;

  harmonic_fb #(.HN(1), .PAT_DEPTH(PD)) dut (
    .clk, .rst_n, .adc, .phase_h1(ph), .freq_h1(F1), .ctrl_stb, .pat_addr(pa),
    .cfg_we, .cfg_item, .cfg_idx, .cfg_data, .fb_out(fb), .iq_meas(iqm), .iq_valid(iqv), .iq_rot(iqr));

  always #5 clk = ~clk;
  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // phase history for the latency check and the loopback line
  phase_t ph_hist [64];
  sample_t fb_hist [8];
  always @(posedge clk) begin
    if (!rst_n) begin ph <= '0; cnt <= 0; end
    else begin
      ph  <= ph + F1;
      cnt <= (cnt == 143) ? 0 : cnt + 1;
    end
    for (int k = 63; k > 0; k--) ph_hist[k] <= ph_hist[k-1];
    ph_hist[0] <= ph;
    for (int k = 7; k > 0; k--) fb_hist[k] <= fb_hist[k-1];
    fb_hist[0] <= fb;
  end
  assign ctrl_stb = rst_n && cnt == 143;

  always_comb begin
    real a1;
    a1 = $itor($signed(ph)) / 2147483648.0 * PI;     // revolution phase
    case (mode)
      0: adc = 16'($rtoi(10000.0 * $cos(3.0 * a1 - PI / 6.0) + 5000.0 * $cos(5.0 * a1 + 1.0)));
      1: adc = '0;
      default: adc = fb_hist[2];      // 3 clocks after FB out
    endcase
  end

  task automatic wr(input logic [3:0] item, input int idx, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_item = item; cfg_idx = 16'(idx); cfg_data = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic expect_iq(input int ei, input int eq, input int tol, input string what);
    int di, dq;
    di = int'(iqm.i) - ei;
    dq = int'(iqm.q) - eq;
    checks++;
    if (di > tol || -di > tol || dq > tol || -dq > tol) begin
      failures++; $display("%s: iq (%0d,%0d) exp (%0d,%0d)", what, iqm.i, iqm.q, ei, eq);
    end
  endtask

  initial begin
    logic [31:0] fh;
    pa = 0;
    for (int k = 0; k < 64; k++) ph_hist[k] = '0;
    for (int k = 0; k < 8; k++) fb_hist[k] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // tables: unity gains, zero phase offset, setpoints
    for (int a = 0; a < 1024; a++) begin
      wr(ITEM_GAIN_LUT, a, GAIN_ONE);
      wr(ITEM_PH_LUT, a, 0);
    end
    wr(ITEM_GAIN_PAT, 0, GAIN_ONE);
    wr(ITEM_GAIN_PAT, 1, GAIN_ONE / 2);
    wr(ITEM_IQ_PAT, 0, {16'sd6000, -16'sd4000});
    wr(ITEM_IQ_PAT, 1, {-16'sd2000, 16'sd7000});
    wr(ITEM_REG, REG_HN, 3);
    // ---- A: demodulation
    mode = 0;
    repeat (8) @(posedge iqv);
    #1 expect_iq(8660, 5000, 4, "demod h=3");
    // ---- B: modulation, open loop, Kp = 1.0
    mode = 1;
    wr(ITEM_REG, REG_KP, 4096);
    repeat (5) @(posedge iqv);
    repeat (3) @(posedge clk);
    for (int n = 0; n < 300; n++) begin
      real a, e;
      @(negedge clk);
      a = $itor($signed(32'(ph_hist[23] * 32'(hn)))) / 2147483648.0 * PI;
      e = 6000.0 * $cos(a) - 4000.0 * $sin(a);
      checks++;
      if (fabs($itor(fb) - e) > 4.0) begin
        failures++; if (failures < 10) $display("mod n=%0d fb %0d exp %f", n, fb, e);
      end
    end
    // ---- C: closed loop at h = 2 with the loop delay in the phase offset LUT
    hn = 2;
    wr(ITEM_REG, REG_HN, 2);
    fh = F1 * 2;
    wr(ITEM_PH_LUT, int'(fh[27:18]), 32'((longint'(fh) * 27 + 32768) >> 16));
    wr(ITEM_REG, REG_KP, 400);
    wr(ITEM_REG, REG_KI, 600);
    mode = 2;
    repeat (120) @(posedge iqv);
    #1 expect_iq(6000, -4000, 3, "closed loop step 0");
    pa = 1;     // next pattern step: new setpoint, gain pattern 0.5
    repeat (120) @(posedge iqv);
    #1 expect_iq(-2000, 7000, 3, "closed loop step 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
