// tb_cavity_driver: one driver module with both cavities in a loop (DAC to ADC,
// 3 clocks). The backplane bus is generated here: 1 MHz strobes and the serial
// f1 word for a 1 MHz revolution frequency. Checks: the two cavities settle on
// their own setpoints (cavity 1 h=1 at (0, 3000), cavity 2 h=2 at (1000, -500));
// the uplink frame carries the rotated I/Q (cavity 1 h=1 rotated by 90 degrees
// gives (-3000, 0)) in the documented block order; WCM I/Q from the downlink
// appears at the outputs; a 45 degree phase feedback word shifts the cavity
// voltage against the revolution phase while the loop stays locked; the
// feedforward input is added in front of the DAC.
module tb_cavity_driver;
  import llrf_pkg::*;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  localparam logic [31:0] F1 = 32'd29826162;
  localparam real PI = 3.14159265358979;
  localparam int K = 3, NB = 40;
  logic clk = 0, rst_n = 0;
  bp_bus_t bp;
  cfg_wr_t cfg;
  sample_t adc [2], ff [2], dac [2];
  link_word_t dn, up;
  iq_t wcm [8];
  iq_t iqm [2][8];
  logic [15:0] lerr;
  logic ser, dsend = 0;
  logic [15:0] dblk [NB], ublk [NB];
  logic [15:0] dovr, useq, ule, use_;
  logic uok;
  int checks = 0, failures = 0;
  int cnt = 0;

  cavity_driver #(.DRV_ID(0), .PAT_DEPTH(16)) dut (.clk, .rst_n, .bp, .cfg, .adc, .ff_in(ff), .dac,
    .dn_rx(dn), .up_tx(up), .wcm_iq(wcm), .iq_meas(iqm), .link_err(lerr));
  f1_serializer u_ser (.clk, .rst_n, .load(bp.ctrl_stb), .f1(F1), .ser);
  iq_frame_tx #(.NBLK(NB)) u_dtx (.clk, .rst_n, .send(dsend), .blocks(dblk), .tx(dn), .overrun_cnt(dovr));
  iq_frame_rx #(.NBLK(NB)) u_urx (.clk, .rst_n, .rx(up), .blocks(ublk), .seq(useq), .frame_ok(uok),
                                  .len_err_cnt(ule), .seq_err_cnt(use_));

  always #5 clk = ~clk;
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  sample_t h0 [8], h1 [8];
  always @(posedge clk) begin
    cnt <= (!rst_n || cnt == 143) ? 0 : cnt + 1;
    for (int k = 7; k > 0; k--) begin h0[k] <= h0[k-1]; h1[k] <= h1[k-1]; end
    h0[0] <= dac[0]; h1[0] <= dac[1];
  end
  always_comb begin
    bp = '0;
    bp.ctrl_stb = rst_n && cnt == 143;
    bp.patn_stb = rst_n && cnt == 71;
    bp.f1_ser   = ser;
  end
  assign adc[0] = h0[K-1];
  assign adc[1] = h1[K-1];

  task automatic wr(input int c, input int h, input logic [3:0] item, input int idx, input logic [31:0] d);
    @(negedge clk); cfg = '{we: 1'b1, addr: drv_addr(4'd0, 1'(c), 3'(h), item, 16'(idx)), data: d};
    @(negedge clk); cfg = '0;
  endtask

  task automatic chk_iq(input int c, input int h, input int ei, input int eq, input int tol, input string what);
    int di, dq;
    di = int'(iqm[c][h].i) - ei; dq = int'(iqm[c][h].q) - eq;
    checks++;
    if (di > tol || -di > tol || dq > tol || -dq > tol) begin
      failures++; $display("%s: cav %0d h %0d iq (%0d,%0d) exp (%0d,%0d)", what, c, h + 1, iqm[c][h].i, iqm[c][h].q, ei, eq);
    end
  endtask

  // I/Q of cavity 1 h=1 against the unshifted revolution phase, over 1 us
  task automatic measure_h1(output real mi, output real mq);
    mi = 0; mq = 0;
    for (int n = 0; n < 144; n++) begin
      real a;
      @(negedge clk);
      a = $itor($signed(dut.phase_acc - F1)) / 2147483648.0 * PI;   // phase_h1 is one clock later
      mi += 2.0 / 144.0 * adc[0] * $cos(a);
      mq += 2.0 / 144.0 * adc[0] * $sin(a);
    end
  endtask

  initial begin
    real mi, mq, avg;
    cfg = '0; ff[0] = 0; ff[1] = 0;
    for (int k = 0; k < 8; k++) begin h0[k] = 0; h1[k] = 0; end
    for (int k = 0; k < NB; k++) dblk[k] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 2; c++) for (int h = 0; h < 8; h++) begin
      logic [31:0] fh;
      logic [31:0] sp;
      fh = F1 * 32'(h + 1);
      sp = (c == 0 && h == 0) ? {16'sd0, 16'sd3000} : (c == 1 && h == 1) ? {16'sd1000, -16'sd500} : 32'd0;
      wr(c, h, ITEM_GAIN_LUT, int'(fh[27:18]), GAIN_ONE);
      wr(c, h, ITEM_PH_LUT, int'(fh[27:18]), 32'((longint'(fh) * (26 + K) + 32768) >> 16));
      wr(c, h, ITEM_GAIN_PAT, 0, GAIN_ONE);
      wr(c, h, ITEM_IQ_PAT, 0, sp);
      wr(c, h, ITEM_REG, REG_KP, 400);
      wr(c, h, ITEM_REG, REG_KI, 600);
    end
    wr(0, 0, ITEM_REG, REG_ROT_ANG, 16384);        // cavity 1, h=1: +90 degrees
    repeat (150) @(posedge bp.ctrl_stb);
    repeat (4) @(posedge clk); #1;
    chk_iq(0, 0, 0, 3000, 4, "cav1 h1");
    chk_iq(1, 1, 1000, -500, 4, "cav2 h2");
    chk_iq(0, 3, 0, 0, 4, "cav1 h4");
    // uplink: rotated values in the documented order
    @(posedge uok); #1;
    begin
      int u0, u1, u18, u19;
      u0 = int'($signed(ublk[0])); u1 = int'($signed(ublk[1]));
      u18 = int'($signed(ublk[18])); u19 = int'($signed(ublk[19]));
      checks++;
      if (u0 > -2996 || u0 < -3004 || u1 > 4 || u1 < -4) begin failures++; $display("up cav1 h1 %0d %0d", u0, u1); end
      checks++;
      if (u18 > 1004 || u18 < 996 || u19 > -496 || u19 < -504) begin failures++; $display("up cav2 h2 %0d %0d", u18, u19); end
      checks++; if (ublk[39] != 0) failures++;
    end
    // cavity 1 h=1 against the revolution phase: (0, 3000)
    measure_h1(mi, mq);
    checks++; if (fabs(mi) > 30 || fabs(mq - 3000) > 30) begin failures++; $display("no pfb: %f %f", mi, mq); end
    // downlink with WCM I/Q and a 45 degree phase feedback word
    for (int h = 0; h < 8; h++) begin dblk[2*h] = 16'(h * 11); dblk[2*h+1] = 16'(-h * 7); end
    dblk[16] = 16'd8192;
    @(negedge clk); dsend = 1; @(negedge clk); dsend = 0;
    repeat (150) @(posedge bp.ctrl_stb);
    repeat (4) @(posedge clk); #1;
    for (int h = 0; h < 8; h++) begin
      checks++; if (wcm[h].i != 16'(h * 11) || wcm[h].q != 16'(-h * 7)) failures++;
    end
    chk_iq(0, 0, 0, 3000, 4, "cav1 h1 with phase feedback");
    measure_h1(mi, mq);
    checks++; if (fabs(mi - 2121) > 40 || fabs(mq - 2121) > 40) begin failures++; $display("pfb 45: %f %f", mi, mq); end
    // feedforward sum: DC 500 on cavity 2 shows as the DAC average
    ff[1] = 16'sd500;
    repeat (3) @(posedge clk);
    avg = 0;
    for (int n = 0; n < 144; n++) begin @(negedge clk); avg += $itor(dac[1]) / 144.0; end
    checks++; if (fabs(avg - 500) > 20) begin failures++; $display("ff avg %f", avg); end
    checks++; if (lerr != 0 || ule != 0 || use_ != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
