// tb_llrf_system: end-to-end run of the whole system at its default size (six
// driver modules, twelve cavities, eight harmonics, 40000-step patterns). Each
// cavity's DAC is looped back to its ADC 3 clocks later. The frequency pattern
// holds f1 = 1 MHz. Steps:
//  1. all 96 harmonic loops lock; cavity 1 h=1 at (20000, 0), cavity 3 holds
//     the eight-harmonic sawtooth, the rest at zero;
//  2. the vector sum test: only driver 1 counted, normalized by 1 and by 2,
//     cavity 1 rotated by +90 and -45 degrees;
//  3. all twelve cavities at (20000, 0), normalized by 12;
//  4. the downlink: WCM I/Q and a phase feedback word reach all drivers and
//     the loops stay locked;
//  5. a 25 Hz trigger starts the patterns; at step 5 cavity 2's setpoint
//     changes and its loop follows;
//  6. a feedforward input shows at the DAC.
// Every mechanism is counted and a mechanism that never happened is a failure.
module tb_llrf_system;
  import llrf_pkg::*;
  function automatic real fabs(input real x); return x < 0.0 ? -x : x; endfunction
  localparam logic [31:0] F1 = 32'd29826162;   // 1 MHz revolution frequency
  localparam int K = 3, NP = 80;               // loop delay, pattern steps written
  localparam int NC = 12;
  logic clk = 0, rst_n = 0;
  logic t25 = 0, tbeam = 0, tmeas = 0, ab = 0;
  logic [1:0] mode = 0;
  cfg_wr_t cfg;
  sample_t adc [NC], ff [NC], dac [NC];
  iq_t wcm [8];
  logic [15:0] pfb;
  iq_t wcm_drv [6][8];
  iq_t iqm [NC][8];
  iq_t vsum [8];
  logic vsv;
  bp_bus_t bp;
  logic [15:0] lerr;
  int checks = 0, failures = 0;
  int n_lock = 0, n_vsum = 0, n_norm = 0, n_rot = 0, n_pfb = 0, n_wcm = 0, n_step = 0, n_ff = 0, n_saw = 0;

  llrf_system dut (.clk, .rst_n, .trig_25hz(t25), .trig_beam(tbeam), .trig_meas(tmeas), .mode, .ab,
    .cfg, .adc, .ff_in(ff), .dac, .wcm_iq(wcm), .phase_fb(pfb), .wcm_iq_drv(wcm_drv), .iq_meas(iqm),
    .vsum, .vsum_valid(vsv), .bp, .link_err(lerr));

  always #5 clk = ~clk;
  initial begin
    #20000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  sample_t hist [NC][4];
  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      for (int k = 3; k > 0; k--) hist[c][k] <= hist[c][k-1];
      hist[c][0] <= dac[c];
    end
    if (rst_n && vsv) n_vsum++;
  end
  for (genvar c = 0; c < NC; c++) begin : g_loop
    assign adc[c] = hist[c][K-1];
  end

  // back-to-back configuration writes
  task automatic wr(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); cfg = '{we: 1'b1, addr: a, data: d};
  endtask
  task automatic wr_end();
    @(negedge clk); cfg = '0;
  endtask
  function automatic logic [31:0] ca(input int cav, input int h, input logic [3:0] item, input int idx);
    return drv_addr(4'(cav / 2), 1'(cav % 2), 3'(h), item, 16'(idx));
  endfunction
  function automatic int saw(input int h);
    return $rtoi($floor(3000.0 / (h + 1) + 0.5)) * ((h % 2) ? -1 : 1);
  endfunction

  task automatic wait_ctrl(input int n);
    repeat (n) @(posedge bp.ctrl_stb);
    repeat (6) @(posedge clk);
    #1;
  endtask

  task automatic chk_iq(input int c, input int h, input int ei, input int eq, input int tol, input string what);
    int di, dq;
    di = int'(iqm[c][h].i) - ei; dq = int'(iqm[c][h].q) - eq;
    checks++;
    if (di > tol || -di > tol || dq > tol || -dq > tol) begin
      failures++; $display("%s: cav %0d h %0d iq (%0d,%0d) exp (%0d,%0d)", what, c + 1, h + 1,
                           int'(iqm[c][h].i), int'(iqm[c][h].q), ei, eq);
    end else if (what == "lock") n_lock++;
  endtask

  task automatic chk_vsum(input int ei, input int eq, input int tol, input string what);
    int di, dq;
    @(posedge vsv); @(posedge vsv); #1;
    di = int'(vsum[0].i) - ei; dq = int'(vsum[0].q) - eq;
    checks++;
    if (di > tol || -di > tol || dq > tol || -dq > tol) begin
      failures++; $display("%s: vsum h1 (%0d,%0d) exp (%0d,%0d)", what, int'(vsum[0].i), int'(vsum[0].q), ei, eq);
    end
  endtask

  initial begin
    cfg = '0; pfb = 0;
    for (int c = 0; c < NC; c++) begin ff[c] = 0; for (int k = 0; k < 4; k++) hist[c][k] = 0; end
    for (int h = 0; h < 8; h++) wcm[h] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ---- configuration
    for (int a = 0; a < NP; a++) wr({UNIT_COMMON, 4'd0, ITEM_FREQ_PAT, 20'(a)}, F1);
    for (int c = 0; c < NC; c++) for (int h = 0; h < 8; h++) begin
      logic [31:0] fh;
      fh = F1 * 32'(h + 1);
      wr(ca(c, h, ITEM_GAIN_LUT, int'(fh[27:18])), GAIN_ONE);
      wr(ca(c, h, ITEM_PH_LUT, int'(fh[27:18])), 32'((longint'(fh) * (26 + K) + 32768) >> 16));
      wr(ca(c, h, ITEM_REG, 32'(REG_KP)), 400);
      wr(ca(c, h, ITEM_REG, 32'(REG_KI)), 600);
      for (int a = 0; a < NP; a++) begin
        logic [31:0] sp;
        if (c == 0 && h == 0)      sp = {16'sd20000, 16'sd0};
        else if (c == 2)           sp = {16'sd0, 16'(saw(h))};
        else if (c == 1 && h == 0) sp = (a < 5) ? 32'd0 : {16'sd4000, 16'sd2000};
        else                       sp = 32'd0;
        wr(ca(c, h, ITEM_IQ_PAT, a), sp);
        wr(ca(c, h, ITEM_GAIN_PAT, a), GAIN_ONE);
      end
    end
    // ---- 2. vector sum test set-up: driver 1 only, normalize by 1
    wr({UNIT_COMM, 4'd0, ITEM_REG, 16'd0, REG_LINK_MASK}, 1);
    wr({UNIT_COMM, 4'd0, ITEM_REG, 16'd0, REG_NCAV}, 1);
    wr_end();
    // ---- 1. lock
    wait_ctrl(150);
    for (int c = 0; c < NC; c++) for (int h = 0; h < 8; h++)
      chk_iq(c, h, (c == 0 && h == 0) ? 20000 : 0, (c == 2) ? saw(h) : 0, 5, "lock");
    for (int h = 0; h < 8; h++) begin
      checks++;
      if (int'(iqm[2][h].q) - saw(h) > 5 || saw(h) - int'(iqm[2][h].q) > 5) failures++; else n_saw++;
    end
    // ---- 2. vector sum
    chk_vsum(20000, 0, 6, "normalized by 1");          n_norm++;
    wr({UNIT_COMM, 4'd0, ITEM_REG, 16'd0, REG_NCAV}, 2); wr_end();
    chk_vsum(10000, 0, 4, "normalized by 2");          n_norm++;
    wr({UNIT_COMM, 4'd0, ITEM_REG, 16'd0, REG_NCAV}, 1);
    wr(ca(0, 0, ITEM_REG, 32'(REG_ROT_ANG)), 16384);  wr_end();
    repeat (30) @(posedge clk);
    chk_vsum(0, 20000, 6, "rotated +90");               n_rot++;
    wr(ca(0, 0, ITEM_REG, 32'(REG_ROT_ANG)), 32'(16'hE000));  wr_end();   // -45 degrees
    repeat (30) @(posedge clk);
    chk_vsum(14142, -14142, 8, "rotated -45");          n_rot++;
    // ---- 3. all twelve cavities at (20000, 0), normalized by 12
    wr(ca(0, 0, ITEM_REG, 32'(REG_ROT_ANG)), 0);
    for (int c = 1; c < NC; c++) begin
      for (int a = 0; a < ((c == 1) ? 5 : NP); a++) wr(ca(c, 0, ITEM_IQ_PAT, a), {16'sd20000, 16'sd0});
    end
    wr({UNIT_COMM, 4'd0, ITEM_REG, 16'd0, REG_LINK_MASK}, 6'h3f);
    wr({UNIT_COMM, 4'd0, ITEM_REG, 16'd0, REG_NCAV}, 12);
    wr_end();
    wait_ctrl(150);
    chk_vsum(20000, 0, 6, "12 cavities normalized by 12"); n_norm++;
    // ---- 4. downlink: WCM I/Q and phase feedback (30 degrees)
    for (int h = 0; h < 8; h++) begin wcm[h].i = 16'(1000 + h); wcm[h].q = 16'(-2000 - h); end
    pfb = 16'd5461;
    wait_ctrl(150);
    for (int d = 0; d < 6; d++) for (int h = 0; h < 8; h++) begin
      checks++;
      if (wcm_drv[d][h].i != 16'(1000 + h) || wcm_drv[d][h].q != 16'(-2000 - h)) failures++;
      else n_wcm++;
    end
    for (int c = 0; c < NC; c++) begin
      phase_t dphi;
      chk_iq(c, 0, 20000, 0, 6, "locked with phase feedback");
      dphi = dut.g_drv[0].u_drv.phase_h1 - dut.g_drv[0].u_drv.phase_acc;
      checks++;
      if (dphi + F1 != {16'd5461, 16'd0}) begin failures++; $display("phase fb shift %h", dphi); end
      else n_pfb++;
    end
    // ---- 5. 25 Hz trigger: patterns start, cavity 2 steps at pattern step 5
    @(negedge clk); t25 = 1; repeat (3) @(negedge clk); t25 = 0;
    wait_ctrl(3);
    chk_iq(1, 0, 20000, 0, 40, "before pattern step");
    wait_ctrl(60);
    chk_iq(1, 0, 4000, 2000, 8, "after pattern step"); n_step++;
    // ---- 6. feedforward input on cavity 12
    begin
      real avg;
      ff[11] = 16'sd700;
      repeat (5) @(posedge clk);
      avg = 0;
      for (int n = 0; n < 144; n++) begin @(negedge clk); avg += $itor(dac[11]) / 144.0; end
      checks++;
      if (fabs(avg - 700) > 25) begin failures++; $display("ff avg %f", avg); end else n_ff++;
    end
    checks++; if (lerr != 0) begin failures++; $display("link errors %0d", lerr); end
    // ---- mechanism counts
    $display("mechanisms: lock=%0d vsum_frames=%0d normalize=%0d rotate=%0d wcm=%0d phase_fb=%0d pattern_step=%0d feedforward=%0d sawtooth=%0d",
             n_lock, n_vsum, n_norm, n_rot, n_wcm, n_pfb, n_step, n_ff, n_saw);
    if (n_lock == 0) failures++;
    if (n_vsum == 0) failures++;
    if (n_norm == 0) failures++;
    if (n_rot == 0) failures++;
    if (n_wcm == 0) failures++;
    if (n_pfb == 0) failures++;
    if (n_step == 0) failures++;
    if (n_ff == 0) failures++;
    if (n_saw == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
