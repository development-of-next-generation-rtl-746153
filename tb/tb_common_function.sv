// tb_common_function: checks the 1 MHz control and pattern strobes, the
// trigger synchronizers (one pulse per rising edge), mode and A/B
// distribution, the frequency pattern stepped from the 25 Hz trigger and
// delivered as serial f1 words, the downlink frame with WCM I/Q and phase
// feedback, and reception of a vector sum frame.
module tb_common_function;
  import llrf_pkg::*;
  localparam int PD = 64, NB = 40;
  logic clk = 0, rst_n = 0;
  logic t25 = 0, tb_ = 0, tm = 0, ab = 0;
  logic [1:0] mode = 0;
  cfg_wr_t cfg;
  iq_t wcm [8];
  logic [15:0] pfb;
  bp_bus_t bp;
  link_word_t dn, vs_in;
  iq_t vsum [8];
  logic vs_v;
  logic [15:0] lerr;
  freq_t f1;
  logic f1v;
  logic [15:0] dblk [NB];
  logic [15:0] dseq, dle, dse;
  logic dok;
  logic vsend = 0;
  logic [15:0] vblk [NB];
  logic [15:0] vovr;
  int checks = 0, failures = 0;
  int cper = 144;
  int cyc = 0, lastc = -1, lastp = -1, n25 = 0, nbeam = 0, nmeas = 0;

  common_function #(.PAT_DEPTH(PD)) dut (.clk, .rst_n, .trig_25hz_in(t25), .trig_beam_in(tb_),
    .trig_meas_in(tm), .mode_in(mode), .ab_in(ab), .cfg, .wcm_iq(wcm), .phase_fb(pfb), .bp,
    .dn_tx(dn), .vs_rx(vs_in), .vsum, .vsum_valid(vs_v), .link_err(lerr));
  f1_deserializer u_des (.clk, .rst_n, .ser(bp.f1_ser), .f1, .f1_valid(f1v));
  iq_frame_rx #(.NBLK(NB)) u_rx (.clk, .rst_n, .rx(dn), .blocks(dblk), .seq(dseq), .frame_ok(dok),
                                 .len_err_cnt(dle), .seq_err_cnt(dse));
  iq_frame_tx #(.NBLK(NB)) u_tx (.clk, .rst_n, .send(vsend), .blocks(vblk), .tx(vs_in), .overrun_cnt(vovr));

  always #5 clk = ~clk;
  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && bp.ctrl_stb) begin
      if (lastc >= 0 && cper > 0) begin checks++; if (cyc - lastc != cper) begin failures++; $display("ctrl period %0d", cyc - lastc); end end
      lastc <= cyc;
    end
    if (rst_n && bp.patn_stb) begin
      if (lastp >= 0) begin checks++; if (cyc - lastp != 144) failures++; end
      lastp <= cyc;
    end
    if (rst_n && bp.trig_25hz) n25++;
    if (rst_n && bp.trig_beam) nbeam++;
    if (rst_n && bp.trig_meas) nmeas++;
  end

  task automatic wr(input logic [31:0] a, input logic [31:0] v);
    @(negedge clk); cfg = '{we: 1'b1, addr: a, data: v};
    @(negedge clk); cfg = '0;
  endtask

  initial begin
    cfg = '0; pfb = 16'h1234;
    for (int h = 0; h < 8; h++) begin wcm[h].i = 16'(100 * h + 1); wcm[h].q = -16'(100 * h + 2); end
    for (int k = 0; k < NB; k++) vblk[k] = 16'(k * 3 + 7);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int a = 0; a < PD; a++) wr({UNIT_COMMON, 4'd0, ITEM_FREQ_PAT, 20'(a)}, 32'h0100_0000 + 32'(a) * 32'h1000);
    // 25 Hz trigger: pattern restarts; f1 words then step once per pattern clock
    @(negedge clk); t25 = 1; repeat (5) @(negedge clk); t25 = 0;
    repeat (3) @(posedge f1v);
    for (int n = 0; n < 10; n++) begin
      freq_t prev;
      prev = f1;
      @(posedge f1v); #1;
      checks++;
      if (f1 != prev + 32'h1000 || f1 < 32'h0100_0000 || f1 > 32'h0100_0000 + 32'h1000 * PD) begin
        failures++; $display("f1 %h prev %h", f1, prev);
      end
    end
    // other triggers and levels
    @(negedge clk); tb_ = 1; tm = 1; mode = 2'b10; ab = 1; repeat (4) @(negedge clk); tb_ = 0; tm = 0;
    repeat (10) @(negedge clk);
    checks++; if (bp.mode != 2'b10 || bp.ab != 1'b1) failures++;
    checks++; if (n25 != 1 || nbeam != 1 || nmeas != 1) begin failures++; $display("trig counts %0d %0d %0d", n25, nbeam, nmeas); end
    // downlink frame contents
    @(posedge dok); #1;
    for (int h = 0; h < 8; h++) begin
      checks++; if (dblk[2*h] != wcm[h].i || dblk[2*h+1] != wcm[h].q) failures++;
    end
    checks++; if (dblk[16] != 16'h1234) failures++;
    // ctrl clock divisor change
    cper = 0;
    wr({UNIT_COMMON, 4'd0, ITEM_REG, 16'd0, REG_CTRL_DIV}, 72);
    @(posedge bp.ctrl_stb); @(posedge bp.ctrl_stb);
    cper = 72;
    repeat (10) @(posedge bp.ctrl_stb);
    checks++; if (cper != 72) failures++;
    // vector sum frame in
    @(negedge clk); vsend = 1; @(negedge clk); vsend = 0;
    @(posedge vs_v); #1;
    for (int h = 0; h < 8; h++) begin
      checks++; if (vsum[h].i != vblk[2*h] || vsum[h].q != vblk[2*h+1]) failures++;
    end
    checks++; if (lerr != 0 || dle != 0 || dse != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
