// cavity_driver: one cavity driver module, controlling two cavities.
//
// The serial revolution frequency from the backplane is recovered
// (f1_deserializer) and integrated into the revolution phase
// (phase_accumulator). The phase feedback word received over the port 1
// downlink is added to that phase, so it shifts the phase of every harmonic in
// proportion to h. For each of the two cavities a multiharmonic vector rf
// voltage control (mhvc) regulates h=1..8 of the cavity voltage; its rf signal
// is added (saturating) to the feedforward driver's signal and sent to the DAC.
// The rotated I/Q of both cavities for all eight harmonics is framed and sent on
// the port 1 uplink once per control clock; the WCM beam I/Q from the downlink
// is handed to the feedforward drivers.
//
// Interface: bp is the backplane bus of the common function module (strobes,
// triggers, serial f1). up_tx/dn_rx are the port 1 link words. cfg writes whose
// addr[31:28] equals UNIT_DRV0 + DRV_ID reach this module (see llrf_pkg).
// Downlink blocks: 0..15 WCM I/Q h=1..8 (I then Q), 16 phase feedback (signed
// 16-bit phase, 65536 = 360 degrees at h=1), the rest reserved.
// Uplink blocks: CAV1 h1 I, h1 Q, ..., h8 Q, CAV2 h1 I, ..., h8 Q, 8 reserved.
//
// Timing: DAC = ff + rf one clock after the mhvc output; the uplink frame starts
// 5 clocks after the control clock strobe (2 CIC + 2 rotator + 1 register).
// The block split follows the paper; the phase feedback injection point, the
// downlink layout and the register map are this design's.
module cavity_driver #(
  parameter int unsigned DRV_ID    = 0,
  parameter int unsigned NHARM     = 8,
  parameter int unsigned PAT_DEPTH = 40_000,
  parameter int unsigned CIC_R     = 144
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  llrf_pkg::bp_bus_t    bp,
  input  llrf_pkg::cfg_wr_t    cfg,
  input  llrf_pkg::sample_t    adc [2],
  input  llrf_pkg::sample_t    ff_in [2],
  output llrf_pkg::sample_t    dac [2],
  input  llrf_pkg::link_word_t dn_rx,
  output llrf_pkg::link_word_t up_tx,
  output llrf_pkg::iq_t        wcm_iq [NHARM],
  output llrf_pkg::iq_t        iq_meas [2][NHARM],
  output logic [15:0]          link_err
);
  import llrf_pkg::*;
  localparam int unsigned PAW = $clog2(PAT_DEPTH);

  // ---------------- configuration decode ----------------
  logic hit;
  assign hit = cfg.we && cfg.addr[31:28] == UNIT_DRV0 + 4'(DRV_ID);

  // ---------------- revolution frequency and phase ----------------
  freq_t  f1;
  logic   f1_valid;
  phase_t phase_acc, phase_h1;
  f1_deserializer u_des (.clk, .rst_n, .ser(bp.f1_ser), .f1, .f1_valid);
  phase_accumulator u_acc (.clk, .rst_n, .freq(f1), .phase(phase_acc));

  // ---------------- downlink: WCM I/Q and phase feedback ----------------
  logic [15:0] dn_blk [FRAME_BLOCKS];
  logic [15:0] dn_seq, dn_len_err, dn_seq_err;
  logic        dn_ok;
  iq_frame_rx #(.NBLK(FRAME_BLOCKS)) u_dn_rx
    (.clk, .rst_n, .rx(dn_rx), .blocks(dn_blk), .seq(dn_seq), .frame_ok(dn_ok),
     .len_err_cnt(dn_len_err), .seq_err_cnt(dn_seq_err));
  for (genvar h = 0; h < int'(NHARM); h++) begin : g_wcm
    assign wcm_iq[h].i = dn_blk[2*h];
    assign wcm_iq[h].q = dn_blk[2*h+1];
  end
  assign link_err = dn_len_err + dn_seq_err;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase_h1 <= '0;
    else        phase_h1 <= phase_acc + {dn_blk[2*NHARM], 16'd0};
  end

  // ---------------- pattern time ----------------
  logic [PAW-1:0] pat_addr;
  pattern_sequencer #(.DEPTH(PAT_DEPTH)) u_seq
    (.clk, .rst_n, .trig_25hz(bp.trig_25hz), .patn_stb(bp.patn_stb), .addr(pat_addr));

  // ---------------- two cavities ----------------
  iq_t     iq_rot [2][NHARM];
  logic    iq_v [2];
  sample_t rf [2];
  for (genvar c = 0; c < 2; c++) begin : g_cav
    mhvc #(.NHARM(NHARM), .PAT_DEPTH(PAT_DEPTH), .CIC_R(CIC_R)) u_mhvc (
      .clk, .rst_n, .adc(adc[c]), .phase_h1, .freq_h1(f1), .ctrl_stb(bp.ctrl_stb), .pat_addr,
      .cfg_we(hit && cfg.addr[27] == 1'(c)), .cfg_harm(cfg.addr[26:24]),
      .cfg_item(cfg.addr[23:20]), .cfg_idx(cfg.addr[15:0]), .cfg_data(cfg.data),
      .rf_out(rf[c]), .iq_meas(iq_meas[c]), .iq_rot(iq_rot[c]), .iq_valid(iq_v[c]));

    sample_t sum_in [2];
    assign sum_in[0] = rf[c];
    assign sum_in[1] = ff_in[c];
    sat_sum #(.N(2)) u_sum (.clk, .rst_n, .in(sum_in), .out(dac[c]));
  end

  // ---------------- uplink: rotated I/Q of both cavities ----------------
  logic [15:0] up_blk [FRAME_BLOCKS];
  always_comb begin
    for (int k = 0; k < int'(FRAME_BLOCKS); k++) up_blk[k] = '0;
    for (int c = 0; c < 2; c++)
      for (int h = 0; h < int'(NHARM); h++) begin
        up_blk[c*2*NHARM + 2*h]     = iq_rot[c][h].i;
        up_blk[c*2*NHARM + 2*h + 1] = iq_rot[c][h].q;
      end
  end

  logic [2:0] send_dly;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) send_dly <= '0;
    else        send_dly <= {send_dly[1:0], iq_v[0]};
  end

  logic [15:0] up_overrun;
  iq_frame_tx #(.NBLK(FRAME_BLOCKS)) u_up_tx
    (.clk, .rst_n, .send(send_dly[2]), .blocks(up_blk), .tx(up_tx), .overrun_cnt(up_overrun));

  logic unused;
  assign unused = ^{f1_valid, dn_seq, dn_ok, iq_v[1], up_overrun, cfg.addr[19:16],
                    bp.trig_beam, bp.trig_meas, bp.ab, bp.mode};
endmodule
