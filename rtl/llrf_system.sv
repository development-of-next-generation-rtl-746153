// llrf_system: the complete LLRF control system for twelve cavities.
//
// One common function module, one high speed serial communication module and
// NDRV = 6 cavity driver modules of two cavities each, wired as in the crate:
// the common function module drives the backplane bus (control and pattern
// clock strobes, triggers, mode, A/B, serial revolution frequency) to every
// driver; each driver has a port 1 link pair to the communication module
// (rotated cavity I/Q up, WCM I/Q and phase feedback down), and the
// communication module has one link pair to the common function module (WCM
// I/Q and phase feedback up, vector sum down). All logic runs on the 144 MHz
// system clock.
//
// Ports: the twelve cavity ADC samples and DAC words, the feedforward driver
// signals (ff_in, added in front of each DAC) and the WCM I/Q received by each
// driver (wcm_iq_drv) for the feedforward drivers, the WCM I/Q and phase
// feedback word from the beam analysis/phase feedback functions (wcm_iq,
// phase_fb), and the vector sum delivered to the phase feedback (vsum,
// vsum_valid). cfg is the host register write port; bp mirrors the backplane
// bus for the functions not included. Feedforward driver, phase feedback, beam
// analysis and the analog parts are not part of this design.
module llrf_system #(
  parameter int unsigned NDRV      = 6,
  parameter int unsigned NHARM     = 8,
  parameter int unsigned PAT_DEPTH = 40_000,
  parameter int unsigned CIC_R     = 144
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              trig_25hz,
  input  logic              trig_beam,
  input  logic              trig_meas,
  input  logic [1:0]        mode,
  input  logic              ab,
  input  llrf_pkg::cfg_wr_t cfg,
  input  llrf_pkg::sample_t adc [2*NDRV],
  input  llrf_pkg::sample_t ff_in [2*NDRV],
  output llrf_pkg::sample_t dac [2*NDRV],
  input  llrf_pkg::iq_t     wcm_iq [NHARM],
  input  logic [15:0]       phase_fb,
  output llrf_pkg::iq_t     wcm_iq_drv [NDRV][NHARM],
  output llrf_pkg::iq_t     iq_meas [2*NDRV][NHARM],
  output llrf_pkg::iq_t     vsum [NHARM],
  output logic              vsum_valid,
  output llrf_pkg::bp_bus_t bp,
  output logic [15:0]       link_err
);
  import llrf_pkg::*;

  link_word_t up [NDRV];
  link_word_t dn [NDRV];
  link_word_t cf_up, cf_dn;
  logic [15:0] err_cf, err_comm, vsum_cnt;
  logic [15:0] err_drv [NDRV];

  common_function #(.NHARM(NHARM), .PAT_DEPTH(PAT_DEPTH)) u_common (
    .clk, .rst_n, .trig_25hz_in(trig_25hz), .trig_beam_in(trig_beam), .trig_meas_in(trig_meas),
    .mode_in(mode), .ab_in(ab), .cfg, .wcm_iq, .phase_fb, .bp, .dn_tx(cf_up), .vs_rx(cf_dn),
    .vsum, .vsum_valid, .link_err(err_cf));

  comm_module #(.NDRV(NDRV), .NHARM(NHARM)) u_comm (
    .clk, .rst_n, .cfg, .up_rx(up), .dn_tx(dn), .cf_rx(cf_up), .cf_tx(cf_dn),
    .link_err(err_comm), .vsum_cnt);

  for (genvar d = 0; d < int'(NDRV); d++) begin : g_drv
    sample_t a [2], f [2], o [2];
    iq_t     m [2][NHARM];
    assign a[0] = adc[2*d];   assign a[1] = adc[2*d+1];
    assign f[0] = ff_in[2*d]; assign f[1] = ff_in[2*d+1];
    assign dac[2*d] = o[0];   assign dac[2*d+1] = o[1];
    assign iq_meas[2*d] = m[0];
    assign iq_meas[2*d+1] = m[1];
    cavity_driver #(.DRV_ID(d), .NHARM(NHARM), .PAT_DEPTH(PAT_DEPTH), .CIC_R(CIC_R)) u_drv (
      .clk, .rst_n, .bp, .cfg, .adc(a), .ff_in(f), .dac(o), .dn_rx(dn[d]), .up_tx(up[d]),
      .wcm_iq(wcm_iq_drv[d]), .iq_meas(m), .link_err(err_drv[d]));
  end

  always_comb begin
    link_err = err_cf + err_comm;
    for (int d = 0; d < int'(NDRV); d++) link_err = link_err + err_drv[d];
  end

  logic unused;
  assign unused = ^vsum_cnt;
endmodule
