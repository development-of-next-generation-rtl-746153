// mhvc: multiharmonic vector rf voltage control of one cavity.
//
// Eight harmonic feedback blocks (default harmonic numbers h = 1..8) share the
// cavity's ADC samples and the revolution phase and frequency; each regulates
// the complex amplitude of its harmonic of the cavity voltage against its own
// I/Q pattern. Their outputs are added (saturating) to form the multiharmonic
// rf signal, one clock after the blocks' outputs. The measured and the rotated
// I/Q of all harmonics are passed out for monitoring and for the vector sum.
//
// Configuration writes are steered to block cfg_harm. This structure (eight
// blocks, a sum) is the paper's; the interface is this design's.
module mhvc #(
  parameter int unsigned NHARM     = 8,
  parameter int unsigned PAT_DEPTH = 40_000,
  parameter int unsigned CIC_R     = 144
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  llrf_pkg::sample_t            adc,
  input  llrf_pkg::phase_t             phase_h1,
  input  llrf_pkg::freq_t              freq_h1,
  input  logic                         ctrl_stb,
  input  logic [$clog2(PAT_DEPTH)-1:0] pat_addr,
  input  logic                         cfg_we,
  input  logic [2:0]                   cfg_harm,
  input  logic [3:0]                   cfg_item,
  input  logic [15:0]                  cfg_idx,
  input  logic [31:0]                  cfg_data,
  output llrf_pkg::sample_t            rf_out,
  output llrf_pkg::iq_t                iq_meas [NHARM],
  output llrf_pkg::iq_t                iq_rot  [NHARM],
  output logic                         iq_valid
);
  llrf_pkg::sample_t fb [NHARM];
  logic              v [NHARM];

  for (genvar h = 0; h < int'(NHARM); h++) begin : g_fb
    harmonic_fb #(.HN(h + 1), .PAT_DEPTH(PAT_DEPTH), .CIC_R(CIC_R)) u_fb (
      .clk, .rst_n, .adc, .phase_h1, .freq_h1, .ctrl_stb, .pat_addr,
      .cfg_we(cfg_we && cfg_harm == 3'(h)), .cfg_item, .cfg_idx, .cfg_data,
      .fb_out(fb[h]), .iq_meas(iq_meas[h]), .iq_valid(v[h]), .iq_rot(iq_rot[h]));
  end

  sat_sum #(.N(NHARM)) u_sum (.clk, .rst_n, .in(fb), .out(rf_out));
  assign iq_valid = v[0];
endmodule
