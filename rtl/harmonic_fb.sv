// harmonic_fb: feedback block for one harmonic hn of one cavity, the unit the
// multiharmonic vector rf voltage control is built from (eight per cavity).
//
// Datapath (all at 144 MHz):
//   * The revolution phase and frequency are multiplied by hn, giving the
//     phase and frequency of this harmonic.
//   * Demodulation: a CORDIC turns the harmonic phase into cos/sin; the cavity
//     ADC sample, delayed to line up with the CORDIC, is multiplied by both
//     (the products are scaled by 2, so a cosine of amplitude A gives I = A).
//   * Two CIC filters (I and Q) low-pass and decimate to the control clock.
//   * The filtered I/Q is subtracted from the setpoint read from the I/Q
//     voltage pattern, and two PI controllers act on the differences.
//   * Modulation: a second CORDIC works on the harmonic phase plus the phase
//     offset read from the phase offset LUT (addressed by the harmonic
//     frequency); out = PI_I*cos + PI_Q*sin.
//   * The result is scaled by the gain LUT (addressed by frequency) and by the
//     gain pattern (addressed by pattern time), giving FB out.
// A cavity voltage A*cos(phi_h - theta) is measured as (A cos theta,
// A sin theta); the output for a PI output (u_i, u_q) is u_i cos + u_q sin.
// The measured I/Q also goes through an iq_rotator (ring-position angle and
// gain) for the vector sum.
//
// Timing: FB out is a function of the revolution phase presented 24 clocks
// earlier (1 multiply, 1 LUT, 1 add, 18 CORDIC, 3 output stages); the ADC path
// lines the ADC sample of clock t up with the phase of clock t. iq_valid pulses
// 2 clocks after ctrl_stb, iq_rot is valid 2 clocks after that.
//
// Registers (cfg_item = ITEM_REG, cfg_idx[3:0]): REG_HN harmonic number
// (default HN), REG_KP, REG_KI (Q4.12, default 0), REG_ROT_ANG (16-bit angle,
// default 0), REG_ROT_GAIN (Q2.14, default 1.0). Tables: ITEM_IQ_PAT
// ({I,Q} per pattern step), ITEM_GAIN_PAT, ITEM_PH_LUT, ITEM_GAIN_LUT.
// The block structure follows the paper's figure; all widths, number formats,
// the ADC alignment and the register set are this design's.
module harmonic_fb #(
  parameter int unsigned HN        = 1,
  parameter int unsigned PAT_DEPTH = 40_000,
  parameter int unsigned CIC_R     = 144,
  parameter int unsigned CIC_N     = 3
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  llrf_pkg::sample_t            adc,
  input  llrf_pkg::phase_t             phase_h1,
  input  llrf_pkg::freq_t              freq_h1,
  input  logic                         ctrl_stb,
  input  logic [$clog2(PAT_DEPTH)-1:0] pat_addr,
  input  logic                         cfg_we,
  input  logic [3:0]                   cfg_item,
  input  logic [15:0]                  cfg_idx,
  input  logic [31:0]                  cfg_data,
  output llrf_pkg::sample_t            fb_out,
  output llrf_pkg::iq_t                iq_meas,
  output logic                         iq_valid,
  output llrf_pkg::iq_t                iq_rot
);
  import llrf_pkg::*;
  localparam int unsigned ADC_DLY = 19;   // phase multiply + CORDIC latency
  localparam int unsigned PAW = $clog2(PAT_DEPTH);

  // ---------------- registers ----------------
  logic [3:0]         hn;
  logic signed [15:0] kp, ki;
  logic [15:0]        rot_ang;
  gain_t              rot_gain;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hn <= 4'(HN); kp <= '0; ki <= '0; rot_ang <= '0; rot_gain <= 16'(GAIN_ONE);
    end else if (cfg_we && cfg_item == ITEM_REG) begin
      case (cfg_idx[3:0])
        REG_HN:       hn       <= cfg_data[3:0];
        REG_KP:       kp       <= cfg_data[15:0];
        REG_KI:       ki       <= cfg_data[15:0];
        REG_ROT_ANG:  rot_ang  <= cfg_data[15:0];
        REG_ROT_GAIN: rot_gain <= cfg_data[15:0];
        default: ;
      endcase
    end
  end

  // ---------------- harmonic phase and frequency ----------------
  phase_t phase_h, phase_h_d, mod_phase;
  freq_t  freq_h;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_h <= '0; freq_h <= '0; phase_h_d <= '0;
    end else begin
      phase_h   <= phase_h1 * {28'd0, hn};
      freq_h    <= freq_h1 * {28'd0, hn};
      phase_h_d <= phase_h;
    end
  end

  // ---------------- I/Q demodulator ----------------
  sample_t cos_d, sin_d;
  cordic_sincos u_cordic_dem (.clk, .rst_n, .phase(phase_h), .cos_o(cos_d), .sin_o(sin_d));

  sample_t adc_dly [ADC_DLY];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(ADC_DLY); k++) adc_dly[k] <= '0;
    end else begin
      adc_dly[0] <= adc;
      for (int k = 1; k < int'(ADC_DLY); k++) adc_dly[k] <= adc_dly[k-1];
    end
  end

  logic signed [17:0] dem_i, dem_q;
  logic signed [31:0] pi_full, pq_full;
  always_comb begin
    pi_full = 32'(adc_dly[ADC_DLY-1]) * 32'(cos_d);
    pq_full = 32'(adc_dly[ADC_DLY-1]) * 32'(sin_d);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dem_i <= '0; dem_q <= '0;
    end else begin
      dem_i <= 18'(pi_full >>> 14);
      dem_q <= 18'(pq_full >>> 14);
    end
  end

  // ---------------- CIC low pass filters ----------------
  logic vi, vq;
  cic_decimator #(.IN_W(18), .R(CIC_R), .N(CIC_N)) u_cic_i
    (.clk, .rst_n, .in_data(dem_i), .dec_stb(ctrl_stb), .out_data(iq_meas.i), .out_valid(vi));
  cic_decimator #(.IN_W(18), .R(CIC_R), .N(CIC_N)) u_cic_q
    (.clk, .rst_n, .in_data(dem_q), .dec_stb(ctrl_stb), .out_data(iq_meas.q), .out_valid(vq));
  assign iq_valid = vi;

  // ---------------- setpoint pattern and PI controllers ----------------
  logic [31:0] sp_word;
  pattern_mem #(.DEPTH(PAT_DEPTH), .WIDTH(32)) u_iq_pat
    (.clk, .wr_en(cfg_we && cfg_item == ITEM_IQ_PAT), .wr_addr(cfg_idx[PAW-1:0]),
     .wr_data(cfg_data), .rd_addr(pat_addr), .rd_data(sp_word));

  sample_t u_i, u_q;
  logic    ui_v, uq_v;
  pi_controller u_pi_i (.clk, .rst_n, .in_valid(vi), .setpoint(sp_word[31:16]),
                        .measured(iq_meas.i), .kp, .ki, .out(u_i), .out_valid(ui_v));
  pi_controller u_pi_q (.clk, .rst_n, .in_valid(vq), .setpoint(sp_word[15:0]),
                        .measured(iq_meas.q), .kp, .ki, .out(u_q), .out_valid(uq_v));

  // ---------------- phase offset LUT and I/Q modulator ----------------
  logic [15:0] ph_off;
  freq_lut #(.WIDTH(16)) u_ph_lut
    (.clk, .wr_en(cfg_we && cfg_item == ITEM_PH_LUT), .wr_addr(cfg_idx[LUT_ABITS-1:0]),
     .wr_data(cfg_data[15:0]), .freq(freq_h), .rd_data(ph_off));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) mod_phase <= '0;
    else        mod_phase <= phase_h_d + {ph_off, 16'd0};
  end

  sample_t cos_m, sin_m;
  cordic_sincos u_cordic_mod (.clk, .rst_n, .phase(mod_phase), .cos_o(cos_m), .sin_o(sin_m));

  // ---------------- gain LUT, gain pattern ----------------
  logic [15:0] g_lut, g_pat;
  freq_lut #(.WIDTH(16)) u_gain_lut
    (.clk, .wr_en(cfg_we && cfg_item == ITEM_GAIN_LUT), .wr_addr(cfg_idx[LUT_ABITS-1:0]),
     .wr_data(cfg_data[15:0]), .freq(freq_h), .rd_data(g_lut));
  pattern_mem #(.DEPTH(PAT_DEPTH), .WIDTH(16)) u_gain_pat
    (.clk, .wr_en(cfg_we && cfg_item == ITEM_GAIN_PAT), .wr_addr(cfg_idx[PAW-1:0]),
     .wr_data(cfg_data[15:0]), .rd_addr(pat_addr), .rd_data(g_pat));

  sample_t mod_out, y1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mod_out <= '0; y1 <= '0; fb_out <= '0;
    end else begin
      mod_out <= sat16((48'(u_i) * 48'(cos_m) + 48'(u_q) * 48'(sin_m) + 48'sd16384) >>> 15);
      y1      <= sat16((48'(mod_out) * $signed({32'd0, g_lut}) + 48'sd8192) >>> 14);
      fb_out  <= sat16((48'(y1) * $signed({32'd0, g_pat}) + 48'sd8192) >>> 14);
    end
  end

  // ---------------- rotation for the vector sum ----------------
  iq_rotator u_rot (.clk, .rst_n, .angle(rot_ang), .gain(rot_gain), .in(iq_meas), .out(iq_rot));

  logic unused;
  assign unused = ^{vq, ui_v, uq_v};
endmodule
