// common_function: the common function module.
//
// Generates the 1 MHz control and pattern clocks (clk_strobe_gen, divisors
// host-settable), synchronizes the external triggers (25 Hz, beam, measurement)
// into one-clock pulses and the beam destination mode (1..0) and A/B levels,
// and reads the 32-bit revolution frequency pattern (pattern_mem stepped by the
// pattern clock from the 25 Hz trigger). The frequency word is serialized
// (f1_serializer) and, with the strobes and triggers, put on the backplane bus.
// Once per control clock it frames the WCM beam I/Q (h=1..8) and the phase
// feedback word for the port 1 downlink, and it receives the vector sum frame
// from the communication module.
//
// The phase feedback and the beam signal analysis that would produce the WCM
// I/Q and phase feedback words are not part of this design; they enter as
// ports. Registers (cfg addr[31:28] = UNIT_COMMON): REG_CTRL_DIV, REG_PATN_DIV
// (default 144); item ITEM_FREQ_PAT: the frequency pattern.
// Timing: triggers are delayed 3 clocks by the synchronizer; the frequency word
// of pattern step n is loaded into the serializer 2 clocks after the pattern
// strobe and reaches the drivers 34 clocks later.
module common_function #(
  parameter int unsigned NHARM     = 8,
  parameter int unsigned PAT_DEPTH = 40_000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 trig_25hz_in,
  input  logic                 trig_beam_in,
  input  logic                 trig_meas_in,
  input  logic [1:0]           mode_in,
  input  logic                 ab_in,
  input  llrf_pkg::cfg_wr_t    cfg,
  input  llrf_pkg::iq_t        wcm_iq [NHARM],
  input  logic [15:0]          phase_fb,
  output llrf_pkg::bp_bus_t    bp,
  output llrf_pkg::link_word_t dn_tx,
  input  llrf_pkg::link_word_t vs_rx,
  output llrf_pkg::iq_t        vsum [NHARM],
  output logic                 vsum_valid,
  output logic [15:0]          link_err
);
  import llrf_pkg::*;
  localparam int unsigned PAW = $clog2(PAT_DEPTH);

  logic hit;
  assign hit = cfg.we && cfg.addr[31:28] == UNIT_COMMON;

  logic [15:0] ctrl_div, patn_div;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctrl_div <= 16'(CTRL_DIV_DEF); patn_div <= 16'(PATN_DIV_DEF);
    end else if (hit && cfg.addr[23:20] == ITEM_REG) begin
      case (cfg.addr[3:0])
        REG_CTRL_DIV: ctrl_div <= cfg.data[15:0];
        REG_PATN_DIV: patn_div <= cfg.data[15:0];
        default: ;
      endcase
    end
  end

  // ---------------- clocks ----------------
  logic ctrl_stb, patn_stb;
  clk_strobe_gen u_clkgen (.clk, .rst_n, .ctrl_div, .patn_div, .ctrl_stb, .patn_stb);

  // ---------------- trigger synchronizers ----------------
  logic [2:0] s25, sbeam, smeas;
  logic [1:0] smode [2];
  logic [1:0] sab;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s25 <= '0; sbeam <= '0; smeas <= '0; smode[0] <= '0; smode[1] <= '0; sab <= '0;
    end else begin
      s25   <= {s25[1:0], trig_25hz_in};
      sbeam <= {sbeam[1:0], trig_beam_in};
      smeas <= {smeas[1:0], trig_meas_in};
      smode[0] <= mode_in;
      smode[1] <= smode[0];
      sab   <= {sab[0], ab_in};
    end
  end
  logic t25, tbeam, tmeas;
  assign t25   = s25[1]   & ~s25[2];
  assign tbeam = sbeam[1] & ~sbeam[2];
  assign tmeas = smeas[1] & ~smeas[2];

  // ---------------- frequency pattern ----------------
  logic [PAW-1:0] pat_addr;
  pattern_sequencer #(.DEPTH(PAT_DEPTH)) u_seq
    (.clk, .rst_n, .trig_25hz(t25), .patn_stb, .addr(pat_addr));
  freq_t f1;
  pattern_mem #(.DEPTH(PAT_DEPTH), .WIDTH(32)) u_freq_pat
    (.clk, .wr_en(hit && cfg.addr[23:20] == ITEM_FREQ_PAT), .wr_addr(cfg.addr[PAW-1:0]),
     .wr_data(cfg.data), .rd_addr(pat_addr), .rd_data(f1));

  logic [1:0] load_dly;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) load_dly <= '0;
    else        load_dly <= {load_dly[0], patn_stb};
  end
  logic f1_ser;
  f1_serializer u_ser (.clk, .rst_n, .load(load_dly[1]), .f1, .ser(f1_ser));

  // ---------------- backplane bus ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bp <= '0;
    else begin
      bp.trig_25hz <= t25;
      bp.trig_beam <= tbeam;
      bp.trig_meas <= tmeas;
      bp.ctrl_stb  <= ctrl_stb;
      bp.patn_stb  <= patn_stb;
      bp.ab        <= sab[1];
      bp.mode      <= smode[1];
      bp.f1_ser    <= f1_ser;
    end
  end

  // ---------------- downlink: WCM I/Q and phase feedback ----------------
  logic [15:0] dn_blk [FRAME_BLOCKS];
  always_comb begin
    for (int k = 0; k < int'(FRAME_BLOCKS); k++) dn_blk[k] = '0;
    for (int h = 0; h < int'(NHARM); h++) begin
      dn_blk[2*h]     = wcm_iq[h].i;
      dn_blk[2*h + 1] = wcm_iq[h].q;
    end
    dn_blk[2*NHARM] = phase_fb;
  end
  logic [15:0] dn_overrun;
  iq_frame_tx #(.NBLK(FRAME_BLOCKS)) u_dn_tx
    (.clk, .rst_n, .send(ctrl_stb), .blocks(dn_blk), .tx(dn_tx), .overrun_cnt(dn_overrun));

  // ---------------- vector sum reception ----------------
  logic [15:0] vs_blk [FRAME_BLOCKS];
  logic [15:0] vs_seq, vs_len_err, vs_seq_err;
  iq_frame_rx #(.NBLK(FRAME_BLOCKS)) u_vs_rx
    (.clk, .rst_n, .rx(vs_rx), .blocks(vs_blk), .seq(vs_seq), .frame_ok(vsum_valid),
     .len_err_cnt(vs_len_err), .seq_err_cnt(vs_seq_err));
  for (genvar h = 0; h < int'(NHARM); h++) begin : g_vs
    assign vsum[h].i = vs_blk[2*h];
    assign vsum[h].q = vs_blk[2*h+1];
  end
  assign link_err = vs_len_err + vs_seq_err;

  logic unused;
  assign unused = ^{dn_overrun, vs_seq, cfg.addr[27:24], cfg.addr[19:16]};
endmodule
