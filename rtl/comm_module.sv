// comm_module: the high speed serial communication module in the MCH2 slot,
// hub of the port 1 star.
//
// Uplinks from the NDRV cavity driver modules are received (iq_frame_rx); each
// frame holds the rotated I/Q of two cavities for eight harmonics. Once a new
// frame has arrived from every driver enabled in link_mask, the vector sum of
// all 2*NDRV cavities is formed per harmonic and normalized by the host-set
// number of cavities (vector_sum), and sent to the common function module as a
// frame (blocks 0..15: h=1..8 I then Q, rest reserved). The downlink from the
// common function module (WCM I/Q and phase feedback) is forwarded word by word
// to every driver with one register stage.
//
// Registers (cfg addr[31:28] = UNIT_COMM, ITEM_REG): REG_NCAV (default 12),
// REG_LINK_MASK (bit d enables driver d, default all).
// Timing: the vector sum frame starts 4 clocks after the last awaited uplink
// frame completes. Links that are not enabled still contribute their last
// received values (zero if none arrived). The paper gives the star topology and
// the function (sum, normalize, distribute); the collection rule and frame
// layout are this design's.
module comm_module #(
  parameter int unsigned NDRV  = 6,
  parameter int unsigned NHARM = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  llrf_pkg::cfg_wr_t    cfg,
  input  llrf_pkg::link_word_t up_rx [NDRV],
  output llrf_pkg::link_word_t dn_tx [NDRV],
  input  llrf_pkg::link_word_t cf_rx,
  output llrf_pkg::link_word_t cf_tx,
  output logic [15:0]          link_err,
  output logic [15:0]          vsum_cnt
);
  import llrf_pkg::*;
  localparam int unsigned NC = 2 * NDRV;

  // ---------------- registers ----------------
  logic [3:0]      ncav;
  logic [NDRV-1:0] link_mask;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ncav <= 4'(NC); link_mask <= '1;
    end else if (cfg.we && cfg.addr[31:28] == UNIT_COMM && cfg.addr[23:20] == ITEM_REG) begin
      case (cfg.addr[3:0])
        REG_NCAV:      ncav      <= cfg.data[3:0];
        REG_LINK_MASK: link_mask <= cfg.data[NDRV-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- uplink receivers ----------------
  logic [15:0]     blk [NDRV][FRAME_BLOCKS];
  logic [15:0]     seq [NDRV];
  logic [15:0]     len_err [NDRV];
  logic [15:0]     seq_err [NDRV];
  logic [NDRV-1:0] ok, got;
  for (genvar d = 0; d < int'(NDRV); d++) begin : g_rx
    iq_frame_rx #(.NBLK(FRAME_BLOCKS)) u_rx
      (.clk, .rst_n, .rx(up_rx[d]), .blocks(blk[d]), .seq(seq[d]), .frame_ok(ok[d]),
       .len_err_cnt(len_err[d]), .seq_err_cnt(seq_err[d]));
  end

  always_comb begin
    link_err = '0;
    for (int d = 0; d < int'(NDRV); d++) link_err = link_err + len_err[d] + seq_err[d];
  end

  // Wait for a frame from every enabled link, then start the sum.
  logic all_in, vs_go;
  assign all_in = ((got | ok) & link_mask) == link_mask;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0; vs_go <= 1'b0;
    end else begin
      vs_go <= 1'b0;
      if (|ok && all_in) begin
        got   <= '0;
        vs_go <= 1'b1;
      end else begin
        got <= got | ok;
      end
    end
  end

  // ---------------- vector sum ----------------
  iq_t cav_iq [NC][NHARM];
  always_comb begin
    for (int d = 0; d < int'(NDRV); d++)
      for (int c = 0; c < 2; c++)
        for (int h = 0; h < int'(NHARM); h++) begin
          // drivers left out of link_mask do not contribute to the sum
          cav_iq[2*d+c][h].i = link_mask[d] ? blk[d][c*2*NHARM + 2*h] : '0;
          cav_iq[2*d+c][h].q = link_mask[d] ? blk[d][c*2*NHARM + 2*h + 1] : '0;
        end
  end

  iq_t  vsum [NHARM];
  logic vs_valid;
  vector_sum #(.NCAV(NC), .NHARM(NHARM)) u_vs
    (.clk, .rst_n, .in_valid(vs_go), .cav_iq, .ncav, .vsum, .out_valid(vs_valid));

  logic [15:0] vs_blk [FRAME_BLOCKS];
  always_comb begin
    for (int k = 0; k < int'(FRAME_BLOCKS); k++) vs_blk[k] = '0;
    for (int h = 0; h < int'(NHARM); h++) begin
      vs_blk[2*h]     = vsum[h].i;
      vs_blk[2*h + 1] = vsum[h].q;
    end
  end

  logic [15:0] vs_overrun;
  iq_frame_tx #(.NBLK(FRAME_BLOCKS)) u_vs_tx
    (.clk, .rst_n, .send(vs_valid), .blocks(vs_blk), .tx(cf_tx), .overrun_cnt(vs_overrun));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vsum_cnt <= '0;
    else if (vs_valid) vsum_cnt <= vsum_cnt + 1'b1;
  end

  // ---------------- downlink distribution ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < int'(NDRV); d++) dn_tx[d] <= '0;
    end else begin
      for (int d = 0; d < int'(NDRV); d++) dn_tx[d] <= cf_rx;
    end
  end

  logic unused;
  assign unused = ^{seq[0], vs_overrun, cfg.addr[27:24], cfg.addr[19:4]};
endmodule
