// iq_rotator: rotates a cavity's complex amplitude by the angle of the cavity's
// position in the ring and scales it by an optional gain, before it is sent for
// the vector sum.
//
//   I' = g * (I*cos(a) - Q*sin(a)),   Q' = g * (I*sin(a) + Q*cos(a))
//
// The angle a is a 16-bit phase (65536 = 360 degrees); cos/sin come from a
// CORDIC, so a new angle takes effect after its latency (18 clocks). The gain g
// is Q2.14 (16384 = 1.0). Products are rounded and the result saturated to
// 16 bits. Two clocks from in to out. Rotating (20000, 0) by -45 degrees gives
// (14142, -14142), by +90 degrees (0, 20000). The paper specifies rotation and
// gain; the formats and the use of a CORDIC are this design's.
module iq_rotator (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [15:0]       angle,
  input  llrf_pkg::gain_t   gain,
  input  llrf_pkg::iq_t     in,
  output llrf_pkg::iq_t     out
);
  llrf_pkg::sample_t c, s;
  cordic_sincos u_cordic (.clk, .rst_n, .phase({angle, 16'd0}), .cos_o(c), .sin_o(s));

  llrf_pkg::iq_t      rot;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rot <= '0;
      out <= '0;
    end else begin
      rot.i <= llrf_pkg::sat16((48'(in.i) * 48'(c) - 48'(in.q) * 48'(s) + 48'sd16384) >>> 15);
      rot.q <= llrf_pkg::sat16((48'(in.i) * 48'(s) + 48'(in.q) * 48'(c) + 48'sd16384) >>> 15);
      out.i <= llrf_pkg::sat16((48'(rot.i) * $signed({32'd0, gain}) + 48'sd8192) >>> 14);
      out.q <= llrf_pkg::sat16((48'(rot.q) * $signed({32'd0, gain}) + 48'sd8192) >>> 14);
    end
  end
endmodule
