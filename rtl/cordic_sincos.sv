// cordic_sincos: pipelined CORDIC that turns a phase word into cosine and sine.
//
// This is the sine/cosine source of the I/Q demodulator and modulator of each
// harmonic feedback block and of the I/Q rotator. The phase (2^32 = 2*pi) is cut
// to its top 24 bits. A first stage folds the angle into [-pi/2, pi/2) by
// subtracting pi and remembering to negate the result; ITER rotation stages
// (vectoring towards zero residual angle) follow, each one pipeline register.
// The start vector is pre-scaled by the CORDIC gain 0.60725 so the outputs have
// amplitude 32767 (two guard bits inside). Outputs are rounded and saturated to
// 16 bits.
//
// Timing: a new phase every clock; cos/sin appear LAT = ITER + 2 clocks later.
// The paper names the CORDIC only; iteration count and widths are chosen here.
module cordic_sincos #(
  parameter int unsigned ITER = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  llrf_pkg::phase_t    phase,
  output llrf_pkg::sample_t   cos_o,
  output llrf_pkg::sample_t   sin_o
);
  localparam int unsigned LAT = ITER + 2;
  localparam int W  = 20;                   // datapath width
  localparam int AW = 24;                   // angle width, 2^24 = 2*pi
  localparam logic signed [W-1:0] X0 = 20'sd79591;  // 0.607253 * 32767 * 4

  function automatic logic signed [AW-1:0] atan_tab(input int unsigned i);
    case (i)
      0: atan_tab = 24'sd2097152;  1: atan_tab = 24'sd1238021;
      2: atan_tab = 24'sd654136;   3: atan_tab = 24'sd332050;
      4: atan_tab = 24'sd166669;   5: atan_tab = 24'sd83416;
      6: atan_tab = 24'sd41718;    7: atan_tab = 24'sd20860;
      8: atan_tab = 24'sd10430;    9: atan_tab = 24'sd5215;
      10: atan_tab = 24'sd2608;    11: atan_tab = 24'sd1304;
      12: atan_tab = 24'sd652;     13: atan_tab = 24'sd326;
      14: atan_tab = 24'sd163;     15: atan_tab = 24'sd81;
      default: atan_tab = 24'sd0;
    endcase
  endfunction

  logic signed [W-1:0]  x [0:ITER];
  logic signed [W-1:0]  y [0:ITER];
  logic signed [AW-1:0] z [0:ITER];
  logic                 neg [0:ITER];

  // stage 0: quadrant fold
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; neg[0] <= 1'b0;
    end else begin
      x[0] <= X0;
      y[0] <= '0;
      if (phase[31] ^ phase[30]) begin
        z[0]   <= $signed(phase[31:8] + 24'h800000);
        neg[0] <= 1'b1;
      end else begin
        z[0]   <= $signed(phase[31:8]);
        neg[0] <= 1'b0;
      end
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_stage
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0; neg[i+1] <= 1'b0;
      end else begin
        neg[i+1] <= neg[i];
        if (!z[i][AW-1]) begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
          z[i+1] <= z[i] - atan_tab(i);
        end else begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
          z[i+1] <= z[i] + atan_tab(i);
        end
      end
    end
  end

  function automatic llrf_pkg::sample_t round_out(input logic signed [W-1:0] val, input logic n);
    logic signed [W-1:0] r;
    r = (val + W'(2)) >>> 2;
    if (n) r = -r;
    if (r > 20'sd32767)       round_out = 16'sh7fff;
    else if (r < -20'sd32767) round_out = -16'sh7fff;
    else                      round_out = r[15:0];
  endfunction

  // output stage
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cos_o <= '0; sin_o <= '0;
    end else begin
      cos_o <= round_out(x[ITER], neg[ITER]);
      sin_o <= round_out(y[ITER], neg[ITER]);
    end
  end

endmodule
