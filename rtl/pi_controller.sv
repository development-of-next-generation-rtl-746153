// pi_controller: proportional-integral controller for one component (I or Q)
// of a harmonic's complex amplitude.
//
// At each update strobe (the filtered amplitude arriving once per control clock)
// the error e = setpoint - measured is formed, the integral gains Ki*e, and the
// output becomes (Kp*e + integral) / 4096, rounded down and saturated to 16
// bits. Kp and Ki are signed Q4.12 numbers (4096 = 1.0). The integral is clamped
// to the range the output can express, so it cannot wind up while the output is
// saturated. The output register changes one clock after in_valid; out_valid
// marks that clock. The paper gives the PI controller by name; number formats,
// clamping and reset to zero are this design's.
module pi_controller (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  llrf_pkg::sample_t setpoint,
  input  llrf_pkg::sample_t measured,
  input  logic signed [15:0] kp,
  input  logic signed [15:0] ki,
  output llrf_pkg::sample_t out,
  output logic              out_valid
);
  localparam int FRAC = 12;
  localparam logic signed [47:0] IMAX = 48'sd32767 <<< FRAC;
  localparam logic signed [47:0] IMIN = -(48'sd32768 <<< FRAC);

  logic signed [47:0] integ, integ_next, err, sum;

  always_comb begin
    err        = 48'(setpoint) - 48'(measured);
    integ_next = integ + err * 48'(ki);
    if (integ_next > IMAX)      integ_next = IMAX;
    else if (integ_next < IMIN) integ_next = IMIN;
    sum = (err * 48'(kp) + integ_next) >>> FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      integ     <= '0;
      out       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        integ <= integ_next;
        out   <= llrf_pkg::sat16(sum);
      end
    end
  end
endmodule
