// vector_sum: vector sum of the rotated cavity I/Q amplitudes, per harmonic,
// normalized by the number of cavities.
//
// For every harmonic h the I parts of all NCAV cavities are added, and so are
// the Q parts; the sums are then divided by ncav (1..15, 0 is read as 1), the
// divisor being the host-set "number of cavities". The division is a multiply
// by round(2^24/ncav) and a rounding shift by 24; the result is saturated to
// 16 bits. Sum of 20000 normalized by 2 gives 10000. Two clocks from in_valid to
// out_valid. The paper gives the function (sum, normalize by the number of
// cavities); the arithmetic is this design's.
module vector_sum #(
  parameter int unsigned NCAV  = 12,
  parameter int unsigned NHARM = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  llrf_pkg::iq_t cav_iq [NCAV][NHARM],
  input  logic [3:0]    ncav,
  output llrf_pkg::iq_t vsum [NHARM],
  output logic          out_valid
);
  function automatic logic [24:0] recip(input logic [3:0] n);
    logic [24:0] d;
    d = (n == 4'd0) ? 25'd1 : {21'd0, n};
    recip = (25'd16777216 + (d >> 1)) / d;
  endfunction

  logic signed [31:0] si [NHARM];
  logic signed [31:0] sq [NHARM];
  logic signed [31:0] acc_i [NHARM];
  logic signed [31:0] acc_q [NHARM];
  logic [24:0] rcp;
  logic v1;

  always_comb begin
    for (int h = 0; h < int'(NHARM); h++) begin
      acc_i[h] = '0;
      acc_q[h] = '0;
      for (int c = 0; c < int'(NCAV); c++) begin
        acc_i[h] = acc_i[h] + 32'(cav_iq[c][h].i);
        acc_q[h] = acc_q[h] + 32'(cav_iq[c][h].q);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0; rcp <= 25'd16777216;
      for (int h = 0; h < int'(NHARM); h++) begin
        si[h] <= '0; sq[h] <= '0; vsum[h] <= '0;
      end
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) begin
        si  <= acc_i;
        sq  <= acc_q;
        rcp <= recip(ncav);
      end
      if (v1) begin
        for (int h = 0; h < int'(NHARM); h++) begin
          vsum[h].i <= llrf_pkg::sat16(48'((64'(si[h]) * $signed({39'd0, rcp}) + 64'sd8388608) >>> 24));
          vsum[h].q <= llrf_pkg::sat16(48'((64'(sq[h]) * $signed({39'd0, rcp}) + 64'sd8388608) >>> 24));
        end
      end
    end
  end
endmodule
