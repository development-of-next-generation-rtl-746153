// sat_sum: registered sum of N signed 16-bit rf signals, saturated to 16 bits.
//
// Used twice per cavity: as the SUM of the eight harmonic feedback outputs
// (h=1..8) that forms the multiharmonic rf signal, and as the sum of that
// signal with the feedforward driver output in front of the DAC. Saturation
// (rather than wrap-around) on overflow is this design's choice. One clock of
// latency.
module sat_sum #(
  parameter int unsigned N = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  llrf_pkg::sample_t in [N],
  output llrf_pkg::sample_t out
);
  logic signed [47:0] acc;
  always_comb begin
    acc = '0;
    for (int k = 0; k < int'(N); k++) acc = acc + 48'(in[k]);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out <= '0;
    else        out <= llrf_pkg::sat16(acc);
  end
endmodule
