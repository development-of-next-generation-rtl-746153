// cic_decimator: narrow-band CIC low pass filter and decimator.
//
// Follows each I/Q demodulator multiplier. N integrators run at the 144 MHz
// sample rate; at every decimation strobe (the 1 MHz control clock) the last
// integrator is sampled and passed through N comb sections, which run at the
// strobe rate. The CIC has gain R^N, which is removed by multiplying with
// round(2^S / R^N) and shifting right by S, so a constant input x leaves the
// filter as x. Output is rounded and saturated to 16 bits. The frequency
// response has zeros at multiples of 144 MHz / R, i.e. at every multiple of
// 1 MHz for R = 144, so the 2*f_h products of demodulation are suppressed.
//
// Interface: in_data every clock, dec_stb one cycle every R clocks (the
// normalization assumes the strobe period equals R). out_valid pulses 2 clocks
// after dec_stb with the new out_data. The paper names a narrow band CIC as the
// LPF; order N = 3 and the normalization are this design's choice.
module cic_decimator #(
  parameter int unsigned IN_W = 18,
  parameter int unsigned R    = 144,
  parameter int unsigned N    = 3
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic signed [IN_W-1:0] in_data,
  input  logic                   dec_stb,
  output llrf_pkg::sample_t      out_data,
  output logic                   out_valid
);
  localparam int unsigned ACC_W = IN_W + N * $clog2(R);

  function automatic longint unsigned pow_rn();
    longint unsigned p = 1;
    for (int k = 0; k < int'(N); k++) p = p * R;
    return p;
  endfunction
  localparam longint unsigned RN = pow_rn();
  localparam int unsigned NORM_S = $clog2(RN) + 16;
  localparam longint unsigned NORM_MUL = ((64'd1 << NORM_S) + RN / 2) / RN;

  logic signed [ACC_W-1:0] integ [N];
  logic signed [ACC_W-1:0] comb_d [N];   // delayed comb inputs
  logic signed [ACC_W-1:0] comb_out;
  logic                    stage1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N); k++) integ[k] <= '0;
    end else begin
      integ[0] <= integ[0] + ACC_W'(in_data);
      for (int k = 1; k < int'(N); k++) integ[k] <= integ[k] + integ[k-1];
    end
  end

  // comb sections, evaluated once per strobe
  logic signed [ACC_W-1:0] c [N+1];
  always_comb begin
    c[0] = integ[N-1];
    for (int k = 0; k < int'(N); k++) c[k+1] = c[k] - comb_d[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N); k++) comb_d[k] <= '0;
      comb_out <= '0;
      stage1   <= 1'b0;
    end else begin
      stage1 <= dec_stb;
      if (dec_stb) begin
        for (int k = 0; k < int'(N); k++) comb_d[k] <= c[k];
        comb_out <= c[N];
      end
    end
  end

  // gain normalization with rounding
  logic signed [63:0] prod;
  always_comb prod = (64'(comb_out) * $signed({1'b0, NORM_MUL[62:0]}) + (64'sd1 <<< (NORM_S - 1))) >>> NORM_S;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_data  <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= stage1;
      if (stage1) out_data <= llrf_pkg::sat16(prod[47:0]);
    end
  end

endmodule
