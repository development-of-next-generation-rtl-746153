// phase_accumulator: builds the revolution (h=1) phase signal from the
// 32-bit revolution frequency word.
//
// Every 144 MHz clock the phase advances by the frequency word, so a word F
// gives F/2^32 * 144 MHz revolutions per second. The phase is read as a signed
// number, -2^31..2^31-1 standing for -pi..pi, as the paper describes. The
// accumulator starts from zero at reset; all driver modules are reset together
// and receive the same frequency word at the same clock, which keeps their
// phases identical. Output is registered: phase(n+1) = phase(n) + freq(n).
module phase_accumulator (
  input  logic             clk,
  input  logic             rst_n,
  input  llrf_pkg::freq_t  freq,
  output llrf_pkg::phase_t phase
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + freq;
  end
endmodule
