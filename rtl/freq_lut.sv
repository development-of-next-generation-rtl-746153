// freq_lut: frequency-addressed look-up table, used as the phase offset LUT and
// as the gain LUT of a harmonic feedback block.
//
// The harmonic's frequency word addresses the table: bits [LSB+ABITS-1:LSB] give
// the index, and any frequency above the table's range reads the last entry.
// With the defaults (ABITS = 10, LSB = 18) the table covers 0..9 MHz of a
// 144 MHz clock in 1024 steps of 8.79 kHz, which spans h=1..8 of the 0.61-0.84
// MHz revolution frequency. Contents are written by the host (wr_en, wr_addr,
// wr_data). Read is synchronous: data for freq appears one clock later.
// The paper states what the two LUTs do and that frequency addresses them; the
// size, the address slice and the saturation are this design's.
module freq_lut #(
  parameter int unsigned ABITS = 10,
  parameter int unsigned LSB   = 18,
  parameter int unsigned WIDTH = 16
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [ABITS-1:0] wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  llrf_pkg::freq_t  freq,
  output logic [WIDTH-1:0] rd_data
);
  logic [WIDTH-1:0] mem [2**ABITS];
  logic [ABITS-1:0] ra;

  always_comb begin
    if (|(freq >> (LSB + ABITS))) ra = '1;
    else                          ra = freq[LSB +: ABITS];
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[ra];
  end
endmodule
