// pattern_mem: time pattern memory (I/Q voltage setpoint pattern, gain pattern,
// revolution frequency pattern).
//
// One word per pattern clock step of the 25 Hz machine cycle. The host writes
// the pattern (wr_en, wr_addr, wr_data); the pattern sequencer supplies the read
// address. Read is synchronous: rd_data follows rd_addr by one clock. With the
// default DEPTH of 40000 the pattern covers one full 40 ms cycle at the 1 MHz
// pattern clock. The paper keeps its patterns in the board's SDRAM; here they
// are on-chip arrays, which is this design's choice.
module pattern_mem #(
  parameter int unsigned DEPTH = 40_000,
  parameter int unsigned WIDTH = 32
) (
  input  logic                     clk,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end
endmodule
