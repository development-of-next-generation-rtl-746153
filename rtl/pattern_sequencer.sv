// pattern_sequencer: address counter of the pattern memories.
//
// The 25 Hz trigger starts a machine cycle: the address returns to 0. Each
// pattern clock strobe then advances it by one until DEPTH-1, where it stays
// until the next trigger, so the last pattern value holds. A trigger and a
// strobe in the same clock give address 0. Before the first trigger the address
// stays at 0. The address register changes one clock after the strobe. The paper
// states that patterns are sampled by the pattern clock; restart and hold
// behaviour are this design's.
module pattern_sequencer #(
  parameter int unsigned DEPTH = 40_000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     trig_25hz,
  input  logic                     patn_stb,
  output logic [$clog2(DEPTH)-1:0] addr
);
  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr    <= '0;
      running <= 1'b0;
    end else if (trig_25hz) begin
      addr    <= '0;
      running <= 1'b1;
    end else if (running && patn_stb && addr != ($clog2(DEPTH))'(DEPTH - 1)) begin
      addr <= addr + 1'b1;
    end
  end
endmodule
