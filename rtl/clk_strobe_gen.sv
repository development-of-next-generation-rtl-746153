// clk_strobe_gen: the control clock and pattern clock generator of the common
// function module.
//
// Two independent counters divide the 144 MHz system clock by ctrl_div and
// patn_div; each emits a one-clock strobe when it wraps. Both divisors default
// to 144 (1 MHz), the setting the paper uses, and can be changed by the host. A
// divisor below 2 is treated as 2. A new divisor applies from the next wrap.
// The paper states that the two frequencies are set independently; carrying the
// clocks as strobes in the system clock domain is this design's choice.
module clk_strobe_gen (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] ctrl_div,
  input  logic [15:0] patn_div,
  output logic        ctrl_stb,
  output logic        patn_stb
);
  logic [15:0] ccnt, pcnt;
  logic [15:0] cdiv, pdiv;
  assign cdiv = (ctrl_div < 16'd2) ? 16'd2 : ctrl_div;
  assign pdiv = (patn_div < 16'd2) ? 16'd2 : patn_div;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ccnt <= '0; pcnt <= '0; ctrl_stb <= 1'b0; patn_stb <= 1'b0;
    end else begin
      ctrl_stb <= (ccnt >= cdiv - 16'd1);
      patn_stb <= (pcnt >= pdiv - 16'd1);
      ccnt <= (ccnt >= cdiv - 16'd1) ? 16'd0 : ccnt + 16'd1;
      pcnt <= (pcnt >= pdiv - 16'd1) ? 16'd0 : pcnt + 16'd1;
    end
  end
endmodule
