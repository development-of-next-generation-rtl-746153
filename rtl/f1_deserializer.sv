// f1_deserializer: receives the serialized 32-bit revolution frequency word in a
// cavity driver module.
//
// Waits for the start bit, shifts in 32 data bits MSB first, then updates the
// frequency output in one step and pulses f1_valid. The output keeps its value
// between frames and is zero after reset. The word is valid 33 clocks after the
// start bit arrives. Line code as in f1_serializer (this design's choice).
module f1_deserializer (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            ser,
  output llrf_pkg::freq_t f1,
  output logic            f1_valid
);
  logic [31:0] sh;
  logic [5:0]  cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; cnt <= '0; f1 <= '0; f1_valid <= 1'b0;
    end else begin
      f1_valid <= 1'b0;
      if (cnt == 0) begin
        if (ser) cnt <= 6'd32;
      end else begin
        sh  <= {sh[30:0], ser};
        cnt <= cnt - 1'b1;
        if (cnt == 6'd1) begin
          f1       <= {sh[30:0], ser};
          f1_valid <= 1'b1;
        end
      end
    end
  end
endmodule
