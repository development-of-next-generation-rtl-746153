// f1_serializer: sends the 32-bit revolution frequency word over one backplane
// line.
//
// At each load strobe (the control clock) the current word is captured and sent
// as a start bit (1) followed by the 32 data bits, MSB first, one bit per
// 144 MHz clock; the line is 0 when idle. A frame takes 33 clocks, well within
// the 144 clocks of a control period; a load during a frame is ignored. The
// paper states that the word is serialized and distributed; the line code is
// this design's.
module f1_serializer (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  llrf_pkg::freq_t f1,
  output logic            ser
);
  logic [32:0] sh;
  logic [5:0]  cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh <= '0; cnt <= '0; ser <= 1'b0;
    end else begin
      if (cnt == 0) begin
        ser <= 1'b0;
        if (load) begin
          sh  <= {1'b1, f1};
          cnt <= 6'd33;
        end
      end else begin
        ser <= sh[32];
        sh  <= {sh[31:0], 1'b0};
        cnt <= cnt - 1'b1;
      end
    end
  end
endmodule
