// tb_pattern_mem: writes a pattern and reads it back at random addresses with
// one clock of read latency; a smaller depth keeps the run short.
module tb_pattern_mem;
  localparam int D = 1000;
  logic clk = 0, wr_en = 0;
  logic [9:0] wa, ra;
  logic [31:0] wd, rd;
  logic [31:0] model [D];
  int checks = 0, failures = 0;
  pattern_mem #(.DEPTH(D), .WIDTH(32)) dut (.clk, .wr_en, .wr_addr(wa), .wr_data(wd), .rd_addr(ra), .rd_data(rd));
  always #5 clk = ~clk;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ra = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); wr_en = 1; wa = 10'(a); wd = $urandom; model[a] = wd;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk); ra = 10'($urandom_range(0, D - 1));
      @(posedge clk); #1;
      checks++;
      if (rd != model[ra]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
