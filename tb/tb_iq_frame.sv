// tb_iq_frame: frame builder and receiver back to back. Checks the frame
// layout (sof on the sequence word, 40 data blocks, eof on the last, 41 clocks),
// the delivered blocks and sequence numbers, the overrun counter, and that a
// shortened frame and a sequence gap are counted as errors.
module tb_iq_frame;
  import llrf_pkg::*;
  localparam int NB = 40;
  logic clk = 0, rst_n = 0, send = 0;
  logic [15:0] tx_blk [NB];
  logic [15:0] rx_blk [NB];
  logic [15:0] seq, ovr, lerr, serr;
  logic ok;
  link_word_t tx, line;
  logic drop = 0;
  int checks = 0, failures = 0;
  iq_frame_tx #(.NBLK(NB)) u_tx (.clk, .rst_n, .send, .blocks(tx_blk), .tx, .overrun_cnt(ovr));
  iq_frame_rx #(.NBLK(NB)) u_rx (.clk, .rst_n, .rx(line), .blocks(rx_blk), .seq, .frame_ok(ok),
                                 .len_err_cnt(lerr), .seq_err_cnt(serr));
  always #5 clk = ~clk;
  // the line can drop one data word to make a short frame
  always_comb begin
    line = tx;
    if (drop && tx.valid && !tx.sof && !tx.eof) line.valid = 1'b0;
  end
  int words = 0, sofs = 0, eofs = 0;
  always @(posedge clk) if (tx.valid) begin
    words++; if (tx.sof) sofs++; if (tx.eof) eofs++;
  end
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic frame(input logic [15:0] expseq);
    logic [15:0] sent [NB];
    int w0;
    @(negedge clk);
    for (int k = 0; k < NB; k++) begin tx_blk[k] = 16'($urandom); sent[k] = tx_blk[k]; end
    send = 1; w0 = words;
    @(negedge clk); send = 0;
    for (int k = 0; k < NB; k++) tx_blk[k] = '0;
    @(posedge ok); #1;
    checks++; if (words - w0 != NB + 1) begin failures++; $display("words %0d", words - w0); end
    checks++; if (seq != expseq) begin failures++; $display("seq %0d exp %0d", seq, expseq); end
    for (int k = 0; k < NB; k++) begin
      checks++; if (rx_blk[k] != sent[k]) failures++;
    end
  endtask
  initial begin
    for (int k = 0; k < NB; k++) tx_blk[k] = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 20; n++) frame(16'(n));
    checks++; if (sofs != 20 || eofs != 20) failures++;
    checks++; if (lerr != 0 || serr != 0) failures++;
    // short frame: one data word lost
    drop = 1;
    @(negedge clk); send = 1; @(negedge clk); send = 0;
    repeat (60) @(posedge clk);
    drop = 0;
    checks++; if (lerr != 1) begin failures++; $display("lerr %0d", lerr); end
    // the next good frame has skipped a sequence number
    frame(16'd21);
    checks++; if (serr != 1) begin failures++; $display("serr %0d", serr); end
    // overrun: strobe while busy
    @(negedge clk); send = 1; @(negedge clk); send = 0; repeat (5) @(negedge clk); send = 1; @(negedge clk); send = 0;
    repeat (60) @(posedge clk);
    checks++; if (ovr != 1) begin failures++; $display("ovr %0d", ovr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
