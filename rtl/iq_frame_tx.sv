// iq_frame_tx: frame builder for the backplane port 1 link (Aurora user side).
//
// At each send strobe (the 1 MHz control clock) the NBLK data blocks are
// captured and sent as one frame, one 16-bit word per clock: first a sequence
// number word with sof set, then data block 0 .. NBLK-1, the last with eof set.
// The sequence number counts frames modulo 2^16. For a cavity driver the blocks
// are CAV1_1I, CAV1_1Q, ..., CAV1_8Q, CAV2_1I, ..., CAV2_8Q and eight reserved
// blocks, the order the paper's frame format figure prints. A strobe that
// arrives while a frame is still going out is dropped and counted in
// overrun_cnt. Latency: the sof word leaves one clock after the strobe; a frame
// occupies NBLK+1 clocks.
//
// The Aurora protocol itself (framing symbols, 8b/10b, 2.5 Gbps transceivers)
// is not modelled; this block produces what its user interface carries.
module iq_frame_tx #(
  parameter int unsigned NBLK = 40
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   send,
  input  logic [15:0]            blocks [NBLK],
  output llrf_pkg::link_word_t   tx,
  output logic [15:0]            overrun_cnt
);
  logic [15:0] buf_q [NBLK];
  logic [15:0] seq;
  logic [$clog2(NBLK+1)-1:0] idx;
  logic busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq <= '0; idx <= '0; busy <= 1'b0; tx <= '0; overrun_cnt <= '0;
      for (int k = 0; k < int'(NBLK); k++) buf_q[k] <= '0;
    end else begin
      tx <= '0;
      if (!busy) begin
        if (send) begin
          buf_q <= blocks;
          busy  <= 1'b1;
          idx   <= '0;
          tx    <= '{valid: 1'b1, sof: 1'b1, eof: 1'b0, data: seq};
          seq   <= seq + 1'b1;
        end
      end else begin
        if (send) overrun_cnt <= overrun_cnt + 1'b1;
        tx  <= '{valid: 1'b1, sof: 1'b0, eof: (idx == ($clog2(NBLK+1))'(NBLK - 1)),
                 data: buf_q[idx[$clog2(NBLK)-1:0]]};
        idx <= idx + 1'b1;
        if (idx == ($clog2(NBLK+1))'(NBLK - 1)) busy <= 1'b0;
      end
    end
  end
endmodule
