// iq_frame_rx: frame receiver for the backplane port 1 link (Aurora user side).
//
// A frame starts with a sof word carrying the sequence number and ends with the
// eof word after NBLK data blocks. Blocks are collected in a buffer and moved
// to the outputs in one step when a frame of exactly NBLK blocks ends; frame_ok
// pulses in the clock after the eof word. A frame of the wrong length is
// discarded and counted in len_err_cnt; a sequence number that does not follow
// the previous good frame's is counted in seq_err_cnt (the frame is still
// used). Outputs are zero after reset and hold between frames. The checks are
// this design's; the paper reports only that no errors were seen.
module iq_frame_rx #(
  parameter int unsigned NBLK = 40
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  llrf_pkg::link_word_t rx,
  output logic [15:0]          blocks [NBLK],
  output logic [15:0]          seq,
  output logic                 frame_ok,
  output logic [15:0]          len_err_cnt,
  output logic [15:0]          seq_err_cnt
);
  logic [15:0] buf_q [NBLK];
  logic [15:0] seq_cur;
  logic [$clog2(NBLK+1)-1:0] idx;
  logic in_frame, have_prev;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq <= '0; seq_cur <= '0; idx <= '0; in_frame <= 1'b0; have_prev <= 1'b0;
      frame_ok <= 1'b0; len_err_cnt <= '0; seq_err_cnt <= '0;
      for (int k = 0; k < int'(NBLK); k++) begin
        buf_q[k] <= '0; blocks[k] <= '0;
      end
    end else begin
      frame_ok <= 1'b0;
      if (rx.valid) begin
        if (rx.sof) begin
          if (in_frame) len_err_cnt <= len_err_cnt + 1'b1;  // frame cut short
          in_frame <= 1'b1;
          seq_cur  <= rx.data;
          idx      <= '0;
        end else if (in_frame) begin
          if (idx < ($clog2(NBLK+1))'(NBLK)) buf_q[idx[$clog2(NBLK)-1:0]] <= rx.data;
          idx <= idx + 1'b1;
          if (rx.eof) begin
            in_frame <= 1'b0;
            if (idx == ($clog2(NBLK+1))'(NBLK - 1)) begin
              for (int k = 0; k < int'(NBLK) - 1; k++) blocks[k] <= buf_q[k];
              blocks[NBLK-1] <= rx.data;
              seq       <= seq_cur;
              frame_ok  <= 1'b1;
              have_prev <= 1'b1;
              if (have_prev && seq_cur != seq + 1'b1) seq_err_cnt <= seq_err_cnt + 1'b1;
            end else begin
              len_err_cnt <= len_err_cnt + 1'b1;
            end
          end else if (idx >= ($clog2(NBLK+1))'(NBLK - 1)) begin
            in_frame    <= 1'b0;                             // too long
            len_err_cnt <= len_err_cnt + 1'b1;
          end
        end
      end
    end
  end
endmodule
