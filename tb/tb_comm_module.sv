// tb_comm_module: six uplinks built by frame builders. Reproduces the vector
// sum test (one cavity at (20000, 0), normalized by 1 and by 2), then random
// data on all twelve cavities against a reference sum, and checks that the
// downlink from the common function module reaches every driver one clock later.
module tb_comm_module;
  import llrf_pkg::*;
  localparam int ND = 6, NB = 40;
  logic clk = 0, rst_n = 0;
  cfg_wr_t cfg;
  link_word_t up [ND];
  link_word_t dn [ND];
  link_word_t cf_rx, cf_tx;
  logic [15:0] lerr, vcnt;
  logic send [ND];
  logic [15:0] blk [ND][NB];
  logic [15:0] ovr [ND];
  logic [15:0] vs_blk [NB];
  logic [15:0] vs_seq, vs_le, vs_se;
  logic vs_ok;
  logic dsend = 0;
  logic [15:0] dblk [NB];
  logic [15:0] dovr;
  int checks = 0, failures = 0;

  comm_module #(.NDRV(ND)) dut (.clk, .rst_n, .cfg, .up_rx(up), .dn_tx(dn), .cf_rx, .cf_tx,
                                .link_err(lerr), .vsum_cnt(vcnt));
  for (genvar d = 0; d < ND; d++) begin : g_tx
    iq_frame_tx #(.NBLK(NB)) u_tx (.clk, .rst_n, .send(send[d]), .blocks(blk[d]), .tx(up[d]), .overrun_cnt(ovr[d]));
  end
  iq_frame_rx #(.NBLK(NB)) u_rx (.clk, .rst_n, .rx(cf_tx), .blocks(vs_blk), .seq(vs_seq), .frame_ok(vs_ok),
                                 .len_err_cnt(vs_le), .seq_err_cnt(vs_se));
  iq_frame_tx #(.NBLK(NB)) u_dtx (.clk, .rst_n, .send(dsend), .blocks(dblk), .tx(cf_rx), .overrun_cnt(dovr));

  always #5 clk = ~clk;
  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // downlink forwarding check
  link_word_t cf_d;
  always @(posedge clk) begin
    cf_d <= cf_rx;
    if (rst_n && cf_d.valid) for (int d = 0; d < ND; d++) begin
      checks++; if (dn[d] != cf_d) failures++;
    end
  end

  task automatic wr(input logic [3:0] r, input logic [31:0] v);
    @(negedge clk); cfg = '{we: 1'b1, addr: {UNIT_COMM, 4'd0, ITEM_REG, 16'd0, r}, data: v};
    @(negedge clk); cfg = '0;
  endtask

  task automatic round_trip(input int mask);
    @(negedge clk);
    for (int d = 0; d < ND; d++) send[d] = mask[d];
    @(negedge clk);
    for (int d = 0; d < ND; d++) send[d] = 0;
    @(posedge vs_ok); #1;
  endtask

  initial begin
    cfg = '0;
    for (int d = 0; d < ND; d++) begin send[d] = 0; for (int k = 0; k < NB; k++) blk[d][k] = 0; end
    for (int k = 0; k < NB; k++) dblk[k] = 16'($urandom);
    repeat (3) @(posedge clk); rst_n = 1;
    // paper test: only driver 1 (cavities 1,2) present
    wr(REG_LINK_MASK, 1);
    wr(REG_NCAV, 1);
    blk[0][0] = 16'd20000;
    round_trip(1);
    checks++; if (vs_blk[0] != 16'd20000 || vs_blk[1] != 0) begin failures++; $display("norm 1: %0d %0d", vs_blk[0], vs_blk[1]); end
    wr(REG_NCAV, 2);
    round_trip(1);
    checks++; if (vs_blk[0] != 16'd10000 || vs_blk[1] != 0) begin failures++; $display("norm 2: %0d %0d", vs_blk[0], vs_blk[1]); end
    // all twelve cavities
    wr(REG_LINK_MASK, 6'h3f);
    wr(REG_NCAV, 12);
    for (int n = 0; n < 20; n++) begin
      int si [16];
      for (int k = 0; k < 16; k++) si[k] = 0;
      for (int d = 0; d < ND; d++) for (int k = 0; k < 32; k++) begin
        blk[d][k] = 16'($urandom_range(0, 20000)) - 16'd10000;
        si[k % 16] += int'($signed(blk[d][k]));
      end
      // links arrive at different times; the sum waits for all six
      @(negedge clk); send[0] = 1; send[3] = 1; @(negedge clk); send[0] = 0; send[3] = 0;
      repeat (7) @(negedge clk);
      checks++; if (vs_ok) failures++;
      send[1] = 1; send[2] = 1; send[4] = 1; send[5] = 1; dsend = (n % 2 == 0);
      @(negedge clk); send[1] = 0; send[2] = 0; send[4] = 0; send[5] = 0; dsend = 0;
      @(posedge vs_ok); #1;
      for (int k = 0; k < 16; k++) begin
        int e, g;
        e = $rtoi($floor($itor(si[k]) / 12.0 + 0.5));
        g = int'($signed(vs_blk[k]));
        checks++;
        if (g - e > 1 || e - g > 1) begin failures++; if (failures < 10) $display("blk %0d got %0d exp %0d", k, g, e); end
      end
    end
    checks++; if (lerr != 0 || vs_le != 0 || vs_se != 0) failures++;
    checks++; if (vcnt != 22) begin failures++; $display("vsum count %0d", vcnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
