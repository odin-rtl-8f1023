// tb_odin_full: one complete layer step on the ODIN channel at its default size (128 banks, each
// 16 partitions x 4096 rows x 8 kb). In banks 0 and 127 at once it uploads 32 activations and
// 32 weights, converts both blocks to stochastic rows of the compute partition (B_TO_S),
// multiplies activation 0 by weight 0 (ANN_MUL), adds two products with a select row
// (ANN_MUL twice, ANN_ACC), converts the 32 activation rows back to binary (S_TO_B, which must
// return the original activations exactly, since row v of the table has v ones) and max-pools
// four uploaded blocks (ANN_POOL). Results are checked against values computed here.
module tb_odin_full;
  import odin_pkg::*;
  localparam logic [3:0] CP = 4'd15;
  logic clk = 0, rst_n = 0, host_valid = 0, host_ready, rsp_valid, rsp_ready = 1, stall;
  cmd_e host_cmd = CMD_READ;
  logic [6:0] host_bank = 0, rsp_bank;
  args_t host_args = '0;
  line_t rsp_rdata;
  logic [127:0] bank_busy;
  int checks = 0, failures = 0;
  line_t last_rsp [128];
  logic got_rsp [128];

  odin_channel dut (.clk, .rst_n, .host_valid, .host_ready, .host_cmd, .host_bank, .host_args,
    .rsp_valid, .rsp_ready, .rsp_bank, .rsp_rdata, .lut_wr_en(1'b0), .lut_wr_addr(8'd0),
    .lut_wr_data('0), .stall, .bank_busy);
  always #5 clk = ~clk;
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    last_rsp[rsp_bank] <= rsp_rdata;
    got_rsp[rsp_bank]  <= 1'b1;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("odin_full: %s", what); end
  endtask
  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 8; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction
  function automatic laddr_t la(logic [3:0] p, int row, int blk);
    return {p, 12'(row), 5'(blk)};
  endfunction
  task automatic issue(cmd_e c, int b, laddr_t a, laddr_t bb, laddr_t d, op_t zp, line_t wd);
    @(negedge clk);
    host_valid = 1; host_cmd = c; host_bank = 7'(b);
    host_args.a = a; host_args.b = bb; host_args.d = d; host_args.zp = zp; host_args.wdata = wd;
    got_rsp[b] = 1'b0;
    #1;
    while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_valid = 0;
  endtask
  task automatic wait_bank(int b);
    while (!got_rsp[b]) @(negedge clk);
  endtask
  task automatic both(cmd_e c, laddr_t a, laddr_t bb, laddr_t d, line_t wd0, line_t wd15);
    issue(c, 0, a, bb, d, 8'd0, wd0);
    issue(c, 127, a, bb, d, 8'd0, wd15);
    wait_bank(0); wait_bank(127);
  endtask
  task automatic rd(int b, laddr_t a, output line_t l);
    issue(CMD_READ, b, a, '0, '0, 8'd0, '0);
    wait_bank(b);
    l = last_rsp[b];
  endtask

  initial begin
    line_t act [2], wgt [2], sel, got, blocks [4];
    int bk [2] = '{0, 127};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 128; i++) got_rsp[i] = 1'b0;
    for (int n = 0; n < 2; n++) begin act[n] = rnd_line(); wgt[n] = rnd_line(); end
    sel = rnd_line();
    both(CMD_WRITE, '0, '0, la(4'd0, 0, 0), act[0], act[1]);
    both(CMD_WRITE, '0, '0, la(4'd0, 4095, 31), wgt[0], wgt[1]);
    both(CMD_WRITE, '0, '0, la(CP, 4000, 0), sel, sel);
    both(CMD_WRITE, '0, '0, la(CP, 4001, 0), ~sel, ~sel);
    both(CMD_B_TO_S, la(4'd0, 0, 0), '0, la(CP, 0, 0), '0, '0);
    both(CMD_B_TO_S, la(4'd0, 4095, 31), '0, la(CP, 32, 0), '0, '0);
    both(CMD_ANN_MUL, la(CP, 0, 0), la(CP, 32, 0), la(CP, 64, 0), '0, '0);
    both(CMD_ANN_MUL, la(CP, 1, 0), la(CP, 33, 0), la(CP, 65, 0), '0, '0);
    both(CMD_ANN_MUL, la(CP, 64, 0), la(CP, 4000, 0), la(CP, 66, 0), '0, '0);
    both(CMD_ANN_MUL, la(CP, 65, 0), la(CP, 4001, 0), la(CP, 67, 0), '0, '0);
    both(CMD_ANN_ACC, la(CP, 66, 0), la(CP, 67, 0), la(CP, 68, 0), '0, '0);
    both(CMD_S_TO_B, la(CP, 0, 0), '0, la(4'd3, 100, 7), '0, '0);
    for (int j = 0; j < 4; j++) both(CMD_WRITE, '0, '0, la(4'd7, 2000, j), wgt[0] ^ act[j % 2],
                                     wgt[0] ^ act[j % 2]);
    for (int j = 0; j < 4; j++) blocks[j] = wgt[0] ^ act[j % 2];
    both(CMD_ANN_POOL, la(4'd7, 2000, 0), '0, la(4'd7, 2001, 0), '0, '0);
    for (int n = 0; n < 2; n++) begin
      line_t p0, p1;
      p0 = sng_row(act[n][7:0]) & sng_row(wgt[n][7:0]);
      p1 = sng_row(act[n][15:8]) & sng_row(wgt[n][15:8]);
      rd(bk[n], la(CP, 64, 0), got);
      chk(got == p0, "ANN_MUL");
      rd(bk[n], la(CP, 68, 0), got);
      chk(got == ((p0 & sel) | (p1 & ~sel)), "ANN_ACC");
      rd(bk[n], la(4'd3, 100, 7), got);
      chk(got == act[n], "S_TO_B of B_TO_S returns the activations");
      rd(bk[n], la(4'd7, 2001, 0), got);
      for (int j = 0; j < 4; j++)
        for (int k = 0; k < 8; k++) begin
          int m;
          m = 0;
          for (int q = 0; q < 4; q++)
            if (int'(blocks[j][32*k + 8*q +: 8]) > m) m = int'(blocks[j][32*k + 8*q +: 8]);
          chk(int'(got[8*(8*j + k) +: 8]) == m, "ANN_POOL");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
