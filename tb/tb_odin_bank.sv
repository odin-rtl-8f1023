// tb_odin_bank: runs every command through one ODIN bank (a small array: 64 rows per
// partition) and checks the results against values computed here:
//   WRITE/READ round trip; B_TO_S writes the table row of each of 32 operands to 32 rows;
//   ANN_MUL gives the AND and ANN_ACC the OR of two rows; S_TO_B gives ReLU(popcount) of 32 rows
//   assembled in one block; ANN_POOL gives the max of each group of four operands of four
//   blocks. It also checks array time: ANN_MUL and ANN_ACC occupy the array for exactly
//   T_RD + T_WR = 108 cycles, B_TO_S for 1 read and 32 writes, S_TO_B for 32 reads and 1 write,
//   ANN_POOL for 4 reads and 1 write.
module tb_odin_bank;
  import odin_pkg::*;
  localparam int unsigned T_RD = 48, T_WR = 60;
  localparam logic [3:0] CP = 4'd15;  // compute partition
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, rsp_ack = 0, arr_busy;
  bank_cmd_t cmd;
  line_t rdata;
  int checks = 0, failures = 0, busy_cyc = 0, cmd_cyc = 0;
  odin_bank #(.ROWS(64)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .done, .rsp_ack,
    .rdata, .lut_wr_en(1'b0), .lut_wr_addr(8'd0), .lut_wr_data('0), .arr_busy);
  always #5 clk = ~clk;
  always @(posedge clk) if (arr_busy) busy_cyc++;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("odin_bank: %s", what); end
  endtask
  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 8; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction
  function automatic laddr_t la(logic [3:0] p, int row, int blk);
    return {p, 12'(row), 5'(blk)};
  endfunction
  task automatic run(cmd_e c, laddr_t a, laddr_t b, laddr_t d, op_t zp, line_t wd);
    @(negedge clk);
    cmd_valid = 1;
    cmd.ctl = decode_cmd(c);
    cmd.args.a = a; cmd.args.b = b; cmd.args.d = d; cmd.args.zp = zp; cmd.args.wdata = wd;
    busy_cyc = 0;
    @(negedge clk);
    cmd_valid = 0;
    cmd_cyc = 1;
    while (!done) begin @(negedge clk); cmd_cyc++; end
    rsp_ack = 1;
    @(negedge clk);
    rsp_ack = 0;
  endtask
  task automatic wr(laddr_t d, line_t l);
    run(CMD_WRITE, '0, '0, d, 8'd0, l);
  endtask
  task automatic rd(laddr_t a, output line_t l);
    run(CMD_READ, a, '0, '0, 8'd0, '0);
    l = rdata;
  endtask

  initial begin
    line_t x, y, got, ops, s_line, expv;
    line_t blocks [4];
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // WRITE / READ
    x = rnd_line();
    wr(la(4'd1, 5, 3), x);
    chk(busy_cyc == T_WR, $sformatf("write array time %0d", busy_cyc));
    rd(la(4'd1, 5, 3), got);
    chk(got == x, "read back");
    chk(busy_cyc == T_RD, "read array time");
    // B_TO_S: 32 operands of block (1,5,3) into CP rows 10..41, block 2
    run(CMD_B_TO_S, la(4'd1, 5, 3), '0, la(CP, 10, 2), 8'd0, '0);
    chk(busy_cyc == T_RD + 32 * T_WR, $sformatf("B_TO_S array time %0d", busy_cyc));
    for (int i = 0; i < 32; i++) begin
      rd(la(CP, 10 + i, 2), got);
      chk(got == sng_row(x[8*i +: 8]), $sformatf("B_TO_S operand %0d", i));
      chk($countones(got) == int'(x[8*i +: 8]), "B_TO_S ones count");
    end
    // ANN_MUL of rows 10 and 11 into row 50; ANN_ACC (OR) into row 51
    run(CMD_ANN_MUL, la(CP, 10, 2), la(CP, 11, 2), la(CP, 50, 2), 8'd0, '0);
    chk(busy_cyc == T_RD + T_WR, $sformatf("ANN_MUL array time %0d", busy_cyc));
    chk(cmd_cyc == T_RD + T_WR + 2, $sformatf("ANN_MUL latency %0d", cmd_cyc));
    rd(la(CP, 50, 2), got);
    chk(got == (sng_row(x[7:0]) & sng_row(x[15:8])), "ANN_MUL result");
    run(CMD_ANN_ACC, la(CP, 12, 2), la(CP, 13, 2), la(CP, 51, 2), 8'd0, '0);
    chk(busy_cyc == T_RD + T_WR, $sformatf("ANN_ACC array time %0d", busy_cyc));
    rd(la(CP, 51, 2), got);
    chk(got == (sng_row(x[23:16]) | sng_row(x[31:24])), "ANN_ACC result");
    // S_TO_B of CP rows 10..41 block 2 with zero point 40 into (2, 7, 0)
    run(CMD_S_TO_B, la(CP, 10, 2), '0, la(4'd2, 7, 0), 8'd40, '0);
    chk(busy_cyc == 32 * T_RD + T_WR, $sformatf("S_TO_B array time %0d", busy_cyc));
    rd(la(4'd2, 7, 0), got);
    for (int j = 0; j < 32; j++) begin
      int v;
      v = int'(x[8*j +: 8]);
      if (v < 40) v = 40;
      chk(int'(got[8*j +: 8]) == v, $sformatf("S_TO_B slot %0d: %0d vs %0d", j, got[8*j +: 8], v));
    end
    // ANN_POOL over four consecutive blocks (3, 1, 30..31) and (3, 2, 0..1): crosses a row
    for (int j = 0; j < 4; j++) begin
      blocks[j] = rnd_line();
      wr(la(4'd3, 1, 30) + laddr_t'(j), blocks[j]);
    end
    run(CMD_ANN_POOL, la(4'd3, 1, 30), '0, la(4'd4, 0, 9), 8'd0, '0);
    chk(busy_cyc == 4 * T_RD + T_WR, $sformatf("ANN_POOL array time %0d", busy_cyc));
    rd(la(4'd4, 0, 9), got);
    for (int j = 0; j < 4; j++)
      for (int k = 0; k < 8; k++) begin
        int m;
        m = 0;
        for (int q = 0; q < 4; q++)
          if (int'(blocks[j][32*k + 8*q +: 8]) > m) m = int'(blocks[j][32*k + 8*q +: 8]);
        chk(int'(got[8*(8*j + k) +: 8]) == m, $sformatf("pool slot %0d: %0d vs %0d (%h)", 8*j + k, got[8*(8*j+k) +: 8], m, blocks[j][32*k +: 32]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
