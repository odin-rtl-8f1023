// tb_odin_channel: end-to-end test of the ODIN channel (two banks, 128 rows per partition).
// It runs a small neural-network step the way a host would and checks every result:
//   1. WRITE activations and weights (32 each) to banks 0 and 1, plus the select rows S and
//      S' = not S of the scaled adder (a fresh random pair per accumulation step), and reads
//      one back;
//   2. B_TO_S of activations and of weights, in both banks at the same time;
//   3. ANN_MUL of activation i and weight i for i = 0..3 (products p_i);
//   4. scaled addition acc = (acc.S) OR (p_i.S'), using ANN_MUL twice and ANN_ACC once, and
//      checks the stochastic sum against a*w arithmetic within a tolerance;
//   5. S_TO_B of 32 rows (one of them all ones, so the 8-bit pop counter saturates) with a
//      nonzero ReLU zero point, checked against pop counts of the rows read back;
//   6. ANN_POOL of four blocks, checked against the maximum of each group of four;
//   7. a lookup-table row rewritten through the table port, used by a B_TO_S.
// It counts each mechanism (stall on a busy bank, banks busy in parallel, every command kind,
// pop-counter saturation, ReLU clamping, table rewrite) and fails a mechanism never seen.
module tb_odin_channel;
  import odin_pkg::*;
  localparam int NB = 2;
  localparam logic [3:0] CP = 4'd15;
  logic clk = 0, rst_n = 0, host_valid = 0, host_ready, rsp_valid, rsp_ready = 1, stall;
  cmd_e host_cmd = CMD_READ;
  logic [0:0] host_bank = 0, rsp_bank;
  args_t host_args = '0;
  line_t rsp_rdata, lut_wr_data = '0;
  logic lut_wr_en = 0;
  op_t lut_wr_addr = 0;
  logic [NB-1:0] bank_busy;
  int checks = 0, failures = 0;
  int n_stall = 0, n_parallel = 0, n_sat = 0, n_clamp = 0, n_lutwr = 0;
  int n_cmd [7];
  line_t last_rsp [NB];
  logic got_rsp [NB];

  odin_channel #(.NUM_BANKS(NB), .ROWS(128)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (stall) n_stall++;
    if ($countones(bank_busy) >= 2) n_parallel++;
    if (rsp_valid && rsp_ready) begin
      last_rsp[rsp_bank] <= rsp_rdata;
      got_rsp[rsp_bank]  <= 1'b1;
    end
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("odin_channel: %s", what); end
  endtask
  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 8; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction
  function automatic laddr_t la(logic [3:0] p, int row, int blk);
    return {p, 12'(row), 5'(blk)};
  endfunction
  // Issue a command (waits while the port stalls); does not wait for completion.
  task automatic issue(cmd_e c, int b, laddr_t a, laddr_t bb, laddr_t d, op_t zp, line_t wd);
    @(negedge clk);
    host_valid = 1; host_cmd = c; host_bank = 1'(b);
    host_args.a = a; host_args.b = bb; host_args.d = d; host_args.zp = zp; host_args.wdata = wd;
    got_rsp[b] = 1'b0;
    #1;
    while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_valid = 0;
    n_cmd[int'(c)]++;
  endtask
  task automatic wait_bank(int b);
    while (!got_rsp[b]) @(negedge clk);
  endtask
  task automatic exec(cmd_e c, int b, laddr_t a, laddr_t bb, laddr_t d, op_t zp, line_t wd);
    issue(c, b, a, bb, d, zp, wd);
    wait_bank(b);
  endtask
  task automatic rd(int b, laddr_t a, output line_t l);
    exec(CMD_READ, b, a, '0, '0, 8'd0, '0);
    l = last_rsp[b];
  endtask

  initial begin
    line_t act [NB], wgt [NB], s_sel [4], got, acc_line;
    line_t rows [32];
    line_t blocks [4];
    int est, exact2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NB; i++) begin got_rsp[i] = 1'b0; end
    for (int i = 0; i < 7; i++) n_cmd[i] = 0;
    // 1. upload
    for (int b = 0; b < NB; b++) begin
      act[b] = rnd_line(); wgt[b] = rnd_line();
      exec(CMD_WRITE, b, '0, '0, la(4'd0, 1, 0), 8'd0, act[b]);
      exec(CMD_WRITE, b, '0, '0, la(4'd0, 2, 0), 8'd0, wgt[b]);
    end
    // one pair S_i, S'_i per accumulation step, so the accumulator is not correlated with S
    for (int i = 1; i < 4; i++) begin
      s_sel[i] = rnd_line();
      exec(CMD_WRITE, 0, '0, '0, la(CP, 100 + 2 * i, 0), 8'd0, s_sel[i]);
      exec(CMD_WRITE, 0, '0, '0, la(CP, 101 + 2 * i, 0), 8'd0, ~s_sel[i]);
    end
    rd(1, la(4'd0, 2, 0), got);
    chk(got == wgt[1], "upload read back");
    // 2. B_TO_S in both banks in parallel, then a second one to bank 0 (stalls)
    issue(CMD_B_TO_S, 0, la(4'd0, 1, 0), '0, la(CP, 0, 0), 8'd0, '0);
    issue(CMD_B_TO_S, 1, la(4'd0, 1, 0), '0, la(CP, 0, 0), 8'd0, '0);
    issue(CMD_B_TO_S, 0, la(4'd0, 2, 0), '0, la(CP, 32, 0), 8'd0, '0);
    wait_bank(0); wait_bank(1);
    issue(CMD_B_TO_S, 1, la(4'd0, 2, 0), '0, la(CP, 32, 0), 8'd0, '0);
    wait_bank(1);
    for (int i = 0; i < 4; i++) begin
      rd(0, la(CP, 32 + i, 0), got);
      chk(got == sng_row(wgt[0][8*i +: 8]), "B_TO_S weight row");
    end
    // 3-4. products and stochastic sum in bank 0: acc = p0; acc = acc.S | p_i.S'
    for (int i = 0; i < 4; i++)
      exec(CMD_ANN_MUL, 0, la(CP, i, 0), la(CP, 32 + i, 0), la(CP, 64 + i, 0), 8'd0, '0);
    acc_line = sng_row(act[0][7:0]) & sng_row(wgt[0][7:0]);
    exec(CMD_WRITE, 0, '0, '0, la(CP, 70, 0), 8'd0, '0);  // clear scratch
    for (int i = 1; i < 4; i++) begin
      line_t p;
      p = sng_row(act[0][8*i +: 8]) & sng_row(wgt[0][8*i +: 8]);
      exec(CMD_ANN_MUL, 0, la(CP, (i == 1) ? 64 : 80, 0), la(CP, 100 + 2 * i, 0), la(CP, 81, 0), 8'd0, '0);
      exec(CMD_ANN_MUL, 0, la(CP, 64 + i, 0), la(CP, 101 + 2 * i, 0), la(CP, 82, 0), 8'd0, '0);
      exec(CMD_ANN_ACC, 0, la(CP, 81, 0), la(CP, 82, 0), la(CP, 80, 0), 8'd0, '0);
      acc_line = (acc_line & s_sel[i]) | (p & ~s_sel[i]);
    end
    rd(0, la(CP, 80, 0), got);
    chk(got == acc_line, "stochastic MAC bit-exact");
    // value check: weights of the scaled sum are 1/8, 1/8, 1/4, 1/2 for p0..p3
    exact2 = 0;
    for (int i = 0; i < 4; i++) begin
      int wgt_sh;
      wgt_sh = (i == 0) ? 3 : 4 - i;
      exact2 += (int'(act[0][8*i +: 8]) * int'(wgt[0][8*i +: 8]) / 256) >> wgt_sh;
    end
    est = $countones(got);
    chk((est - exact2) < 24 && (exact2 - est) < 24,
        $sformatf("stochastic MAC value %0d vs arithmetic %0d", est, exact2));
    $display("stochastic MAC: %0d / 256 (arithmetic %0d / 256)", est, exact2);
    // 5. S_TO_B of CP rows 0..31 of bank 1 (the activation streams), row 5 made all ones
    exec(CMD_WRITE, 1, '0, '0, la(CP, 5, 0), 8'd0, '1);
    for (int j = 0; j < 32; j++) rd(1, la(CP, j, 0), rows[j]);
    exec(CMD_S_TO_B, 1, la(CP, 0, 0), '0, la(4'd1, 3, 4), 8'd60, '0);
    rd(1, la(4'd1, 3, 4), got);
    for (int j = 0; j < 32; j++) begin
      int pc;
      pc = $countones(rows[j]);
      if (pc > 255) begin pc = 255; n_sat++; end
      if (pc < 60) begin pc = 60; n_clamp++; end
      chk(int'(got[8*j +: 8]) == pc, $sformatf("S_TO_B slot %0d", j));
    end
    // 6. ANN_POOL in bank 0 over four blocks of row (2, 10)
    for (int j = 0; j < 4; j++) begin
      blocks[j] = rnd_line();
      exec(CMD_WRITE, 0, '0, '0, la(4'd2, 10, j), 8'd0, blocks[j]);
    end
    exec(CMD_ANN_POOL, 0, la(4'd2, 10, 0), '0, la(4'd2, 11, 0), 8'd0, '0);
    rd(0, la(4'd2, 11, 0), got);
    for (int j = 0; j < 4; j++)
      for (int k = 0; k < 8; k++) begin
        int m;
        m = 0;
        for (int q = 0; q < 4; q++)
          if (int'(blocks[j][32*k + 8*q +: 8]) > m) m = int'(blocks[j][32*k + 8*q +: 8]);
        chk(int'(got[8*(8*j + k) +: 8]) == m, "ANN_POOL slot");
      end
    // 7. table rewrite: value 200 now maps to a fixed pattern
    @(negedge clk);
    lut_wr_en = 1; lut_wr_addr = 8'd200; lut_wr_data = {8{32'h0F0F_3C3C}};
    @(negedge clk);
    lut_wr_en = 0; n_lutwr++;
    exec(CMD_WRITE, 1, '0, '0, la(4'd0, 5, 0), 8'd0, {32{8'd200}});
    exec(CMD_B_TO_S, 1, la(4'd0, 5, 0), '0, la(CP, 110, 1), 8'd0, '0);
    rd(1, la(CP, 111, 1), got);
    chk(got == {8{32'h0F0F_3C3C}}, "rewritten table row used");
    // mechanisms
    chk(n_stall > 0, "no stall seen");
    chk(n_parallel > 0, "banks never busy in parallel");
    chk(n_sat > 0, "pop counter never saturated");
    chk(n_clamp > 0, "ReLU never clamped");
    chk(n_lutwr > 0, "table never rewritten");
    for (int i = 0; i < 7; i++) chk(n_cmd[i] > 0, $sformatf("command %0d never issued", i));
    $display("mechanisms: stall=%0d parallel=%0d sat=%0d clamp=%0d lutwr=%0d cmds=%p",
             n_stall, n_parallel, n_sat, n_clamp, n_lutwr, n_cmd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
