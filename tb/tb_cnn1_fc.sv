// tb_cnn1_fc: the last fully connected layer of the MLBench CNN1 network (70 inputs,
// 10 neurons) computed in an ODIN channel, one neuron per bank, all ten banks at once.
//
// Mapping (host software, written here as a command stream):
//   - every bank gets the 70 8-bit activations (three blocks, the last one partly used) and its
//     neuron's 70 weights; B_TO_S turns the six blocks into stochastic rows of the compute
//     partition (partition 15);
//   - 70 ANN_MUL commands form the products a_i * w_i;
//   - a binary tree of scaled additions sums them: each addition is two ANN_MULs with a select
//     row S_l or S'_l = not S_l and one ANN_ACC. Every tree level uses its own random select row,
//     so that a level's inputs are not correlated with its S. Odd leftovers are paired with a
//     row of zeros. Seven levels scale the sum by 1/128;
//   - S_TO_B converts the result (with 31 further rows) to 8 bits through the ReLU.
// The testbench keeps a bit-exact model of every row and checks the final stream and the 8-bit
// output of each neuron against it, and checks the output against integer arithmetic
// (sum a_i*w_i / 256 / 128) within a stochastic tolerance. Array size is reduced to 1024 rows
// per partition and 16 banks; the command sequence is the full layer.
module tb_cnn1_fc;
  import odin_pkg::*;
  localparam int NB = 16, NN = 10, NI = 70;
  localparam logic [3:0] CP = 4'd15;
  logic clk = 0, rst_n = 0, host_valid = 0, host_ready, rsp_valid, rsp_ready = 1, stall;
  cmd_e host_cmd = CMD_READ;
  logic [3:0] host_bank = 0, rsp_bank;
  args_t host_args = '0;
  line_t rsp_rdata;
  logic [NB-1:0] bank_busy;
  int checks = 0, failures = 0, n_cmds = 0;
  line_t last_rsp [NB];
  logic got_rsp [NB];

  odin_channel #(.NUM_BANKS(NB), .ROWS(1024)) dut (.clk, .rst_n, .host_valid, .host_ready,
    .host_cmd, .host_bank, .host_args, .rsp_valid, .rsp_ready, .rsp_bank, .rsp_rdata,
    .lut_wr_en(1'b0), .lut_wr_addr(8'd0), .lut_wr_data('0), .stall, .bank_busy);
  always #5 clk = ~clk;
  always @(posedge clk) if (rsp_valid && rsp_ready) begin
    last_rsp[rsp_bank] <= rsp_rdata;
    got_rsp[rsp_bank]  <= 1'b1;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("cnn1_fc: %s", what); end
  endtask
  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 8; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction
  function automatic laddr_t la(logic [3:0] p, int row, int blk);
    return {p, 12'(row), 5'(blk)};
  endfunction
  task automatic issue(cmd_e c, int b, laddr_t a, laddr_t bb, laddr_t d, line_t wd);
    @(negedge clk);
    host_valid = 1; host_cmd = c; host_bank = 4'(b);
    host_args.a = a; host_args.b = bb; host_args.d = d; host_args.zp = 8'd0;
    host_args.wdata = wd;
    got_rsp[b] = 1'b0;
    #1;
    while (!host_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    host_valid = 0;
    n_cmds++;
  endtask
  // Same command in all neuron banks.
  task automatic all_banks(cmd_e c, laddr_t a, laddr_t bb, laddr_t d);
    for (int n = 0; n < NN; n++) issue(c, n, a, bb, d, '0);
  endtask
  task automatic wait_all();
    for (int n = 0; n < NN; n++) while (!got_rsp[n]) @(negedge clk);
  endtask

  // Compute-partition row plan.
  localparam int R_ACT = 0, R_WGT = 96, R_PROD = 192, R_TREE = 300, R_SEL = 900, R_ZERO = 1000;
  line_t act_blk [3], wgt_blk [NN][3], sel [8];
  line_t model [NN][1024];

  initial begin
    int rows_now [$], rows_next [$];
    int next_free, level, cyc0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NB; i++) got_rsp[i] = 1'b0;
    for (int k = 0; k < 3; k++) act_blk[k] = rnd_line();
    act_blk[2][255:48] = '0;  // inputs 64..69 only
    for (int n = 0; n < NN; n++) for (int k = 0; k < 3; k++) begin
      wgt_blk[n][k] = rnd_line();
      if (k == 2) wgt_blk[n][k][255:48] = '0;
    end
    for (int l = 0; l < 8; l++) sel[l] = rnd_line();
    // Upload (the DMA engine's job).
    for (int n = 0; n < NN; n++) begin
      for (int k = 0; k < 3; k++) begin
        issue(CMD_WRITE, n, '0, '0, la(4'd0, 0, k), act_blk[k]);
        issue(CMD_WRITE, n, '0, '0, la(4'd1, 0, k), wgt_blk[n][k]);
      end
      for (int l = 0; l < 8; l++) begin
        issue(CMD_WRITE, n, '0, '0, la(CP, R_SEL + 2 * l, 0), sel[l]);
        issue(CMD_WRITE, n, '0, '0, la(CP, R_SEL + 2 * l + 1, 0), ~sel[l]);
        model[n][R_SEL + 2 * l] = sel[l];
        model[n][R_SEL + 2 * l + 1] = ~sel[l];
      end
      issue(CMD_WRITE, n, '0, '0, la(CP, R_ZERO, 0), '0);
      model[n][R_ZERO] = '0;
    end
    wait_all();
    cyc0 = 0;
    // Binary to stochastic.
    for (int k = 0; k < 3; k++) begin
      all_banks(CMD_B_TO_S, la(4'd0, 0, k), '0, la(CP, R_ACT + 32 * k, 0));
      all_banks(CMD_B_TO_S, la(4'd1, 0, k), '0, la(CP, R_WGT + 32 * k, 0));
    end
    for (int n = 0; n < NN; n++) for (int i = 0; i < 96; i++) begin
      model[n][R_ACT + i] = sng_row(act_blk[i / 32][8 * (i % 32) +: 8]);
      model[n][R_WGT + i] = sng_row(wgt_blk[n][i / 32][8 * (i % 32) +: 8]);
    end
    // Products.
    for (int i = 0; i < NI; i++) begin
      all_banks(CMD_ANN_MUL, la(CP, R_ACT + i, 0), la(CP, R_WGT + i, 0), la(CP, R_PROD + i, 0));
      for (int n = 0; n < NN; n++) model[n][R_PROD + i] = model[n][R_ACT + i] & model[n][R_WGT + i];
      rows_now.push_back(R_PROD + i);
    end
    // Addition tree.
    next_free = R_TREE;
    level = 0;
    while (rows_now.size() > 1) begin
      int s, sb;
      s = R_SEL + 2 * level; sb = s + 1;
      rows_next.delete();
      if (rows_now.size() % 2 == 1) rows_now.push_back(R_ZERO);
      for (int p = 0; p < rows_now.size(); p += 2) begin
        int x, y, t1, t2, r;
        x = rows_now[p]; y = rows_now[p + 1];
        t1 = next_free; t2 = next_free + 1; r = next_free + 2;
        next_free += 3;
        all_banks(CMD_ANN_MUL, la(CP, x, 0), la(CP, s, 0), la(CP, t1, 0));
        all_banks(CMD_ANN_MUL, la(CP, y, 0), la(CP, sb, 0), la(CP, t2, 0));
        all_banks(CMD_ANN_ACC, la(CP, t1, 0), la(CP, t2, 0), la(CP, r, 0));
        for (int n = 0; n < NN; n++) begin
          model[n][t1] = model[n][x] & model[n][s];
          model[n][t2] = model[n][y] & model[n][sb];
          model[n][r]  = model[n][t1] | model[n][t2];
        end
        rows_next.push_back(r);
      end
      rows_now = rows_next;
      level++;
    end
    chk(level == 7, $sformatf("tree depth %0d", level));
    // Stochastic to binary with ReLU (zero point 0) of the 32 rows starting at the result.
    all_banks(CMD_S_TO_B, la(CP, rows_now[0], 0), '0, la(4'd2, 0, 0));
    wait_all();
    $display("layer: %0d commands, finished at cycle %0t", n_cmds, $time / 10);
    for (int n = 0; n < NN; n++) begin
      int exact, got8, modelled;
      line_t res;
      issue(CMD_READ, n, la(CP, rows_now[0], 0), '0, '0, '0);
      while (!got_rsp[n]) @(negedge clk);
      res = last_rsp[n];
      chk(res == model[n][rows_now[0]], $sformatf("neuron %0d stream not bit-exact", n));
      issue(CMD_READ, n, la(4'd2, 0, 0), '0, '0, '0);
      while (!got_rsp[n]) @(negedge clk);
      got8 = int'(last_rsp[n][7:0]);
      modelled = $countones(model[n][rows_now[0]]);
      if (modelled > 255) modelled = 255;
      chk(got8 == modelled, $sformatf("neuron %0d output %0d, model %0d", n, got8, modelled));
      exact = 0;
      for (int i = 0; i < NI; i++)
        exact += int'(act_blk[i / 32][8 * (i % 32) +: 8]) * int'(wgt_blk[n][i / 32][8 * (i % 32) +: 8]);
      exact = exact / 256 / 128;
      $display("neuron %0d: ODIN %0d / 256, integer arithmetic %0d / 256", n, got8, exact);
      chk(got8 - exact <= 16 && exact - got8 <= 16, $sformatf("neuron %0d off by more than 16", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
