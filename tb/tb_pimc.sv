// tb_pimc: the PIM controller with four model banks. Checks that each host command reaches
// only the addressed bank with the right one-hot control line and its arguments, that a
// command for a busy bank stalls the host port while the bank is busy, and that finished banks
// are reported lowest number first and acknowledged one at a time.
module tb_pimc;
  import odin_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0, host_valid = 0, host_ready, rsp_valid, rsp_ready = 0, stall;
  cmd_e host_cmd = CMD_READ;
  logic [1:0] host_bank = 0, rsp_bank;
  args_t host_args = '0;
  line_t rsp_rdata;
  logic [NB-1:0] bank_valid, bank_ready, bank_done, bank_ack;
  bank_cmd_t bank_cmd;
  line_t bank_rdata [NB];
  int checks = 0, failures = 0, stalls = 0;
  pimc #(.NUM_BANKS(NB)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (stall) stalls++;

  // Model banks: busy for 6 cycles after a command, then done until acked.
  int bcnt [NB];
  for (genvar i = 0; i < NB; i++) begin : g_b
    assign bank_ready[i] = (bcnt[i] == 0) && !bank_done[i];
    assign bank_rdata[i] = {64{4'(i)}};
    always @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin bcnt[i] <= 0; bank_done[i] <= 1'b0; end
      else begin
        if (bank_valid[i] && bank_ready[i]) bcnt[i] <= 6;
        else if (bcnt[i] == 1) begin bcnt[i] <= 0; bank_done[i] <= 1'b1; end
        else if (bcnt[i] > 1) bcnt[i] <= bcnt[i] - 1;
        if (bank_ack[i]) bank_done[i] <= 1'b0;
      end
    end
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("pimc: %s", what); end
  endtask
  task automatic send(cmd_e c, int b);
    @(negedge clk);
    host_valid = 1; host_cmd = c; host_bank = 2'(b);
    host_args.a = laddr_t'($urandom); host_args.d = laddr_t'($urandom); host_args.zp = 8'($urandom);
    #1;
    while (!host_ready) begin @(negedge clk); #1; end
    chk(bank_valid == NB'(1 << b), "routing");
    chk(bank_cmd.ctl == decode_cmd(c) && $onehot(bank_cmd.ctl), "decode");
    chk(bank_cmd.args == host_args, "arguments");
    @(negedge clk);
    host_valid = 0;
  endtask

  initial begin
    cmd_e order [7] = '{CMD_READ, CMD_WRITE, CMD_B_TO_S, CMD_ANN_MUL, CMD_ANN_ACC, CMD_S_TO_B,
                        CMD_ANN_POOL};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // One-hot decode of every command; decode table checked by name.
    for (int n = 0; n < 7; n++) begin
      ctl_t k;
      k = decode_cmd(order[n]);
      chk(k == ctl_t'(7'b1000000 >> n), $sformatf("decode table %0d", n));
    end
    // Banks 3, 1, 2 started; all finish; responses come 1, 2, 3.
    send(CMD_ANN_MUL, 3);
    send(CMD_B_TO_S, 1);
    send(CMD_S_TO_B, 2);
    repeat (10) @(negedge clk);
    chk(rsp_valid && rsp_bank == 2'd1 && rsp_rdata == {64{4'd1}}, "first response bank 1");
    rsp_ready = 1;
    @(negedge clk);
    chk(rsp_valid && rsp_bank == 2'd2, "second response bank 2");
    @(negedge clk);
    chk(rsp_valid && rsp_bank == 2'd3, "third response bank 3");
    @(negedge clk);
    chk(!rsp_valid, "no more responses");
    // Stall: two commands to bank 0 back to back.
    stalls = 0;
    send(CMD_ANN_POOL, 0);
    send(CMD_ANN_ACC, 0);
    chk(stalls >= 5, $sformatf("stall cycles %0d", stalls));
    repeat (10) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
