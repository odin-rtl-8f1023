// tb_bank_control: drives the bank control logic alone, with the array, pop counter and
// buffers replaced by small models in this testbench (array latency 3 cycles, pop count 5
// cycles). For each command it records the array requests and datapath strobes and compares
// them with the activity flow the command must follow: number, kind and addresses of array
// operations, table lookups, read-buffer loads, pop-counter loads and write-buffer slot writes.
module tb_bank_control;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0, cmd_valid = 0, cmd_ready, done, rsp_ack = 0;
  bank_cmd_t cmd;
  logic arr_req_valid, arr_req_ready, arr_wdata_from_sa, arr_rsp_valid = 0;
  arr_op_e arr_req_op;
  wl_t arr_wl_a, arr_wl_b;
  blk_t arr_blk;
  logic rb_load, lut_rd_en, pc_load, pc_done = 0, wb_line_load, wb_line_from_host, wb_slot_we,
        wb_slot_from_pool;
  logic [4:0] rb_op_sel, wb_slot_sel;
  logic [2:0] rb_slice_sel;
  op_t zp;
  int checks = 0, failures = 0;
  bank_control dut (.*);
  always #5 clk = ~clk;

  // Array model: 3-cycle operations.
  int acnt = 0;
  assign arr_req_ready = (acnt == 0);
  always @(posedge clk) begin
    arr_rsp_valid <= 1'b0;
    if (arr_req_valid && arr_req_ready) acnt <= 3;
    else if (acnt == 1) begin acnt <= 0; arr_rsp_valid <= 1'b1; end
    else if (acnt > 1) acnt <= acnt - 1;
  end
  // Pop counter model: done 5 cycles after load.
  int pcnt = 0;
  always @(posedge clk) begin
    pc_done <= 1'b0;
    if (pc_load) pcnt <= 5;
    else if (pcnt == 1) begin pcnt <= 0; pc_done <= 1'b1; end
    else if (pcnt > 1) pcnt <= pcnt - 1;
  end
  // Recorders.
  string log_arr [$];
  int n_rb, n_lut, n_pc, n_wbl, n_slot;
  logic [31:0] slots_seen;
  always @(posedge clk) if (rst_n) begin
    if (arr_req_valid && arr_req_ready)
      log_arr.push_back($sformatf("%0d:%h:%h:%h", arr_req_op, arr_wl_a,
        (arr_req_op == ARR_AND || arr_req_op == ARR_OR) ? arr_wl_b : wl_t'(0), arr_blk));
    if (rb_load) n_rb++;
    if (lut_rd_en) begin
      n_lut++;
      if (rb_op_sel != 5'(n_lut - 1)) begin failures++; $display("bank_control: LUT operand order"); end
    end
    if (pc_load) n_pc++;
    if (wb_line_load) n_wbl++;
    if (wb_slot_we) begin n_slot++; slots_seen[wb_slot_sel] = 1'b1; end
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("bank_control: %s", what); end
  endtask
  function automatic string rq(arr_op_e o, wl_t a, wl_t b, blk_t k);
    return $sformatf("%0d:%h:%h:%h", o, a, b, k);
  endfunction
  task automatic run(cmd_e c, laddr_t a, laddr_t b, laddr_t d, output int cyc);
    log_arr.delete(); n_rb = 0; n_lut = 0; n_pc = 0; n_wbl = 0; n_slot = 0; slots_seen = 0;
    @(negedge clk);
    cmd_valid = 1; cmd.ctl = decode_cmd(c); cmd.args.a = a; cmd.args.b = b; cmd.args.d = d;
    cmd.args.zp = 8'd3; cmd.args.wdata = '0;
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 5000) break; end
    chk(zp == 8'd3, "zero point");
    rsp_ack = 1;
    @(negedge clk);
    rsp_ack = 0;
    chk(cmd_ready, "ready after ack");
  endtask

  initial begin
    int cyc;
    string e [$];
    laddr_t a, b, d;
    cmd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    a = {4'd1, 12'd20, 5'd3}; b = {4'd15, 12'd7, 5'd3}; d = {4'd15, 12'd100, 5'd6};
    // READ
    run(CMD_READ, a, b, d, cyc);
    chk(log_arr.size() == 1 && log_arr[0] == rq(ARR_READ, wl_of(a), 0, 3), "READ flow");
    chk(n_rb == 1, "READ loads read buffer");
    // WRITE
    run(CMD_WRITE, a, b, d, cyc);
    chk(log_arr.size() == 1 && log_arr[0] == rq(ARR_WRITE, wl_of(d), 0, 6), "WRITE flow");
    chk(n_wbl == 1, "WRITE loads write buffer");
    // ANN_MUL / ANN_ACC
    run(CMD_ANN_MUL, a, b, d, cyc);
    chk(log_arr.size() == 2 && log_arr[0] == rq(ARR_AND, wl_of(a), wl_of(b), 3) &&
        log_arr[1] == rq(ARR_WRITE, wl_of(d), 0, 6), "ANN_MUL flow");
    chk(arr_wdata_from_sa, "ANN_MUL writes from sense amps");
    // each model operation occupies 4 cycles with its accepting cycle; plus 2 for control
    chk(cyc == 4 + 4 + 2, $sformatf("ANN_MUL cycles %0d", cyc));
    run(CMD_ANN_ACC, a, b, d, cyc);
    chk(log_arr.size() == 2 && log_arr[0] == rq(ARR_OR, wl_of(a), wl_of(b), 3) &&
        log_arr[1] == rq(ARR_WRITE, wl_of(d), 0, 6), "ANN_ACC flow");
    // B_TO_S
    run(CMD_B_TO_S, a, b, d, cyc);
    e.delete();
    e.push_back(rq(ARR_READ, wl_of(a), 0, 3));
    for (int i = 0; i < 32; i++) e.push_back(rq(ARR_WRITE, wl_of(d) + wl_t'(i), 0, 6));
    chk(log_arr == e, "B_TO_S flow");
    chk(n_lut == 32 && n_wbl == 32 && n_rb == 1, "B_TO_S lookups");
    // S_TO_B
    run(CMD_S_TO_B, b, a, d, cyc);
    e.delete();
    for (int j = 0; j < 32; j++) e.push_back(rq(ARR_READ, wl_of(b) + wl_t'(j), 0, 3));
    e.push_back(rq(ARR_WRITE, wl_of(d), 0, 6));
    chk(log_arr == e, "S_TO_B flow");
    chk(n_pc == 32 && n_rb == 32 && n_slot == 32 && slots_seen == '1, "S_TO_B counts");
    // ANN_POOL across a row boundary
    a = {4'd2, 12'd9, 5'd30};
    run(CMD_ANN_POOL, a, b, d, cyc);
    e.delete();
    for (int j = 0; j < 4; j++) e.push_back(rq(ARR_READ, wl_of(a + laddr_t'(j)), 0, blk_of(a + laddr_t'(j))));
    e.push_back(rq(ARR_WRITE, wl_of(d), 0, 6));
    chk(log_arr == e, "ANN_POOL flow");
    chk(n_rb == 4 && n_slot == 32 && slots_seen == '1, "ANN_POOL slots");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
