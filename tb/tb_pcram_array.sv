// tb_pcram_array: writes random lines into the bank array model, reads them back, checks
// two-row AND and OR sensing and NOT, that a two-row operation uses row a's partition, and
// that reads take T_RD cycles and writes T_WR cycles (48 and 60 by default) from acceptance.
module tb_pcram_array;
  import odin_pkg::*;
  localparam int unsigned T_RD = 48, T_WR = 60;
  logic clk = 0, rst_n = 0, req_valid = 0, req_ready, rsp_valid;
  arr_op_e req_op = ARR_READ;
  wl_t wl_a = 0, wl_b = 0;
  blk_t blk = 0;
  line_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  pcram_array #(.ROWS(256)) dut (.clk, .rst_n, .req_valid, .req_ready, .req_op,
    .req_wl_a(wl_a), .req_wl_b(wl_b), .req_blk(blk), .req_wdata(wdata), .rsp_valid,
    .rsp_rdata(rdata));
  always #5 clk = ~clk;
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("pcram_array: %s", what); end
  endtask
  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < 8; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction
  // Issue one operation; return the cycles from the accepting edge to the edge after which
  // rsp_valid is high, counting the accepting cycle.
  task automatic op(arr_op_e o, wl_t a, wl_t b, blk_t k, line_t d, output int cyc);
    @(negedge clk);
    req_valid = 1; req_op = o; wl_a = a; wl_b = b; blk = k; wdata = d;
    @(negedge clk);
    req_valid = 0;
    cyc = 1;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
  endtask
  initial begin
    line_t l0, l1, l2;
    wl_t r0, r1, r2;
    int cyc;
    repeat (2) @(posedge clk);
    rst_n = 1;
    r0 = {4'd15, 12'd3}; r1 = {4'd15, 12'd200}; r2 = {4'd2, 12'd200};
    l0 = rnd_line(); l1 = rnd_line(); l2 = rnd_line();
    op(ARR_WRITE, r0, 0, 5'd7, l0, cyc); chk(cyc == T_WR, $sformatf("write %0d cycles", cyc));
    op(ARR_WRITE, r1, 0, 5'd7, l1, cyc);
    op(ARR_WRITE, r2, 0, 5'd7, l2, cyc);
    op(ARR_READ, r0, 0, 5'd7, '0, cyc);
    chk(cyc == T_RD, $sformatf("read %0d cycles", cyc));
    chk(rdata == l0, "read back row 0");
    op(ARR_READ, r2, 0, 5'd7, '0, cyc); chk(rdata == l2, "read back other partition");
    op(ARR_AND, r0, r1, 5'd7, '0, cyc);
    chk(cyc == T_RD, "AND latency");
    chk(rdata == (l0 & l1), "AND");
    op(ARR_OR, r0, r1, 5'd7, '0, cyc); chk(rdata == (l0 | l1), "OR");
    op(ARR_NOT, r1, 0, 5'd7, '0, cyc); chk(rdata == ~l1, "NOT");
    op(ARR_WRITE, r0, 0, 5'd8, l2, cyc);
    op(ARR_READ, r0, 0, 5'd7, '0, cyc); chk(rdata == l0, "neighbour block untouched");
    op(ARR_READ, r0, 0, 5'd8, '0, cyc); chk(rdata == l2, "second block");
    for (int n = 0; n < 20; n++) begin
      wl_t r; blk_t k; line_t l;
      r = wl_t'($urandom); r[11:8] = 0; k = blk_t'($urandom); l = rnd_line();
      op(ARR_WRITE, r, 0, k, l, cyc);
      op(ARR_READ, r, 0, k, '0, cyc);
      chk(rdata == l, "random write/read");
    end
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
