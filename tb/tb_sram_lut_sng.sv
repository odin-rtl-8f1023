// tb_sram_lut_sng: reads every row of the binary-to-stochastic table and checks that row v has
// exactly v ones (value v/256) and arrives one cycle after the read; checks that ANDing the rows
// of two different values gives about their product (the property stochastic multiplication
// needs); then rewrites a row through the write port and reads it back.
module tb_sram_lut_sng;
  import odin_pkg::*;
  logic clk = 0, rd_en = 0, wr_en = 0;
  op_t rd_addr = 0, wr_addr = 0;
  line_t row_buf, wr_data = '0;
  line_t rows [256];
  int checks = 0, failures = 0;
  sram_lut_sng dut (.clk, .rd_en, .rd_addr, .row_buf, .wr_en, .wr_addr, .wr_data);
  always #5 clk = ~clk;
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("lut: %s", what); end
  endtask
  initial begin
    int err_sum;
    @(posedge clk);
    for (int v = 0; v < 256; v++) begin
      rd_en = 1; rd_addr = 8'(v);
      @(posedge clk); #1;
      rd_en = 0;
      rows[v] = row_buf;
      chk($countones(row_buf) == v, $sformatf("row %0d has %0d ones", v, $countones(row_buf)));
    end
    // Product accuracy over pairs of distinct values.
    err_sum = 0;
    for (int n = 0; n < 500; n++) begin
      int a, b, p, e;
      a = $urandom % 256; b = $urandom % 256;
      if (a == b) b = (b + 1) % 256;
      p = $countones(rows[a] & rows[b]);
      e = p - (a * b) / 256;
      if (e < 0) e = -e;
      err_sum += e;
      chk(e <= 40, $sformatf("product %0d*%0d -> %0d", a, b, p));
    end
    chk(err_sum / 500 <= 8, $sformatf("mean product error %0d", err_sum / 500));
    $display("mean |AND popcount - a*b/256| = %0d/500", err_sum);
    // Rewrite one row.
    wr_en = 1; wr_addr = 8'd77; wr_data = {8{32'hDEAD_BEEF}};
    @(posedge clk); #1;
    wr_en = 0; rd_en = 1; rd_addr = 8'd77;
    @(posedge clk); #1;
    rd_en = 0;
    chk(row_buf == {8{32'hDEAD_BEEF}}, "written row");
    rd_en = 1; rd_addr = 8'd78;
    @(posedge clk); #1;
    rd_en = 0;
    chk(row_buf == rows[78], "neighbour row");
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
