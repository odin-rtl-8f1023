// tb_read_buffer: loads random lines into the read buffer and checks the held line, every
// 8-bit operand select and every 32-bit slice select, and that the buffer holds without load.
module tb_read_buffer;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0, load = 0;
  line_t din, dout, model;
  logic [4:0] op_sel = 0;
  logic [2:0] slice_sel = 0;
  op_t op_out;
  logic [31:0] slice_out;
  int checks = 0, failures = 0;
  read_buffer dut (.clk, .rst_n, .load, .din, .op_sel, .slice_sel, .dout, .op_out, .slice_out);
  always #5 clk = ~clk;
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 5) $display("read_buffer: %s", what); end
  endtask
  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20; n++) begin
      for (int w = 0; w < 8; w++) din[32*w +: 32] = $urandom;
      load = (n % 3 != 2);
      @(posedge clk); #1;
      if (load) model = din;
      load = 0;
      chk(dout == model, "line");
      for (int i = 0; i < 32; i++) begin
        op_sel = 5'(i); #1;
        chk(op_out == model[8*i +: 8], "operand");
      end
      for (int s = 0; s < 8; s++) begin
        slice_sel = 3'(s); #1;
        chk(slice_out == model[32*s +: 32], "slice");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
