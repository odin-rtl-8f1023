// tb_write_buffer: fills the write buffer by whole lines and by 8-bit slots through the demux,
// in random order, and checks the assembled line against a model kept in the testbench,
// including the priority of a line load over a slot write.
module tb_write_buffer;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0, line_load = 0, slot_we = 0;
  line_t line_din, dout, model;
  logic [4:0] slot_sel = 0;
  op_t slot_din = 0;
  int checks = 0, failures = 0;
  write_buffer dut (.clk, .rst_n, .line_load, .line_din, .slot_we, .slot_sel, .slot_din, .dout);
  always #5 clk = ~clk;
  initial begin
    line_din = '0;
    model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      line_load = ($urandom % 8 == 0);
      slot_we   = ($urandom % 4 != 0);
      slot_sel  = 5'($urandom);
      slot_din  = 8'($urandom);
      for (int w = 0; w < 8; w++) line_din[32*w +: 32] = $urandom;
      @(posedge clk); #1;
      if (line_load) model = line_din;
      else if (slot_we) model[8*slot_sel +: 8] = slot_din;
      checks++;
      if (dout != model) begin
        failures++;
        if (failures < 5) $display("write_buffer mismatch at step %0d", n);
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
