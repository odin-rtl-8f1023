// tb_pop_counter: loads random 256-bit streams with known numbers of ones into the PISO pop
// counter and checks the count, the 256-cycle conversion time, the one-cycle done pulse, and
// saturation at 255 for a stream of all ones.
module tb_pop_counter;
  import odin_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, busy, done;
  line_t din;
  op_t count;
  int checks = 0, failures = 0;
  pop_counter dut (.clk, .rst_n, .load, .din, .busy, .done, .count);
  always #5 clk = ~clk;
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 8) $display("pop_counter: %s", what); end
  endtask
  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      int ones, cyc, expc;
      if (n == 0) din = '0;
      else if (n == 1) din = '1;
      else for (int w = 0; w < 8; w++) din[32*w +: 32] = $urandom & $urandom;
      ones = $countones(din);
      expc = (ones > 255) ? 255 : ones;
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      cyc = 0;
      while (!done) begin @(negedge clk); cyc++; end
      chk(cyc == 256, $sformatf("conversion took %0d cycles", cyc));
      chk(int'(count) == expc, $sformatf("count %0d expected %0d", count, expc));
      @(negedge clk);
      chk(!done && !busy && int'(count) == expc, "done not a pulse or count not held");
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
