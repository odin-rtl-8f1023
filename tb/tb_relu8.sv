// tb_relu8: exhaustive self-checking test of the 8-bit zero-point ReLU. Every pair (x, zp) is
// applied and the output compared with max(x, zp) computed in the testbench.
module tb_relu8;
  import odin_pkg::*;
  op_t x, zp, y;
  int checks = 0, failures = 0;
  relu8 dut (.x, .zp, .y);
  initial begin
    for (int z = 0; z < 256; z += 17) begin
      for (int v = 0; v < 256; v++) begin
        x = 8'(v); zp = 8'(z);
        #1;
        checks++;
        if (int'(y) != ((v < z) ? z : v)) begin
          failures++;
          if (failures < 5) $display("relu8 mismatch x=%0d zp=%0d y=%0d", v, z, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
