// tb_maxpool4: random self-checking test of the 4:1 8-bit max-pooling unit, including slices
// whose maximum sits in each of the four byte positions and ties.
module tb_maxpool4;
  import odin_pkg::*;
  logic [31:0] slice;
  op_t mx;
  int checks = 0, failures = 0;
  maxpool4 dut (.slice, .max_out(mx));
  function automatic int ref_max(logic [31:0] s);
    int m = 0;
    for (int i = 0; i < 4; i++) if (int'(s[8*i +: 8]) > m) m = int'(s[8*i +: 8]);
    return m;
  endfunction
  initial begin
    for (int n = 0; n < 2000; n++) begin
      slice = $urandom;
      if (n < 4) slice = 32'h0101_0101 | (32'hFF << (8 * n));
      #1;
      checks++;
      if (int'(mx) != ref_max(slice)) begin
        failures++;
        if (failures < 5) $display("maxpool mismatch %h -> %0d", slice, mx);
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
