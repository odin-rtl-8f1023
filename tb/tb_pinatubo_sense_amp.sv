// tb_pinatubo_sense_amp: checks the four sensing modes (read, AND, OR, NOT) of the sense
// amplifier model on random pairs of lines against bitwise results computed here.
module tb_pinatubo_sense_amp;
  import odin_pkg::*;
  sa_mode_e mode;
  line_t a, b, q, expv;
  int checks = 0, failures = 0;
  pinatubo_sense_amp dut (.mode, .cell_a(a), .cell_b(b), .dout(q));
  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int w = 0; w < 8; w++) begin
        a[32*w +: 32] = $urandom;
        b[32*w +: 32] = $urandom;
      end
      mode = sa_mode_e'(n % 4);
      #1;
      for (int i = 0; i < 256; i++) begin
        case (n % 4)
          0: expv[i] = a[i];
          1: expv[i] = a[i] && b[i];
          2: expv[i] = a[i] || b[i];
          default: expv[i] = !a[i];
        endcase
      end
      checks++;
      if (q !== expv) begin
        failures++;
        if (failures < 5) $display("sense amp mismatch mode %0d", n % 4);
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
