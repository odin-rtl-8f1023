// pop_counter: stochastic-to-binary converter of an ODIN bank, a 256-bit parallel-in
// serial-out (PISO) register feeding an 8-bit counter.
//
// load captures a 256-bit stochastic stream and clears the counter. On each following clock the
// PISO shifts out one bit (LSB first) and the counter adds it, so after 256 clocks count holds
// the number of ones. An 8-bit counter cannot hold 256: a stream of all ones (the value 1.0)
// saturates at 255.
//
// Timing: done pulses for one cycle, 256 cycles after the load cycle, with count valid from then
// until the next load. busy is high while bits are being shifted. A load while busy restarts.
//
// The PISO, the 256-bit width, the serial 1-bit path and the 8-bit counter follow the source;
// saturation at 255 is this design's choice.
module pop_counter
  import odin_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  line_t din,
  output logic  busy,
  output logic  done,
  output op_t   count
);
  line_t      piso;
  logic [8:0] left;

  assign busy = (left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      piso  <= '0;
      left  <= '0;
      count <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (load) begin
        piso  <= din;
        left  <= 9'(SN_BITS);
        count <= '0;
      end else if (busy) begin
        piso <= piso >> 1;
        left <= left - 9'd1;
        if (piso[0] && count != 8'hFF) count <= count + 8'd1;
        if (left == 9'd1) done <= 1'b1;
      end
    end
  end
endmodule
