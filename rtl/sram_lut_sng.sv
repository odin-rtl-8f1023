// sram_lut_sng: the stochastic number generator of an ODIN bank, a 256 x 256 SRAM lookup table.
//
// An 8-bit binary operand is decoded to one of 256 wordlines; the selected 256-bit row, which
// holds the stochastic form of that operand, is captured in the row buffer. Row v holds exactly
// v ones (value v/256). The table is initialised at power-up from odin_pkg::sng_row(), and can be
// rewritten one row at a time through the write port (wr_en, wr_addr, wr_data).
//
// Timing: row_buf holds the row of rd_addr one cycle after rd_en. A write and a read of the same
// row in one cycle return the old row.
//
// Size, decoder and row buffer follow the source. The table contents (which positions of each
// row are ones) and the write port are this design's choice; the source only says that the row
// is the stochastic version of the operand.
module sram_lut_sng
  import odin_pkg::*;
(
  input  logic  clk,
  input  logic  rd_en,
  input  op_t   rd_addr,
  output line_t row_buf,
  input  logic  wr_en,
  input  op_t   wr_addr,
  input  line_t wr_data
);
  line_t mem [SN_BITS];

  initial begin
    for (int v = 0; v < SN_BITS; v++) mem[v] = sng_row(8'(v));
  end

  always_ff @(posedge clk) begin
    if (rd_en) row_buf <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
