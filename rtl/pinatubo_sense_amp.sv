// pinatubo_sense_amp: behavioural model of the 256 modified sense amplifiers of an ODIN PCRAM
// bank.
//
// In silicon these are analog current sense amplifiers. When one wordline is open they resolve
// the cell state against the normal reference (a read). When two wordlines of the same
// partition are open at once, the bitline current is the sum of both cells, and moving the
// reference between the "one cell low-resistance" and "both cells low-resistance" levels makes
// the amplifier output the OR or the AND of the two cells. An inverted output gives NOT. This
// file models only that logical result; it has no timing of its own (the array model around it
// adds the read latency).
//
// Interface: mode selects the reference; cell_a / cell_b are the two rows' 256 cells on the
// bitlines (cell_b is ignored for SA_READ and SA_NOT); dout is the sensed line.
//
// Read, AND, OR and NOT follow the source; the encoding of the mode is this design's own.
module pinatubo_sense_amp
  import odin_pkg::*;
#(
  parameter int unsigned WIDTH = LINE_BITS
) (
  input  sa_mode_e           mode,
  input  logic [WIDTH-1:0]   cell_a,
  input  logic [WIDTH-1:0]   cell_b,
  output logic [WIDTH-1:0]   dout
);
  always_comb begin
    unique case (mode)
      SA_READ: dout = cell_a;
      SA_AND:  dout = cell_a & cell_b;
      SA_OR:   dout = cell_a | cell_b;
      SA_NOT:  dout = ~cell_a;
      default: dout = cell_a;
    endcase
  end
endmodule
