// lut6: a 6-input look-up table, the basic logic cell the LaserEscape sensor
// and the polymorphic gates are built from.
//
// The 64 truth-table bits (INIT) are the table's SRAM cells; the six inputs act
// as the select lines of a 64-to-1 multiplexer that picks one cell. Input i[0]
// is the least significant select bit, as in the usual INIT convention.
// Purely combinational.
module lut6 #(
  parameter logic [63:0] INIT = 64'h0
) (
  input  logic [5:0] i,
  output logic       o
);
  assign o = INIT[i];
endmodule
