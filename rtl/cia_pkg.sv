// cia_pkg: sizes shared by the carry increment adder and its building blocks.
//
// The adder is an 8-bit carry increment adder whose operands are cut into
// 4-bit groups; each group is summed by a 4-bit carry look-ahead adder and,
// above the lowest group, corrected by a half-adder incrementer. Both numbers
// are the ones the design is presented with. The package holds them so that
// the adder, the group adders and the testbenches agree on one source.
package cia_pkg;
  // Operand width of the whole adder (the 8-bit case the design is shown for).
  localparam int unsigned CIA_WIDTH = 8;
  // Width of one group: one carry look-ahead adder plus one incrementer.
  localparam int unsigned CIA_GROUP = 4;
endpackage : cia_pkg
