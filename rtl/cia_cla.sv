// cia_cla: improved carry increment adder, WIDTH bits (8 by default) built
// from GROUP-bit carry look-ahead adders (4 by default).
//
// The operands are cut into GROUP-bit groups. The lowest group is added by a
// look-ahead adder that takes the external carry-in, and its sum is the low
// part of the result. Every higher group is added by its own look-ahead adder
// with carry-in tied to 0, in parallel with the others, so only one partial
// sum per group is formed. A half-adder incrementer then adds the carry coming
// out of the group below to that partial sum. The carry a group passes on is
// the OR of its look-ahead adder's carry and its incrementer's carry (the two
// can never both be 1). For the default 8-bit size this is exactly two 4-bit
// look-ahead adders, one 4-bit half-adder incrementer and one OR gate, with
// the OR's output as the adder's carry out.
//
// Following the design: the 4-bit look-ahead group adders, the upper adder's
// carry-in of 0, the half-adder incrementer and the final OR. This
// implementation's own choices: a single carry-in port (the lowest adder's),
// and, for WIDTH above 8, repeating the upper-group structure with group
// carries passed from group to group.
//
// Ports:
//   a, b   WIDTH-bit addends
//   cin    carry into bit 0
//   s      WIDTH-bit sum
//   cout   carry out of the adder
// Timing: combinational, no clock and no registers.
module cia_cla #(
  parameter int unsigned WIDTH = cia_pkg::CIA_WIDTH,
  parameter int unsigned GROUP = cia_pkg::CIA_GROUP
) (
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic             cin,
  output logic [WIDTH-1:0] s,
  output logic             cout
);
  localparam int unsigned NGROUPS = WIDTH / GROUP;

  // Carry out of each group after correction; gc[0] is the external carry-in.
  logic [NGROUPS:0] gc;

  assign gc[0] = cin;

  // Lowest group: the look-ahead adder sees the real carry-in, so its sum needs
  // no correction.
  cla #(.W(GROUP)) u_cla_lo (
    .a    (a[GROUP-1:0]),
    .b    (b[GROUP-1:0]),
    .cin  (gc[0]),
    .sum  (s[GROUP-1:0]),
    .cout (gc[1])
  );

  for (genvar k = 1; k < NGROUPS; k++) begin : g_grp
    logic [GROUP-1:0] psum;   // partial sum, formed with carry-in 0
    logic             co_cla; // carry of the look-ahead adder
    logic             co_inc; // carry of the incrementer chain

    cla #(.W(GROUP)) u_cla (
      .a    (a[k*GROUP +: GROUP]),
      .b    (b[k*GROUP +: GROUP]),
      .cin  (1'b0),
      .sum  (psum),
      .cout (co_cla)
    );

    incrementer #(.W(GROUP)) u_inc (
      .x    (psum),
      .cin  (gc[k]),
      .y    (s[k*GROUP +: GROUP]),
      .cout (co_inc)
    );

    assign gc[k+1] = co_cla | co_inc;
  end

  assign cout = gc[NGROUPS];

  // The design is defined for a whole number of groups, at least two.
  initial begin
    assert (WIDTH % GROUP == 0 && NGROUPS >= 2)
      else $error("cia_cla: WIDTH (%0d) must be a multiple of GROUP (%0d), at least two groups",
                  WIDTH, GROUP);
  end
endmodule : cia_cla
