// incrementer: the incremental circuit of the carry increment adder.
//
// Adds a one-bit carry cin to a W-bit partial sum x (W = 4 by default) with a
// ripple chain of W half adders: HA1 adds cin to x[0], and each later half
// adder adds the previous one's carry to the next bit. The carry of the last
// half adder is the chain's carry out. The half-adder ripple chain follows the
// design; its width follows the 4-bit group size.
//
// Ports:
//   x      W-bit partial sum from a group adder
//   cin    carry to add (the carry out of the group below)
//   y      x + cin, low W bits
//   cout   carry out of the last half adder (x all ones and cin = 1)
// Timing: combinational, no clock.
module incrementer #(
  parameter int unsigned W = cia_pkg::CIA_GROUP
) (
  input  logic [W-1:0] x,
  input  logic         cin,
  output logic [W-1:0] y,
  output logic         cout
);
  logic [W:0] c;

  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_ha
    half_adder u_ha (
      .a     (x[i]),
      .b     (c[i]),
      .sum   (y[i]),
      .carry (c[i+1])
    );
  end

  assign cout = c[W];
endmodule : incrementer
