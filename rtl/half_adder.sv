// half_adder: one-bit half adder, the cell of the incremental circuit.
//
// sum = a ^ b and carry = a & b. The incrementer chains these cells in ripple
// order, each cell's carry feeding the next cell's second input, as the
// half-adder chain of the carry increment adder is described. Purely
// combinational; no clock, no reset.
//
// Ports:
//   a, b   one-bit addends
//   sum    a xor b
//   carry  a and b
module half_adder (
  input  logic a,
  input  logic b,
  output logic sum,
  output logic carry
);
  always_comb begin
    sum   = a ^ b;
    carry = a & b;
  end
endmodule : half_adder
