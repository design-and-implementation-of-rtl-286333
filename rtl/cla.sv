// cla: W-bit carry look-ahead adder (4 bits by default), the group adder of
// the improved carry increment adder.
//
// Each bit forms a generate g[i] = a[i] & b[i] and a propagate
// p[i] = a[i] ^ b[i]. Every carry is then computed directly as a two-level
// sum of products instead of being rippled:
//   c[i+1] = g[i] | p[i]g[i-1] | p[i]p[i-1]g[i-2] | ... | p[i]..p[0]cin
// and sum[i] = p[i] ^ c[i]. The 4-bit width and the use of a look-ahead adder
// in place of a ripple carry adder follow the design; the textbook
// generate/propagate form of the look-ahead logic is this implementation's
// choice, since only the adder's function is given.
//
// Ports:
//   a, b   W-bit addends
//   cin    carry into bit 0
//   sum    W-bit sum
//   cout   carry out of bit W-1
// Timing: combinational, no clock.
module cla #(
  parameter int unsigned W = cia_pkg::CIA_GROUP
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum,
  output logic         cout
);
  logic [W-1:0] g, p;
  logic [W:0]   c;

  always_comb begin
    g = a & b;
    p = a ^ b;
    c[0] = cin;
    for (int i = 0; i < W; i++) begin
      // Sum of products for c[i+1]: term j is g[j] (or cin for j = -1)
      // masked by every propagate above it up to bit i.
      logic term;
      logic acc;
      acc = 1'b0;
      for (int j = -1; j <= i; j++) begin
        term = (j < 0) ? cin : g[j];
        for (int k = j + 1; k <= i; k++) begin
          term = term & p[k];
        end
        acc = acc | term;
      end
      c[i+1] = acc;
    end
    sum  = p ^ c[W-1:0];
    cout = c[W];
  end
endmodule : cla
