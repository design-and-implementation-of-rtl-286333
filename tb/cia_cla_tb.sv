// cia_cla_tb: end-to-end self-check of the 8-bit improved carry increment
// adder at its default size (no parameter overrides).
//
// First applies the operand pairs of the published simulation, 1D + 16 and
// 94 + A9, with carry-in 0 and 1. Then runs every a, b and cin (131072 cases)
// and compares {cout, s} with the integer a + b + cin computed in the
// testbench. Alongside, it classifies each case by what the adder's internal
// mechanisms had to do, worked out from the operands alone:
//   incremented   the low group's carry was 1, so the upper partial sum was
//                 incremented
//   inc_carry     the increment rippled out of the half-adder chain, so the
//                 final carry came from the incrementer side of the OR
//   cla_carry     the upper look-ahead adder itself produced the carry, so the
//                 final carry came from the other side of the OR
//   lo_cin        the external carry-in changed the low group's carry out
// Each must occur at least once, or the run counts a failure.
module cia_cla_tb;
  localparam int unsigned WIDTH = cia_pkg::CIA_WIDTH;
  localparam int unsigned GROUP = cia_pkg::CIA_GROUP;

  logic [WIDTH-1:0] a, b, s;
  logic             cin, cout;
  int               checks = 0, failures = 0;
  int               n_incremented = 0, n_inc_carry = 0, n_cla_carry = 0, n_lo_cin = 0;

  cia_cla dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  task automatic check_one(input logic [WIDTH-1:0] ta, input logic [WIDTH-1:0] tb,
                           input logic tcin);
    int expected, lo, hi;
    a = ta; b = tb; cin = tcin;
    #1;
    expected = int'(ta) + int'(tb) + int'(tcin);
    lo = int'(ta[GROUP-1:0]) + int'(tb[GROUP-1:0]) + int'(tcin);
    hi = int'(ta[WIDTH-1:GROUP]) + int'(tb[WIDTH-1:GROUP]);
    if (lo >= (1 << GROUP)) n_incremented++;
    if (lo >= (1 << GROUP) && hi == (1 << (WIDTH - GROUP)) - 1) n_inc_carry++;
    if (hi >= (1 << (WIDTH - GROUP))) n_cla_carry++;
    if (tcin && (lo == (1 << GROUP))) n_lo_cin++;
    checks++;
    if ({cout, s} !== (WIDTH + 1)'(expected)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h cin=%0d: got cout=%0d s=%h expected %0h",
                 ta, tb, tcin, cout, s, expected);
    end
  endtask

  // Compares against the sum printed in the published waveform.
  task automatic check_pub(input logic [7:0] want_s, input logic want_cout);
    checks++;
    if (s[7:0] !== want_s || cout !== want_cout) begin
      failures++;
      $display("FAIL published vector a=%h b=%h cin=%0d: got %0d%h", a, b, cin, cout, s);
    end
  endtask

  task automatic check_mech(input string name, input int count);
    checks++;
    $display("mechanism %-12s happened %0d times", name, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism %s never happened", name);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Operand pairs of the published waveform.
    check_one(8'h1D, 8'h16, 1'b0);   // 33
    check_pub(8'h33, 1'b0);
    check_one(8'h94, 8'hA9, 1'b0);   // 13D
    check_pub(8'h3D, 1'b1);
    check_one(8'h94, 8'hA9, 1'b1);   // 13E
    check_pub(8'h3E, 1'b1);

    for (int i = 0; i < (1 << (2 * WIDTH + 1)); i++)
      check_one(WIDTH'(i >> (WIDTH + 1)), WIDTH'(i >> 1), i[0]);

    check_mech("incremented", n_incremented);
    check_mech("inc_carry",   n_inc_carry);
    check_mech("cla_carry",   n_cla_carry);
    check_mech("lo_cin",      n_lo_cin);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : cia_cla_tb
