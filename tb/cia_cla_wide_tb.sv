// cia_cla_wide_tb: self-check of the carry increment adder extended to
// 16 bits (four 4-bit groups), where group carries pass through three
// incrementer/OR stages in turn.
//
// Applies corner cases (all-ones operands, a carry-in that must ripple through
// every group) and 200000 random operand pairs, and compares {cout, s} with
// the integer a + b + cin. Counts the cases where the carry-in changed the
// carry out of the whole adder, i.e. passed through every group's
// incrementer, and fails if there were none.
module cia_cla_wide_tb;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned GROUP = 4;

  logic [WIDTH-1:0] a, b, s;
  logic             cin, cout;
  int               checks = 0, failures = 0, full_ripple = 0;

  cia_cla #(.WIDTH(WIDTH), .GROUP(GROUP)) dut (.a(a), .b(b), .cin(cin), .s(s), .cout(cout));

  task automatic check_one(input logic [WIDTH-1:0] ta, input logic [WIDTH-1:0] tb,
                           input logic tcin);
    longint expected;
    a = ta; b = tb; cin = tcin;
    #1;
    expected = longint'(ta) + longint'(tb) + longint'(tcin);
    if (tcin && (longint'(ta) + longint'(tb) == (1 << WIDTH) - 1)) full_ripple++;
    checks++;
    if ({cout, s} !== (WIDTH + 1)'(expected)) begin
      failures++;
      if (failures < 10)
        $display("FAIL a=%h b=%h cin=%0d: got cout=%0d s=%h expected %0h",
                 ta, tb, tcin, cout, s, expected);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one('1, '1, 1'b1);
    check_one('1, '0, 1'b1);
    check_one(16'h0F0F, 16'hF0F0, 1'b1);
    check_one(16'h8000, 16'h8000, 1'b0);
    for (int i = 0; i < 200000; i++) begin
      logic [WIDTH-1:0] ra;
      ra = WIDTH'($urandom);
      // One pair in eight sums to all ones, so the carry-in must ripple.
      if (i % 8 == 0) check_one(ra, ~ra, 1'($urandom));
      else            check_one(ra, WIDTH'($urandom), 1'($urandom));
    end
    checks++;
    if (full_ripple == 0) begin
      failures++;
      $display("FAIL: carry-in never rippled through every group");
    end
    $display("full ripple through all groups: %0d times", full_ripple);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : cia_cla_wide_tb
