// cla_tb: exhaustive self-check of the 4-bit carry look-ahead adder.
//
// Runs every a, b and cin (512 cases) and compares {cout, sum} with the
// integer a + b + cin computed in the testbench. Also counts how many cases
// exercised a carry that travels through all four propagate bits, so the
// longest look-ahead term is known to have been used. A watchdog ends the run
// with a failure if it hangs.
module cla_tb;
  localparam int unsigned W = cia_pkg::CIA_GROUP;

  logic [W-1:0] a, b, sum;
  logic         cin, cout;
  int           checks = 0, failures = 0, full_propagate = 0;

  cla dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << (2 * W + 1)); i++) begin
      int expected;
      {a, b, cin} = (2 * W + 1)'(i);
      #1;
      expected = int'(a) + int'(b) + int'(cin);
      if ((a ^ b) == '1 && cin) full_propagate++;
      checks++;
      if ({cout, sum} !== (W + 1)'(expected)) begin
        failures++;
        if (failures < 10)
          $display("FAIL a=%h b=%h cin=%0d: got %0d%h expected %0h", a, b, cin, cout, sum, expected);
      end
    end
    checks++;
    if (full_propagate == 0) begin
      failures++;
      $display("FAIL: no case with a carry through all propagate bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : cla_tb
