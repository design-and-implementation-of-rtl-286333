// half_adder_tb: exhaustive self-check of the one-bit half adder.
//
// Applies all four input pairs and compares sum and carry with the integer
// sum a + b worked out in the testbench. A watchdog ends the run with a
// failure if it ever hangs.
module half_adder_tb;
  logic a, b, sum, carry;
  int   checks = 0, failures = 0;

  half_adder dut (.a(a), .b(b), .sum(sum), .carry(carry));

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      logic [1:0] total;
      {a, b} = 2'(i);
      #1;
      total = 2'(a) + 2'(b);
      checks++;
      if ({carry, sum} !== total) begin
        failures++;
        $display("FAIL a=%0d b=%0d: got carry=%0d sum=%0d", a, b, carry, sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : half_adder_tb
