// incrementer_tb: exhaustive self-check of the 4-bit half-adder incrementer.
//
// Runs every partial sum x and carry cin (32 cases) and compares {cout, y}
// with the integer x + cin. Counts the case where the carry ripples out of
// the last half adder (x all ones, cin = 1) and fails if it never occurs.
module incrementer_tb;
  localparam int unsigned W = cia_pkg::CIA_GROUP;

  logic [W-1:0] x, y;
  logic         cin, cout;
  int           checks = 0, failures = 0, overflow_seen = 0;

  incrementer dut (.x(x), .cin(cin), .y(y), .cout(cout));

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < (1 << (W + 1)); i++) begin
      int expected;
      {x, cin} = (W + 1)'(i);
      #1;
      expected = int'(x) + int'(cin);
      if (expected >= (1 << W)) overflow_seen++;
      checks++;
      if ({cout, y} !== (W + 1)'(expected)) begin
        failures++;
        $display("FAIL x=%h cin=%0d: got %0d%h expected %0h", x, cin, cout, y, expected);
      end
    end
    checks++;
    if (overflow_seen == 0) begin
      failures++;
      $display("FAIL: carry never rippled out of the chain");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule : incrementer_tb
