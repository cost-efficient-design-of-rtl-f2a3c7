// tb_carry_skip_adder: exhaustive self-checking test of the 4-bit carry-skip adder.
//
// Runs all 512 combinations of a, b and cin. Checks {cout, sum} against
// integer addition, the ripple carry c4, and the skip signal against the
// group-propagate condition a ^ b == 4'b1111. Whenever skip is set it checks
// that cout equals cin (the skip path); otherwise that cout equals c4 (the
// ripple path). Both paths, and both values of cin on the skip path, must be
// seen at least once.
module tb_carry_skip_adder;

  logic [3:0] a, b, sum;
  logic       cin, cout, skip, c4;
  int checks = 0;
  int failures = 0;
  int n_skip = 0, n_skip_cin1 = 0, n_ripple = 0, n_overflow = 0;

  carry_skip_adder dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout), .skip(skip), .c4(c4));

  task automatic check(input string what, input logic [4:0] got, input logic [4:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%0d b=%0d cin=%b got %0d expected %0d", what, a, b, cin, got, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int unsigned exp;
    for (int v = 0; v < 512; v++) begin
      {cin, a, b} = 9'(v);
      #1;
      exp = int'(a) + int'(b) + int'(cin);
      check("sum",  {cout, sum}, 5'(exp));
      check("c4",   5'(c4),      5'(exp >> 4));
      check("skip", 5'(skip),    5'((a ^ b) == 4'hF));
      if (skip) begin
        n_skip++;
        if (cin) n_skip_cin1++;
        check("skip path", 5'(cout), 5'(cin));
      end else begin
        n_ripple++;
        check("ripple path", 5'(cout), 5'(c4));
      end
      if (cout) n_overflow++;
    end
    $display("skip=%0d skip_with_cin=%0d ripple=%0d carry_out=%0d", n_skip, n_skip_cin1, n_ripple, n_overflow);
    checks += 3;
    if (n_skip == 0 || n_skip_cin1 == 0 || n_ripple == 0) begin
      failures++;
      $display("FAIL a carry path was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_carry_skip_adder
