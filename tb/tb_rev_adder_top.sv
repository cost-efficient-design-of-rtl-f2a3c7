// tb_rev_adder_top: end-to-end test of the reversible adder/subtractor top level.
//
// Runs every combination of a, b, cin and bin (1024 vectors) through the top
// at its default size. Checks {cout, sum} = a + b + cin and
// diff/bout = a - b - bin against integer arithmetic, and skip against the
// all-bits-propagate condition. Counts how often each mechanism of the design
// occurred (carry skipped past the ripple chain, carry out of the ripple
// chain, carry out through the skip path, borrow out of the subtractor) and
// counts a failure for any that never occurred.
module tb_rev_adder_top;

  logic [3:0] a, b, sum, diff;
  logic       cin, bin, cout, skip, bout;
  int checks = 0;
  int failures = 0;
  int n_skip = 0, n_skip_carry = 0, n_ripple_carry = 0, n_borrow = 0;

  rev_adder_top dut (
    .a(a), .b(b), .cin(cin), .bin(bin),
    .sum(sum), .cout(cout), .skip(skip), .diff(diff), .bout(bout)
  );

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int add_exp, sub_exp;
    for (int v = 0; v < 1024; v++) begin
      {bin, cin, a, b} = 10'(v);
      #1;
      add_exp = int'(a) + int'(b) + int'(cin);
      sub_exp = int'(a) - int'(b) - int'(bin);
      checks++;
      if ({cout, sum} !== 5'(add_exp)) begin
        failures++;
        $display("FAIL add %0d + %0d + %0d: got %0d expected %0d", a, b, cin, {cout, sum}, add_exp);
      end
      checks++;
      if (diff !== 4'(sub_exp) || bout !== (sub_exp < 0)) begin
        failures++;
        $display("FAIL sub %0d - %0d - %0d: got diff %0d bout %b expected %0d", a, b, bin, diff, bout, sub_exp);
      end
      checks++;
      if (skip !== ((a ^ b) == 4'hF)) begin
        failures++;
        $display("FAIL skip for a=%0d b=%0d", a, b);
      end
      if (skip) n_skip++;
      if (skip && cout) n_skip_carry++;
      if (!skip && cout) n_ripple_carry++;
      if (bout) n_borrow++;
    end
    $display("skip=%0d carry_via_skip=%0d carry_via_ripple=%0d borrow_out=%0d",
             n_skip, n_skip_carry, n_ripple_carry, n_borrow);
    checks += 4;
    if (n_skip == 0)         begin failures++; $display("FAIL skip path never taken"); end
    if (n_skip_carry == 0)   begin failures++; $display("FAIL no carry out through the skip path"); end
    if (n_ripple_carry == 0) begin failures++; $display("FAIL no carry out through the ripple chain"); end
    if (n_borrow == 0)       begin failures++; $display("FAIL subtractor never borrowed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_rev_adder_top
