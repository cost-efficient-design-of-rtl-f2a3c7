// tb_inventive0_gate: exhaustive self-checking test of the Inventive0 gate.
//
// Applies all 16 input vectors (A, B, C, D) and compares {P, Q, R, S} with the
// gate's published 16-row truth table, held here as a constant. It then
// checks the full-adder reading (D = 0: Q = sum, R = carry of A + B + C) and
// the full-subtractor reading (D = 1: Q = difference, S = borrow of A - B - C)
// against integer arithmetic, and checks that the 16 output vectors are all
// different, i.e. that the gate is reversible.
module tb_inventive0_gate;

  logic a, b, c, d;
  logic p, q, r, s;
  int   checks = 0;
  int   failures = 0;

  inventive0_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

  // Expected {P,Q,R,S} indexed by {A,B,C,D}.
  localparam logic [3:0] TRUTH [16] = '{
    4'b0001, 4'b0010, 4'b1100, 4'b1111,
    4'b0100, 4'b0111, 4'b1010, 4'b1001,
    4'b0101, 4'b0110, 4'b1011, 4'b1000,
    4'b0011, 4'b0000, 4'b1110, 4'b1101
  };

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: abcd=%b%b%b%b got %b expected %b", what, a, b, c, d, got, exp);
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
    logic [15:0] seen;
    int sum_ab, diff_ab;
    seen = '0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      check("P", p, TRUTH[v][3]);
      check("Q", q, TRUTH[v][2]);
      check("R", r, TRUTH[v][1]);
      check("S", s, TRUTH[v][0]);
      if (d == 1'b0) begin
        sum_ab = int'(a) + int'(b) + int'(c);
        check("adder sum",   q, sum_ab[0]);
        check("adder carry", r, sum_ab[1]);
      end else begin
        diff_ab = int'(a) - int'(b) - int'(c);
        check("subtractor difference", q, diff_ab[0]);
        check("subtractor borrow",     s, diff_ab < 0);
      end
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output %b%b%b%b produced twice: gate not reversible", p, q, r, s);
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    checks++;
    if (seen != 16'hFFFF) begin
      failures++;
      $display("FAIL output vectors not a permutation: %h", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_inventive0_gate
