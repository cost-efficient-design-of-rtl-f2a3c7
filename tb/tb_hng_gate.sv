// tb_hng_gate: exhaustive self-checking test of the HNG gate.
//
// Applies all 16 input vectors and compares the outputs with the gate
// equations written out independently, with the C = D = 0 use (copies of A
// and B, propagate bit A ^ B, garbage A B) checked separately, and checks
// that the gate is reversible (all 16 output vectors different).
module tb_hng_gate;

  logic a, b, c, d;
  logic p, q, r, s;
  int   checks = 0;
  int   failures = 0;

  hng_gate dut (.a(a), .b(b), .c(c), .d(d), .p(p), .q(q), .r(r), .s(s));

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
    int ones;
    seen = '0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      ones = int'(a) + int'(b) + int'(c);
      check("P", p, a);
      check("Q", q, b);
      check("R", r, ones[0]);
      // (A^B)C ^ AB is the majority of A, B, C (full-adder carry).
      check("S", s, (ones >= 2) ^ d);
      if (!c && !d) begin
        check("propagate", r, a != b);
        check("garbage",   s, a && b);
      end
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output %b%b%b%b produced twice", p, q, r, s);
      end
      seen[{p, q, r, s}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_hng_gate
