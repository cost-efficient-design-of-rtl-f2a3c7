// tb_f2g_gate: exhaustive self-checking test of the double Feynman gate.
//
// For all 8 input vectors checks P = A, Q = B inverted when A = 1 and
// R = C inverted when A = 1, the fan-out use (B = C = 0 gives two copies of
// A), and that the gate is reversible.
module tb_f2g_gate;

  logic a, b, c;
  logic p, q, r;
  int   checks = 0;
  int   failures = 0;

  f2g_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: abc=%b%b%b got %b expected %b", what, a, b, c, got, exp);
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
    logic [7:0] seen;
    seen = '0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      check("P", p, a);
      check("Q", q, a ? !b : b);
      check("R", r, a ? !c : c);
      if (!b && !c) begin
        check("fan-out copy Q", q, a);
        check("fan-out copy R", r, a);
      end
      checks++;
      if (seen[{p, q, r}]) begin
        failures++;
        $display("FAIL output %b%b%b produced twice", p, q, r);
      end
      seen[{p, q, r}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_f2g_gate
