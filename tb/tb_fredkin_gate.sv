// tb_fredkin_gate: exhaustive self-checking test of the Fredkin gate.
//
// For all 8 input vectors checks P = A and that B and C pass straight through
// when A = 0 and are swapped when A = 1, then checks the two uses the
// carry-skip adder makes of the gate (AND with C = 0, 2:1 multiplexer on Q)
// and that the gate is reversible.
module tb_fredkin_gate;

  logic a, b, c;
  logic p, q, r;
  int   checks = 0;
  int   failures = 0;

  fredkin_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

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
      check("Q", q, a ? c : b);
      check("R", r, a ? b : c);
      if (!c) check("AND on R", r, a && b);
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

endmodule : tb_fredkin_gate
