// tb_feynman_gate: exhaustive self-checking test of the Feynman gate.
//
// For all 4 input vectors checks P = A and that Q equals B when A = 0 and the
// complement of B when A = 1.
module tb_feynman_gate;

  logic a, b;
  logic p, q;
  int   checks = 0;
  int   failures = 0;

  feynman_gate dut (.a(a), .b(b), .p(p), .q(q));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: ab=%b%b got %b expected %b", what, a, b, got, exp);
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
    for (int v = 0; v < 4; v++) begin
      {a, b} = 2'(v);
      #1;
      check("P", p, a);
      check("Q", q, a ? !b : b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_feynman_gate
