// tb_inventive0_rca: self-checking test of the Inventive0 ripple-carry adder.
//
// The 4-bit adder (default width) is run over all 512 combinations of a, b
// and cin; a second, 8-bit instance is run on 2000 random vectors. Sum,
// carry out and the carry out of every stage are compared with integer
// addition of the operand prefixes.
module tb_inventive0_rca;

  localparam int unsigned W8 = 8;

  logic [3:0]  a4, b4, s4, carry4;
  logic        ci4, co4;
  logic [7:0]  go4;
  logic [W8-1:0] a8, b8, s8, carry8;
  logic          ci8, co8;
  logic [2*W8-1:0] go8;
  int checks = 0;
  int failures = 0;

  inventive0_rca dut4 (.a(a4), .b(b4), .cin(ci4), .sum(s4), .cout(co4), .carry(carry4), .garbage(go4));
  inventive0_rca #(.WIDTH(W8)) dut8 (.a(a8), .b(b8), .cin(ci8), .sum(s8), .cout(co8), .carry(carry8), .garbage(go8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int unsigned exp, part;
    for (int v = 0; v < 512; v++) begin
      {ci4, a4, b4} = 9'(v);
      #1;
      exp = int'(a4) + int'(b4) + int'(ci4);
      checks++;
      if ({co4, s4} !== 5'(exp)) begin
        failures++;
        $display("FAIL 4-bit %0d + %0d + %0d: got %0d expected %0d", a4, b4, ci4, {co4, s4}, exp);
      end
      for (int i = 0; i < 4; i++) begin
        part = (int'(a4) % (2 << i)) + (int'(b4) % (2 << i)) + int'(ci4);
        checks++;
        if (carry4[i] !== (part >= (2 << i))) begin
          failures++;
          $display("FAIL 4-bit stage %0d carry for %0d + %0d + %0d", i, a4, b4, ci4);
        end
      end
    end
    for (int n = 0; n < 2000; n++) begin
      a8 = 8'($urandom);
      b8 = 8'($urandom);
      ci8 = 1'($urandom);
      #1;
      exp = int'(a8) + int'(b8) + int'(ci8);
      checks++;
      if ({co8, s8} !== 9'(exp)) begin
        failures++;
        $display("FAIL 8-bit %0d + %0d + %0d: got %0d expected %0d", a8, b8, ci8, {co8, s8}, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_inventive0_rca
