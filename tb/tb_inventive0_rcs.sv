// tb_inventive0_rcs: self-checking test of the Inventive0 ripple-borrow subtractor.
//
// The 4-bit subtractor (default width) is run over all 512 combinations of
// a, b and bin; a second, 8-bit instance is run on 2000 random vectors. The
// difference, borrow out and the borrow out of every stage are compared with
// signed integer subtraction of the operand prefixes.
module tb_inventive0_rcs;

  localparam int unsigned W8 = 8;

  logic [3:0]  a4, b4, d4, borrow4;
  logic        bi4, bo4;
  logic [7:0]  go4;
  logic [W8-1:0] a8, b8, d8, borrow8;
  logic          bi8, bo8;
  logic [2*W8-1:0] go8;
  int checks = 0;
  int failures = 0;

  inventive0_rcs dut4 (.a(a4), .b(b4), .bin(bi4), .diff(d4), .bout(bo4), .borrow(borrow4), .garbage(go4));
  inventive0_rcs #(.WIDTH(W8)) dut8 (.a(a8), .b(b8), .bin(bi8), .diff(d8), .bout(bo8), .borrow(borrow8), .garbage(go8));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : stimulus
    int exp, part;
    for (int v = 0; v < 512; v++) begin
      {bi4, a4, b4} = 9'(v);
      #1;
      exp = int'(a4) - int'(b4) - int'(bi4);
      checks++;
      if (d4 !== 4'(exp) || bo4 !== (exp < 0)) begin
        failures++;
        $display("FAIL 4-bit %0d - %0d - %0d: got diff %0d bout %b expected %0d", a4, b4, bi4, d4, bo4, exp);
      end
      for (int i = 0; i < 4; i++) begin
        part = (int'(a4) % (2 << i)) - (int'(b4) % (2 << i)) - int'(bi4);
        checks++;
        if (borrow4[i] !== (part < 0)) begin
          failures++;
          $display("FAIL 4-bit stage %0d borrow for %0d - %0d - %0d", i, a4, b4, bi4);
        end
      end
    end
    for (int n = 0; n < 2000; n++) begin
      a8 = 8'($urandom);
      b8 = 8'($urandom);
      bi8 = 1'($urandom);
      #1;
      exp = int'(a8) - int'(b8) - int'(bi8);
      checks++;
      if (d8 !== 8'(exp) || bo8 !== (exp < 0)) begin
        failures++;
        $display("FAIL 8-bit %0d - %0d - %0d: got diff %0d bout %b expected %0d", a8, b8, bi8, d8, bo8, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule : tb_inventive0_rcs
