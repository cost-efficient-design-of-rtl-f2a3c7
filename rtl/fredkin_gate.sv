// fredkin_gate: the 3x3 reversible Fredkin (controlled swap) gate.
//
//   P = A
//   Q = ~A B + A C
//   R =  A B + ~A C
// When A = 0, B and C pass straight through; when A = 1 they are swapped.
// With C tied to 0, R = A B, so the gate serves as an AND; with A as a select
// line, Q is a 2:1 multiplexer (B when A = 0, C when A = 1). The carry-skip
// adder uses it both ways. The equations follow the design.
//
// Purely combinational.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);

  always_comb begin
    p = a;
    q = (~a & b) | (a & c);
    r = (a & b) | (~a & c);
  end

endmodule : fredkin_gate
